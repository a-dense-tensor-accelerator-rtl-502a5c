// tb_vm_teu_ctrl: self-checking test of the loop sequencer vm_teu_ctrl.
// Runs random four-loop jobs with a random iss_ready and compares every issued step
// (both operand bases, PSum row, first flag) with a nested-loop model, and
// checks the number of steps and that active drops after the last one.
module tb_vm_teu_ctrl;
  import vm_pkg::*;
  logic clk = 0, rst_n = 0;
  logic start, active, iss_valid, iss_ready, iss_first;
  teucfg_t cfg, cfg_q;
  addr_t iss_base0, iss_base1;
  paddr_t iss_paddr;
  int checks = 0, failures = 0;

  vm_teu_ctrl dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = 0; iss_ready = 0; cfg = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int job = 0; job < 20; job++) begin
      int steps;
      @(negedge clk);
      cfg = '0;
      cfg.n0 = cnt_t'($urandom_range(1, 6));
      cfg.n1 = cnt_t'($urandom_range(1, 4));
      cfg.n2 = cnt_t'($urandom_range(1, 3));
      cfg.n3 = cnt_t'($urandom_range(1, 4));
      cfg.pbase = paddr_t'($urandom_range(0, 10));
      cfg.accum = 1'($urandom_range(1));
      cfg.op0.base = addr_t'($urandom); cfg.op0.s0 = addr_t'($urandom);
      cfg.op0.s1 = addr_t'($urandom);   cfg.op0.s2 = addr_t'($urandom);
      cfg.op0.s3 = addr_t'($urandom);   cfg.op1.s3 = addr_t'($urandom);
      cfg.op1.base = addr_t'($urandom); cfg.op1.s0 = addr_t'($urandom);
      cfg.op1.s1 = addr_t'($urandom);   cfg.op1.s2 = addr_t'($urandom);
      start = 1;
      @(negedge clk);
      start = 0;
      steps = 0;
      for (int i3 = 0; i3 < int'(cfg.n3); i3++)
      for (int i2 = 0; i2 < int'(cfg.n2); i2++)
        for (int i1 = 0; i1 < int'(cfg.n1); i1++)
          for (int i0 = 0; i0 < int'(cfg.n0); i0++) begin
            addr_t e0, e1;
            iss_ready = 0;
            while (!iss_ready) begin
              iss_ready = 1'($urandom_range(1));
              if (!iss_ready) @(negedge clk);
            end
            e0 = cfg.op0.base + addr_t'(i3) * cfg.op0.s3 + addr_t'(i2) * cfg.op0.s2 + addr_t'(i1) * cfg.op0.s1 + addr_t'(i0) * cfg.op0.s0;
            e1 = cfg.op1.base + addr_t'(i3) * cfg.op1.s3 + addr_t'(i2) * cfg.op1.s2 + addr_t'(i1) * cfg.op1.s1 + addr_t'(i0) * cfg.op1.s0;
            #1;
            checks++;
            if (!iss_valid || iss_base0 != e0 || iss_base1 != e1 ||
                iss_paddr != cfg.pbase + paddr_t'(i3) ||
                iss_first != (!cfg.accum && i0 == 0 && i1 == 0 && i2 == 0)) begin
              failures++;
              $display("FAIL job %0d step (%0d,%0d,%0d,%0d): v=%0d b0=%0d/%0d b1=%0d/%0d p=%0d f=%0d",
                       job, i3, i2, i1, i0, iss_valid, iss_base0, e0, iss_base1, e1, iss_paddr, iss_first);
            end
            steps++;
            @(negedge clk);
          end
      iss_ready = 0;
      checks++;
      if (active || iss_valid) begin failures++; $display("FAIL still active after %0d steps", steps); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
