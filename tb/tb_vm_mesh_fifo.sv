// tb_vm_mesh_fifo: self-checking test of vm_mesh_fifo.
// Streams random vectors A->B, then B->A, with random push and pop activity,
// and checks order against a queue model, that exactly DEPTH entries fit, that
// the idle ports stay quiet, and that both full and empty occur.
module tb_vm_mesh_fifo;
  import vm_pkg::*;
  logic clk = 0, rst_n = 0, dir;
  logic a_in_valid, a_in_ready, a_out_valid, a_out_ready;
  logic b_in_valid, b_in_ready, b_out_valid, b_out_ready, empty;
  vec_t a_in_data, a_out_data, b_in_data, b_out_data;
  vec_t q[$];
  int checks = 0, failures = 0, n_full = 0;

  vm_mesh_fifo dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic vec_t rnd_vec();
    vec_t v;
    for (int n = 0; n < LANES; n++) v[n] = data_t'($urandom);
    return v;
  endfunction

  task automatic run_dir(input logic d, input int n_items);
    int sent = 0, got = 0;
    dir = d;
    while (got < n_items) begin
      logic pv, pr;
      vec_t pd;
      @(negedge clk);
      pv = (sent < n_items) && ($urandom_range(3) != 0);
      pr = ($urandom_range(2) == 0) || (sent == n_items);
      pd = rnd_vec();
      a_in_valid = !d && pv; a_in_data = pd; b_in_valid = d && pv; b_in_data = pd;
      b_out_ready = !d && pr; a_out_ready = d && pr;
      #1;
      // idle ports
      checks++;
      if ((d ? (a_in_ready || b_out_valid) : (b_in_ready || a_out_valid))) begin
        failures++; $display("FAIL idle port active dir=%0d", d);
      end
      if (q.size() == FIFO_DEPTH) n_full++;
      checks++;
      if ((d ? b_in_ready : a_in_ready) != (q.size() < FIFO_DEPTH)) begin
        failures++; $display("FAIL ready with %0d entries", q.size());
      end
      @(posedge clk);
      // pop
      if (pr && (d ? a_out_valid : b_out_valid)) begin
        vec_t e;
        e = q.pop_front();
        checks++;
        if ((d ? a_out_data : b_out_data) !== e) begin failures++; $display("FAIL data order"); end
        got++;
      end
      if (pv && (d ? b_in_ready : a_in_ready)) begin
        q.push_back(pd);
        sent++;
      end
    end
    @(negedge clk);
    a_in_valid = 0; b_in_valid = 0; a_out_ready = 0; b_out_ready = 0;
    checks++;
    if (!empty) begin failures++; $display("FAIL not empty at end"); end
  endtask

  initial begin
    dir = 0; a_in_valid = 0; b_in_valid = 0; a_out_ready = 0; b_out_ready = 0;
    a_in_data = '0; b_in_data = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    run_dir(1'b0, 300);
    run_dir(1'b1, 300);
    checks++;
    if (n_full == 0) begin failures++; $display("FAIL never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
