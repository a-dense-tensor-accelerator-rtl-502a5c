// tb_vm_peg: self-checking test of the PE group vm_peg.
// Sends random MAC operations (random rows, first flags, back-to-back repeats
// of one row to force the bypass) into SRAM 0, compares every row with a model,
// then accumulates into SRAM 1 while draining SRAM 0 in the same cycles. Checks
// one operation per cycle (busy ends one cycle after the last operation).
module tb_vm_peg;
  import vm_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_first, acc_sel, dr_en, dr_sel, busy, bypass;
  vec_t in_a, in_b;
  paddr_t in_paddr, dr_addr;
  pvec_t dr_data;
  pvec_t model [2][PSUM_DEPTH];
  int checks = 0, failures = 0, n_bypass = 0;

  vm_peg dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) if (bypass) n_bypass++;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic mac_op(input int sel, input int row, input bit first);
    in_valid = 1; acc_sel = 1'(sel); in_paddr = paddr_t'(row); in_first = first;
    for (int n = 0; n < LANES; n++) begin
      in_a[n] = data_t'($urandom);
      in_b[n] = data_t'($urandom);
      model[sel][row][n] = (first ? 32'sd0 : model[sel][row][n]) + psum_t'(in_a[n] * in_b[n]);
    end
  endtask

  task automatic check_row(input int sel, input int row, input pvec_t got, input string what);
    for (int n = 0; n < LANES; n++) begin
      checks++;
      if (got[n] !== model[sel][row][n]) begin
        failures++;
        $display("FAIL %s sel %0d row %0d lane %0d got %0d exp %0d", what, sel, row, n, got[n], model[sel][row][n]);
      end
    end
  endtask

  initial begin

    in_valid = 0; in_first = 0; acc_sel = 0; dr_en = 0; dr_sel = 0;
    in_a = '0; in_b = '0; in_paddr = '0; dr_addr = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // initialise all rows of SRAM 0 and 1
    for (int s = 0; s < 2; s++)
      for (int r = 0; r < PSUM_DEPTH; r++) begin
        @(negedge clk); mac_op(s, r, 1);
      end
    // random accumulation on SRAM 0, back to back
    @(negedge clk);
    for (int i = 0; i < 400; i++) begin
      int r;
      r = (i % 4 != 0) ? int'(in_paddr) : $urandom_range(PSUM_DEPTH - 1);
      mac_op(0, r, ($urandom_range(15) == 0));
      @(negedge clk);
    end
    in_valid = 0;
    @(negedge clk);
    checks++;
    if (busy) begin failures++; $display("FAIL busy after last op"); end
    // drain SRAM 0 while accumulating SRAM 1
    for (int r = 0; r < PSUM_DEPTH; r++) begin
      mac_op(1, $urandom_range(PSUM_DEPTH - 1), 0);
      dr_en = 1; dr_sel = 0; dr_addr = paddr_t'(r);
      @(negedge clk);
      dr_en = 0; in_valid = 0;
      check_row(0, r, dr_data, "drain0");
    end
    @(negedge clk);
    for (int r = 0; r < PSUM_DEPTH; r++) begin
      dr_en = 1; dr_sel = 1; dr_addr = paddr_t'(r);
      @(negedge clk);
      dr_en = 0;
      check_row(1, r, dr_data, "drain1");
    end
    checks++;
    if (n_bypass == 0) begin failures++; $display("FAIL bypass never used"); end
    $display("bypasses=%0d", n_bypass);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
