// tb_vm_input_buffer: self-checking test of vm_input_buffer.
// Fills the 8 KB buffer row by row from a shadow image, then reads vectors whose
// lane addresses follow the conflict-free form A_N = A0 + sum 2^i o_i N_i
// (o_i odd or zero); each lane must return image[A_N] one cycle later, in one
// pass (busy and multi low), and hold it while re=0. Then random addresses and
// a read with all lanes on different rows of one bank: the buffer must stay
// busy for the extra passes, raise multi, and return the right words.
module tb_vm_input_buffer;
  import vm_pkg::*;
  logic clk = 0, rst_n = 0;
  logic re, we, busy, multi;
  int n_multi = 0, max_wait = 0;
  addr_t [LANES-1:0] raddr;
  vec_t rdata, wdata;
  row_t wrow;
  data_t image [1 << ADDR_W];
  int checks = 0, failures = 0;

  vm_input_buffer dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_read(input addr_t [LANES-1:0] a, input string what);
    for (int n = 0; n < LANES; n++) begin
      checks++;
      if (rdata[n] !== image[a[n]]) begin
        failures++;
        $display("FAIL %s lane %0d addr %0d got %h exp %h", what, n, a[n], rdata[n], image[a[n]]);
      end
    end
  endtask

  initial begin
    re = 0; we = 0; raddr = '0; wdata = '0; wrow = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < BANK_DEPTH; r++) begin
      @(negedge clk);
      we = 1; wrow = row_t'(r);
      for (int b = 0; b < LANES; b++) begin
        wdata[b] = data_t'($urandom);
        image[r * LANES + b] = wdata[b];
      end
    end
    @(negedge clk); we = 0;
    for (int t = 0; t < 200; t++) begin
      int a0;
      int o [LANE_BITS];
      addr_t [LANES-1:0] a;
      a0 = $urandom_range((1 << ADDR_W) - 1);
      for (int i = 0; i < LANE_BITS; i++)
        o[i] = ($urandom_range(2) == 0) ? 0 : ($urandom_range(63) * 2 + 1);
      for (int n = 0; n < LANES; n++) begin
        int s;
        s = a0;
        for (int i = 0; i < LANE_BITS; i++) if (((n >> i) & 1) != 0) s += o[i] << i;
        a[n] = addr_t'(s);
      end
      @(negedge clk); re = 1; raddr = a;
      @(negedge clk); re = 0; raddr = '0;
      expect_read(a, "form");
      checks++;
      if (busy || multi) begin failures++; $display("FAIL extra pass on conflict-free read"); end
      @(negedge clk);
      expect_read(a, "hold");
    end
    // random lanes, some reads with all lanes in bank 3 on different rows
    for (int t = 0; t < 300; t++) begin
      addr_t [LANES-1:0] a;
      int wait_c;
      for (int n = 0; n < LANES; n++)
        a[n] = (t % 10 == 0) ? addr_t'(3 + n * LANES) : addr_t'($urandom_range((1 << ADDR_W) - 1));
      @(negedge clk); re = 1; raddr = a;
      @(negedge clk); re = 0; raddr = '0;
      wait_c = 0;
      while (busy) begin @(negedge clk); wait_c++; end
      if (wait_c > max_wait) max_wait = wait_c;
      if (multi) n_multi++;
      checks++;
      if ((wait_c != 0) != multi) begin failures++; $display("FAIL multi does not match busy"); end
      expect_read(a, "passes");
      if (t % 10 == 0) begin
        checks++;
        if (wait_c != LANES - 1) begin
          failures++; $display("FAIL one-bank read waited %0d cycles, expected %0d", wait_c, LANES - 1);
        end
      end
      @(negedge clk);
      expect_read(a, "hold after passes");
    end
    checks++;
    if (n_multi == 0) begin failures++; $display("FAIL no multi-pass read seen"); end
    $display("multi-pass reads=%0d longest wait=%0d", n_multi, max_wait);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
