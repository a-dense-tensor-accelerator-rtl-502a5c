// tb_vm_agu: self-checking test of vm_agu.
// For random bases and offsets, each lane address must equal
// base + sum over set bits i of lane N of 2^i * o_i, modulo 4096, computed here
// with integer arithmetic.
module tb_vm_agu;
  import vm_pkg::*;
  addr_t                 base;
  addr_t [LANE_BITS-1:0] o;
  addr_t [LANES-1:0]     addr;
  int checks = 0, failures = 0;

  vm_agu dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 200; t++) begin
      base = addr_t'($urandom);
      for (int i = 0; i < LANE_BITS; i++)
        o[i] = (t % 3 == 0) ? addr_t'(($urandom_range(7) * 2 + 1) * ($urandom_range(1))) : addr_t'($urandom);
      #1;
      for (int n = 0; n < LANES; n++) begin
        int e;
        e = int'(base);
        for (int i = 0; i < LANE_BITS; i++)
          if (((n >> i) & 1) != 0) e += int'(o[i]) * (1 << i);
        e = e % (1 << ADDR_W);
        checks++;
        if (int'(addr[n]) != e) begin
          failures++;
          $display("FAIL lane %0d got %0d exp %0d", n, addr[n], e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
