// vm_agu: per-PE address generator of an input buffer.
//
// Computes the word address of every PE lane N (0..31) of a TEU in one cycle,
// following the access form the paper uses to guarantee a conflict-free read
// through the butterfly network:
//     A_N = A_0 + sum_{i=0}^{4} 2^i * o_i * b_i,   b_i = bit i of N.
// A_0 (base) is the loop-dependent start address from the TEU controller; o_i
// are the per-bit offsets of the operand's layout. With every o_i odd or zero,
// the 32 addresses fall in distinct banks or repeat the same address, which the
// butterfly serves in one pass (o_i = 0 multicasts one word to several lanes).
// The paper prints the weight as 2^X; the weight 2^i is used here, since only
// that form spreads lanes over banks (see the README). Purely combinational;
// addresses wrap modulo the buffer size.
module vm_agu
  import vm_pkg::*;
(
  input  addr_t                 base,
  input  addr_t [LANE_BITS-1:0] o,
  output addr_t [LANES-1:0]     addr
);
  always_comb begin
    addr_t a;
    a = '0;
    for (int n = 0; n < LANES; n++) begin
      a = base;
      for (int i = 0; i < LANE_BITS; i++)
        if (n[i]) a = a + addr_t'(o[i] << i);
      addr[n] = a;
    end
  end
endmodule
