// tb_vm_gemm_pkg: GEMM tile layout shared by the TEU and mesh testbenches.
//
// A TEU computes an 8 x 8 block C = A * B with A 8 x K (operand 1) and B K x 8
// (operand 0). Lane N holds C(i, j) with j = N[2:0] and i = 4*g + N[4:3], where
// g (0 or 1, the outer loop i3) is the PSum row pbase + g. Buffer layouts:
//   B(k, j) at word 8k + j       lanes: o = {1,1,1,0,0}, step s0 = 8
//   A(i, k) at word 64k + 8i     lanes: o = {0,0,0,1,1}, step s0 = 64, s3 = 32
// Both give each lane a different bank (or a multicast of one word), the
// conflict-free form of the butterfly. The temporal loop over k is split into
// n2 x n1 x n0 (factors of 2 where K allows), to exercise all loop levels.
package tb_vm_gemm_pkg;
  import vm_pkg::*;

  function automatic int addr_b(input int k, input int j);
    return 8 * k + j;
  endfunction
  function automatic int addr_a(input int i, input int k);
    return 64 * k + 8 * i;
  endfunction
  function automatic int lane_i(input int g, input int n);
    return 4 * g + (n >> 3);
  endfunction
  function automatic int lane_j(input int n);
    return n & 7;
  endfunction

  function automatic teucfg_t gemm_cfg(input int K, input int pbase, input bit acc_sel,
                                       input bit accum, input src_e s0, input fwd_e f0,
                                       input src_e s1, input fwd_e f1);
    teucfg_t c;
    int n0, n1;
    n0 = (K % 2 == 0) ? 2 : 1;
    n1 = ((K / n0) % 2 == 0) ? 2 : 1;
    c = '0;
    c.n0 = cnt_t'(n0);
    c.n1 = cnt_t'(n1);
    c.n2 = cnt_t'(K / (n0 * n1));
    c.n3 = cnt_t'(2);
    c.pbase = paddr_t'(pbase);
    c.acc_sel = acc_sel;
    c.accum = accum;
    c.op0.base = '0; c.op0.s0 = addr_t'(8);  c.op0.s1 = addr_t'(8 * n0);
    c.op0.s2 = addr_t'(8 * n0 * n1);  c.op0.s3 = '0;
    c.op0.o[0] = 1; c.op0.o[1] = 1; c.op0.o[2] = 1; c.op0.o[3] = 0; c.op0.o[4] = 0;
    c.op1.base = '0; c.op1.s0 = addr_t'(64); c.op1.s1 = addr_t'(64 * n0);
    c.op1.s2 = addr_t'(64 * n0 * n1); c.op1.s3 = addr_t'(32);
    c.op1.o[0] = 0; c.op1.o[1] = 0; c.op1.o[2] = 0; c.op1.o[3] = 1; c.op1.o[4] = 1;
    c.op0.src = s0; c.op0.fwd = f0;
    c.op1.src = s1; c.op1.fwd = f1;
    return c;
  endfunction
endpackage
