// tb_vm_workloads: a convolution tile and a spatial-correlation tile on one TEU.
//
// Shows that the lane address form and the four-loop job express the two
// non-GEMM workload classes, and checks every result against a direct model.
//
// Convolution (eq. 2, a TinyYOLO-like 3x3 layer, stride 1, Ci = 3):
//   lanes: bits 0-2 = output column ox (8), bits 3-4 = output channel co (4)
//   PSum row = output row oy (i3, 2 rows); temporal i2 = input channel l,
//   i1 = kernel row n, i0 = kernel column m.
//   input  I(l, y, x) at 64l + 16y + x        (operand 1, o = {1,1,1,0,0})
//   kernel k(co,l,n,m) at 32(9l + 3n + m) + 8co (operand 0, o = {0,0,0,1,1})
// Correlation (eq. 3, FlowNet-style, C = 8 channels):
//   C(dx, dy, x) = sum_m I1(m, x) * I2(m, dy, x + dx)
//   lanes: bits 0-1 = dx (4 displacements), bits 2-4 = x' with x = 4x' + x0
//   PSum row = dy (i3, 3 rows); temporal i0 = channel m; one job per x0 (0, 1).
//   I1(m, x)     at 64m + x               (operand 1, o = {0,0,1,1,1})
//   I2(m, dy, x) at 128m + 40dy + x       (operand 0, o = {1,1,1,1,1})
// Both layouts give distinct banks or multicasts; `conflict` must stay low.
// Each job must run at one step per cycle (steps + 3 cycles).
module tb_vm_workloads;
  import vm_pkg::*;
  localparam int CI = 3, CO = 4, OW = 8, OH = 2, KS = 3;
  localparam int CC = 8, NDX = 4, NDY = 3, XW = 40;

  logic clk = 0, rst_n = 0;
  logic start, busy, stall, conflict;
  teucfg_t cfg, job;
  logic ld_en, ld_buf, dr_en, dr_sel;
  row_t ld_row;
  vec_t ld_data;
  paddr_t dr_addr;
  pvec_t dr_data;
  logic [3:0] out_valid, out_ready, in_valid, in_ready;
  vec_t [3:0] out_data, in_data;

  vm_teu dut (.*);

  int checks = 0, failures = 0, n_conflict = 0;
  data_t img0 [1 << ADDR_W];
  data_t img1 [1 << ADDR_W];
  data_t I [CI][OH + KS - 1][OW + KS - 1];
  data_t Kw [CO][CI][KS][KS];
  data_t I1 [CC][XW];
  data_t I2 [CC][NDY][XW];

  always #5 clk = ~clk;
  always @(posedge clk) if (conflict) n_conflict++;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load_images();
    for (int b = 0; b < 2; b++)
      for (int r = 0; r < BANK_DEPTH; r++) begin
        @(negedge clk);
        ld_en = 1; ld_buf = 1'(b); ld_row = row_t'(r);
        for (int w = 0; w < LANES; w++) ld_data[w] = (b != 0) ? img1[r * LANES + w] : img0[r * LANES + w];
      end
    @(negedge clk);
    ld_en = 0;
  endtask

  task automatic run_job(input teucfg_t c, input int steps, input string what);
    int cycles;
    @(negedge clk);
    cfg = c; start = 1;
    @(negedge clk);
    start = 0;
    cycles = 1;
    while (busy) begin @(negedge clk); cycles++; end
    checks++;
    if (cycles != steps + 3) begin
      failures++; $display("FAIL %s took %0d cycles, expected %0d", what, cycles, steps + 3);
    end
  endtask

  task automatic drain(input int row);
    @(negedge clk);
    dr_en = 1; dr_sel = 0; dr_addr = paddr_t'(row);
    @(negedge clk);
    dr_en = 0;
  endtask

  task automatic cmp(input psum_t got, input psum_t exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++; $display("FAIL %s got %0d exp %0d", what, got, exp);
    end
  endtask

  initial begin
    teucfg_t c;
    start = 0; cfg = '0; ld_en = 0; ld_buf = 0; ld_row = '0; ld_data = '0;
    dr_en = 0; dr_sel = 0; dr_addr = '0; out_ready = '0; in_valid = '0; in_data = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;

    // ---------------- convolution ----------------
    for (int a = 0; a < (1 << ADDR_W); a++) begin img0[a] = '0; img1[a] = '0; end
    foreach (I[l, y, x]) begin I[l][y][x] = data_t'($urandom_range(0, 255) - 128); img1[64 * l + 16 * y + x] = I[l][y][x]; end
    foreach (Kw[o, l, n, m]) begin Kw[o][l][n][m] = data_t'($urandom_range(0, 255) - 128); img0[32 * (9 * l + 3 * n + m) + 8 * o] = Kw[o][l][n][m]; end
    load_images();
    c = '0;
    c.n0 = cnt_t'(KS); c.n1 = cnt_t'(KS); c.n2 = cnt_t'(CI); c.n3 = cnt_t'(OH);
    c.pbase = '0; c.acc_sel = 0; c.accum = 0;
    c.op1.s0 = 1;  c.op1.s1 = 16; c.op1.s2 = 64;  c.op1.s3 = 16;
    c.op1.o[0] = 1; c.op1.o[1] = 1; c.op1.o[2] = 1;
    c.op0.s0 = 32; c.op0.s1 = 96; c.op0.s2 = 288; c.op0.s3 = 0;
    c.op0.o[3] = 1; c.op0.o[4] = 1;
    c.op0.src = SRC_LOCAL; c.op1.src = SRC_LOCAL; c.op0.fwd = FWD_NONE; c.op1.fwd = FWD_NONE;
    run_job(c, OH * CI * KS * KS, "conv");
    for (int oy = 0; oy < OH; oy++) begin
      drain(oy);
      for (int n = 0; n < LANES; n++) begin
        int ox, co;
        psum_t e;
        ox = n & 7; co = n >> 3; e = 0;
        for (int l = 0; l < CI; l++)
          for (int kn = 0; kn < KS; kn++)
            for (int km = 0; km < KS; km++)
              e += psum_t'(I[l][oy + kn][ox + km] * Kw[co][l][kn][km]);
        cmp(dr_data[n], e, $sformatf("conv co%0d oy%0d ox%0d", co, oy, ox));
      end
    end

    // ---------------- correlation ----------------
    for (int a = 0; a < (1 << ADDR_W); a++) begin img0[a] = '0; img1[a] = '0; end
    foreach (I1[m, x]) begin I1[m][x] = data_t'($urandom_range(0, 255) - 128); img1[64 * m + x] = I1[m][x]; end
    foreach (I2[m, d, x]) begin I2[m][d][x] = data_t'($urandom_range(0, 255) - 128); img0[128 * m + 40 * d + x] = I2[m][d][x]; end
    load_images();
    for (int x0 = 0; x0 < 2; x0++) begin
      c = '0;
      c.n0 = cnt_t'(CC); c.n1 = 1; c.n2 = 1; c.n3 = cnt_t'(NDY);
      c.pbase = paddr_t'(4 * x0); c.acc_sel = 0; c.accum = 0;
      c.op1.base = addr_t'(x0); c.op1.s0 = 64;  c.op1.s3 = 0;
      c.op1.o[2] = 1; c.op1.o[3] = 1; c.op1.o[4] = 1;
      c.op0.base = addr_t'(x0); c.op0.s0 = 128; c.op0.s3 = 40;
      for (int i = 0; i < LANE_BITS; i++) c.op0.o[i] = 1;
      c.op0.src = SRC_LOCAL; c.op1.src = SRC_LOCAL; c.op0.fwd = FWD_NONE; c.op1.fwd = FWD_NONE;
      run_job(c, NDY * CC, "correlation");
      for (int dy = 0; dy < NDY; dy++) begin
        drain(4 * x0 + dy);
        for (int n = 0; n < LANES; n++) begin
          int dx, x;
          psum_t e;
          dx = n & 3; x = 4 * (n >> 2) + x0; e = 0;
          for (int m = 0; m < CC; m++) e += psum_t'(I1[m][x] * I2[m][dy][x + dx]);
          cmp(dr_data[n], e, $sformatf("corr dx%0d dy%0d x%0d", dx, dy, x));
        end
      end
    end
    checks++;
    if (n_conflict != 0) begin failures++; $display("FAIL %0d conflicts", n_conflict); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
