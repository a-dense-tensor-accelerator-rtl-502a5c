// tb_vectormesh_full: the default 4 x 4 VectorMesh (512 PEs) through one
// complete GEMM, with every parameter at its default.
//
// C (32 x 32) = A (32 x 8K... in 8-row blocks) * B: TEU (r, c) computes the
// 8 x 8 block C(r, c) = A_r * B_c over K = 16. A_r is loaded only into TEU (r, 0)
// and streamed east along row r, each TEU using it and passing it on; B_c is
// loaded only into TEU (0, c) and streamed south along column c. So the middle
// TEUs both take an operand from one FIFO and push it into the next. All 16
// TEUs start together; the job must end after 2K + 3 cycles plus one per FIFO
// hop of the longest chain (6), and every PSum must match the model.
module tb_vectormesh_full;
  import vm_pkg::*;
  import tb_vm_gemm_pkg::*;
  localparam int ROWS = 4, COLS = 4, T = ROWS * COLS, K = 16;

  logic clk = 0, rst_n = 0;
  logic    [T-1:0] start, busy, stall, conflict, ld_en, ld_buf, dr_en, dr_sel;
  teucfg_t [T-1:0] cfg;
  row_t    [T-1:0] ld_row;
  vec_t    [T-1:0] ld_data;
  paddr_t  [T-1:0] dr_addr;
  pvec_t   [T-1:0] dr_data;

  vectormesh dut (.*);

  int checks = 0, failures = 0, n_conflict = 0;
  data_t Ar [ROWS][8][K];
  data_t Bc [COLS][K][8];

  always #5 clk = ~clk;
  always @(posedge clk) n_conflict += $countones(conflict);
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load(input int t, input int b, input bit is_a, input int idx);
    data_t img [1 << ADDR_W];
    for (int a = 0; a < (1 << ADDR_W); a++) img[a] = '0;
    for (int k = 0; k < K; k++)
      for (int x = 0; x < 8; x++)
        if (is_a) img[addr_a(x, k)] = Ar[idx][x][k];
        else      img[addr_b(k, x)] = Bc[idx][k][x];
    for (int r = 0; r < (64 * K + LANES - 1) / LANES; r++) begin
      @(negedge clk);
      ld_en[t] = 1; ld_buf[t] = 1'(b); ld_row[t] = row_t'(r);
      for (int w = 0; w < LANES; w++) ld_data[t][w] = img[r * LANES + w];
    end
    @(negedge clk);
    ld_en[t] = 0;
  endtask

  initial begin
    int cycles;
    start = '0; cfg = '0; ld_en = '0; ld_buf = '0; ld_row = '0; ld_data = '0;
    dr_en = '0; dr_sel = '0; dr_addr = '0;
    for (int r = 0; r < ROWS; r++) for (int i = 0; i < 8; i++) for (int k = 0; k < K; k++) Ar[r][i][k] = data_t'($urandom);
    for (int c = 0; c < COLS; c++) for (int k = 0; k < K; k++) for (int j = 0; j < 8; j++) Bc[c][k][j] = data_t'($urandom);
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < ROWS; r++) load(r * COLS, 1, 1, r);
    for (int c = 0; c < COLS; c++) load(c, 0, 0, c);
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++)
        cfg[r * COLS + c] = gemm_cfg(K, 0, 0, 0,
          (r == 0) ? SRC_LOCAL : SRC_NEG, (r < ROWS - 1) ? FWD_POS : FWD_NONE,
          (c == 0) ? SRC_LOCAL : SRC_NEG, (c < COLS - 1) ? FWD_POS : FWD_NONE);
    @(negedge clk);
    start = '1;
    @(negedge clk);
    start = '0;
    cycles = 1;
    while (busy != '0) begin @(negedge clk); cycles++; end
    checks++;
    if (cycles != 2 * K + 3 + (ROWS - 1) + (COLS - 1)) begin
      failures++; $display("FAIL took %0d cycles, expected %0d", cycles, 2 * K + 3 + ROWS + COLS - 2);
    end
    for (int t = 0; t < T; t++)
      for (int g = 0; g < 2; g++) begin
        @(negedge clk);
        dr_en[t] = 1; dr_sel[t] = 0; dr_addr[t] = paddr_t'(g);
        @(negedge clk);
        dr_en[t] = 0;
        for (int n = 0; n < LANES; n++) begin
          psum_t e;
          e = 0;
          for (int k = 0; k < K; k++) e += psum_t'(Ar[t / COLS][lane_i(g, n)][k] * Bc[t % COLS][k][lane_j(n)]);
          checks++;
          if (dr_data[t][n] !== e) begin
            failures++;
            $display("FAIL TEU%0d g%0d lane %0d got %0d exp %0d", t, g, n, dr_data[t][n], e);
          end
        end
      end
    checks++;
    if (n_conflict != 0) begin failures++; $display("FAIL %0d bank conflicts", n_conflict); end
    $display("cycles=%0d", cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
