// tb_vectormesh: end-to-end test of a 2 x 2 VectorMesh (the 128-PE array).
//
// Computes the blocked GEMM C = A * B of Fig. 2, with A = [E F; G H] and
// B = [W X; Y Z] (8 x 8 blocks, K = 10). Every block is loaded into exactly one
// TEU: TEU0 holds W, E; TEU1 X, F; TEU2 Y, G; TEU3 Z, H.
//   phase 0: E goes east and G goes east, W goes south and X goes south;
//            each TEU computes its first product (P=EW, Q=EX, R=GW, S=GX).
//   phase 1: the FIFOs turn round - F and H go west, Y and Z go north - and
//            each TEU accumulates its second product (P+=FY, Q+=FZ, R+=HY, S+=HZ).
//   phase 2: phase 0 again into the other PSum SRAM while the results of
//            phases 0+1 are drained from the first (ping-pong).
// TEUs are started out of step, so the FIFOs fill and empty. All PSums are
// checked against a model; the mechanisms used are counted and each must occur:
// FIFO transfers in all four directions, stalls on an empty and on a full
// FIFO, PSum bypass, drain during accumulation, direction changes. No bank
// conflict may occur. A synchronous start must finish in 2K + 3 cycles plus one per FIFO hop
// on the longest chain (2K + 5 here).
module tb_vectormesh;
  import vm_pkg::*;
  import tb_vm_gemm_pkg::*;
  localparam int ROWS = 2, COLS = 2, T = ROWS * COLS, K = 10;

  logic clk = 0, rst_n = 0;
  logic    [T-1:0] start, busy, stall, conflict, ld_en, ld_buf, dr_en, dr_sel;
  teucfg_t [T-1:0] cfg;
  row_t    [T-1:0] ld_row;
  vec_t    [T-1:0] ld_data;
  paddr_t  [T-1:0] dr_addr;
  pvec_t   [T-1:0] dr_data;

  vectormesh #(.ROWS(ROWS), .COLS(COLS)) dut (.*);

  int checks = 0, failures = 0;
  // mechanism counters
  int n_h_east = 0, n_h_west = 0, n_v_south = 0, n_v_north = 0;
  int n_stall_empty = 0, n_stall_full = 0, n_bypass = 0, n_drain_overlap = 0;
  int n_dir_change = 0, n_conflict = 0;

  // blocks: Ab[r][c] is the 8 x K block of A in block row r, column c
  data_t Ab [2][2][8][K];
  data_t Bb [2][2][K][8];

  always #5 clk = ~clk;
  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic hd_q, vd0_q, vd1_q;
  always @(posedge clk) if (rst_n) begin
    if (dut.g_row[0].g_col[0].g_h.u_fifo.push) begin
      if (dut.g_row[0].g_col[0].g_h.dir) n_h_west++; else n_h_east++;
    end
    if (dut.g_row[1].g_col[0].g_h.u_fifo.push) begin
      if (dut.g_row[1].g_col[0].g_h.dir) n_h_west++; else n_h_east++;
    end
    if (dut.g_row[0].g_col[0].g_v.u_fifo.push) begin
      if (dut.g_row[0].g_col[0].g_v.dir) n_v_north++; else n_v_south++;
    end
    if (dut.g_row[0].g_col[1].g_v.u_fifo.push) begin
      if (dut.g_row[0].g_col[1].g_v.dir) n_v_north++; else n_v_south++;
    end
    hd_q <= dut.g_row[0].g_col[0].g_h.dir;
    vd0_q <= dut.g_row[0].g_col[0].g_v.dir;
    vd1_q <= dut.g_row[0].g_col[1].g_v.dir;
    if (hd_q != dut.g_row[0].g_col[0].g_h.dir) n_dir_change++;
    if (vd0_q != dut.g_row[0].g_col[0].g_v.dir) n_dir_change++;
    if (vd1_q != dut.g_row[0].g_col[1].g_v.dir) n_dir_change++;
    n_conflict += $countones(conflict);
    if (dut.g_teu[0].u_teu.stall && (dut.g_teu[0].u_teu.pop_need & ~dut.g_teu[0].u_teu.in_valid) != 0) n_stall_empty++;
    if (dut.g_teu[1].u_teu.stall && (dut.g_teu[1].u_teu.pop_need & ~dut.g_teu[1].u_teu.in_valid) != 0) n_stall_empty++;
    if (dut.g_teu[2].u_teu.stall && (dut.g_teu[2].u_teu.pop_need & ~dut.g_teu[2].u_teu.in_valid) != 0) n_stall_empty++;
    if (dut.g_teu[3].u_teu.stall && (dut.g_teu[3].u_teu.pop_need & ~dut.g_teu[3].u_teu.in_valid) != 0) n_stall_empty++;
    if (dut.g_teu[0].u_teu.stall && (dut.g_teu[0].u_teu.push_need & ~dut.g_teu[0].u_teu.out_ready) != 0) n_stall_full++;
    if (dut.g_teu[1].u_teu.stall && (dut.g_teu[1].u_teu.push_need & ~dut.g_teu[1].u_teu.out_ready) != 0) n_stall_full++;
    if (dut.g_teu[2].u_teu.stall && (dut.g_teu[2].u_teu.push_need & ~dut.g_teu[2].u_teu.out_ready) != 0) n_stall_full++;
    if (dut.g_teu[3].u_teu.stall && (dut.g_teu[3].u_teu.push_need & ~dut.g_teu[3].u_teu.out_ready) != 0) n_stall_full++;
    n_bypass += int'(dut.g_teu[0].u_teu.u_peg.bypass) + int'(dut.g_teu[1].u_teu.u_peg.bypass)
              + int'(dut.g_teu[2].u_teu.u_peg.bypass) + int'(dut.g_teu[3].u_teu.u_peg.bypass);
    n_drain_overlap += $countones(dr_en & busy);
  end

  // load the buffers of TEU t: operand-0 block b0 (K x 8), operand-1 block a1 (8 x K)
  task automatic load_teu(input int t, input int br, input int bc, input int ar, input int ac);
    data_t img0 [1 << ADDR_W];
    data_t img1 [1 << ADDR_W];
    for (int a = 0; a < (1 << ADDR_W); a++) begin img0[a] = '0; img1[a] = '0; end
    for (int k = 0; k < K; k++)
      for (int x = 0; x < 8; x++) begin
        img0[addr_b(k, x)] = Bb[br][bc][k][x];
        img1[addr_a(x, k)] = Ab[ar][ac][x][k];
      end
    for (int b = 0; b < 2; b++)
      for (int r = 0; r < (64 * K + LANES - 1) / LANES; r++) begin
        @(negedge clk);
        ld_en[t] = 1; ld_buf[t] = 1'(b); ld_row[t] = row_t'(r);
        for (int w = 0; w < LANES; w++) ld_data[t][w] = (b != 0) ? img1[r * LANES + w] : img0[r * LANES + w];
      end
    @(negedge clk);
    ld_en[t] = 0;
  endtask

  // expected block (r,c): sum over phases given by mask (bit0: first product, bit1: second)
  function automatic psum_t expect_c(input int r, input int c, input int i, input int j, input int mask);
    psum_t s;
    s = 0;
    for (int kb = 0; kb < 2; kb++)
      if (((mask >> kb) & 1) != 0)
        for (int k = 0; k < K; k++) s += psum_t'(Ab[r][kb][i][k] * Bb[kb][c][k][j]);
    return s;
  endfunction

  task automatic drain_check(input int t, input int sel, input int mask, input string what);
    for (int g = 0; g < 2; g++) begin
      @(negedge clk);
      dr_en[t] = 1; dr_sel[t] = 1'(sel); dr_addr[t] = paddr_t'(g);
      @(negedge clk);
      dr_en[t] = 0;
      for (int n = 0; n < LANES; n++) begin
        psum_t e;
        e = expect_c(t / 2, t % 2, lane_i(g, n), lane_j(n), mask);
        checks++;
        if (dr_data[t][n] !== e) begin
          failures++;
          $display("FAIL %s TEU%0d g%0d lane %0d got %0d exp %0d", what, t, g, n, dr_data[t][n], e);
        end
      end
    end
  endtask

  // start TEU t after d cycles
  task automatic start_after(input int t, input int d);
    repeat (d) @(negedge clk);
    start[t] = 1;
    @(negedge clk);
    start[t] = 0;
  endtask

  task automatic wait_idle();
    @(negedge clk);
    while (busy != '0) @(negedge clk);
  endtask

  teucfg_t ph0 [T];
  teucfg_t ph1 [T];

  initial begin
    int cycles;
    start = '0; cfg = '0; ld_en = '0; ld_buf = '0; ld_row = '0; ld_data = '0;
    dr_en = '0; dr_sel = '0; dr_addr = '0;
    for (int r = 0; r < 2; r++) for (int c = 0; c < 2; c++) begin
      for (int i = 0; i < 8; i++) for (int k = 0; k < K; k++) Ab[r][c][i][k] = data_t'($urandom);
      for (int k = 0; k < K; k++) for (int j = 0; j < 8; j++) Bb[r][c][k][j] = data_t'($urandom);
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    // W=B00 E=A00 | X=B01 F=A01 | Y=B10 G=A10 | Z=B11 H=A11
    load_teu(0, 0, 0, 0, 0);
    load_teu(1, 0, 1, 0, 1);
    load_teu(2, 1, 0, 1, 0);
    load_teu(3, 1, 1, 1, 1);

    ph0[0] = gemm_cfg(K, 0, 0, 0, SRC_LOCAL, FWD_POS,  SRC_LOCAL, FWD_POS);
    ph0[1] = gemm_cfg(K, 0, 0, 0, SRC_LOCAL, FWD_POS,  SRC_NEG,   FWD_NONE);
    ph0[2] = gemm_cfg(K, 0, 0, 0, SRC_NEG,   FWD_NONE, SRC_LOCAL, FWD_POS);
    ph0[3] = gemm_cfg(K, 0, 0, 0, SRC_NEG,   FWD_NONE, SRC_NEG,   FWD_NONE);
    ph1[0] = gemm_cfg(K, 0, 0, 1, SRC_POS,   FWD_NONE, SRC_POS,   FWD_NONE);
    ph1[1] = gemm_cfg(K, 0, 0, 1, SRC_POS,   FWD_NONE, SRC_LOCAL, FWD_NEG);
    ph1[2] = gemm_cfg(K, 0, 0, 1, SRC_LOCAL, FWD_NEG,  SRC_POS,   FWD_NONE);
    ph1[3] = gemm_cfg(K, 0, 0, 1, SRC_LOCAL, FWD_NEG,  SRC_LOCAL, FWD_NEG);

    // ---- phase 0, consumers first, producer TEU0 last ----
    for (int t = 0; t < T; t++) cfg[t] = ph0[t];
    fork
      start_after(3, 0);
      start_after(2, 4);
      start_after(1, 2);
      start_after(0, 9);
    join
    wait_idle();
    // ---- phase 1, producers first, consumer TEU0 last ----
    for (int t = 0; t < T; t++) cfg[t] = ph1[t];
    fork
      start_after(3, 0);
      start_after(1, 3);
      start_after(2, 3);
      start_after(0, 14);
    join
    wait_idle();
    // ---- phase 2: synchronous start into SRAM 1, drain SRAM 0 meanwhile ----
    for (int t = 0; t < T; t++) begin
      cfg[t] = ph0[t];
      cfg[t].acc_sel = 1;
    end
    @(negedge clk);
    start = '1;
    @(negedge clk);
    start = '0;
    cycles = 1;
    fork
      begin
        while (busy != '0) begin @(negedge clk); cycles++; end
      end
      for (int t = 0; t < T; t++) drain_check(t, 0, 3, "phase0+1");
    join
    checks++;
    // one step per cycle; each FIFO hop on the longest dependency chain
    // (TEU0 -> TEU1 -> TEU3) delays the end by one cycle
    if (cycles != 2 * K + 3 + (ROWS - 1) + (COLS - 1)) begin
      failures++; $display("FAIL synchronous phase took %0d cycles, expected %0d", cycles, 2 * K + 5);
    end
    wait_idle();
    for (int t = 0; t < T; t++) drain_check(t, 1, 1, "phase2");

    // mechanisms
    $display("fifo east=%0d west=%0d south=%0d north=%0d dir_changes=%0d", n_h_east, n_h_west, n_v_south, n_v_north, n_dir_change);
    $display("stall_empty=%0d stall_full=%0d bypass=%0d drain_overlap=%0d conflicts=%0d",
             n_stall_empty, n_stall_full, n_bypass, n_drain_overlap, n_conflict);
    checks++; if (n_h_east == 0)      begin failures++; $display("FAIL no eastward transfer"); end
    checks++; if (n_h_west == 0)      begin failures++; $display("FAIL no westward transfer"); end
    checks++; if (n_v_south == 0)     begin failures++; $display("FAIL no southward transfer"); end
    checks++; if (n_v_north == 0)     begin failures++; $display("FAIL no northward transfer"); end
    checks++; if (n_dir_change == 0)  begin failures++; $display("FAIL no FIFO direction change"); end
    checks++; if (n_stall_empty == 0) begin failures++; $display("FAIL no stall on empty FIFO"); end
    checks++; if (n_stall_full == 0)  begin failures++; $display("FAIL no stall on full FIFO"); end
    checks++; if (n_bypass == 0)      begin failures++; $display("FAIL no PSum bypass"); end
    checks++; if (n_drain_overlap == 0) begin failures++; $display("FAIL no drain during accumulation"); end
    checks++; if (n_conflict != 0)    begin failures++; $display("FAIL bank conflicts"); end
    // every FIFO carries one vector per step in each of the three phases
    checks++; if (n_h_east != 2 * 2 * (2 * K) || n_h_west != 2 * (2 * K))
      begin failures++; $display("FAIL horizontal transfer count"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
