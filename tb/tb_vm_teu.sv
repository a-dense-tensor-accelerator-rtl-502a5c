// tb_vm_teu: self-checking test of one TEU.
// Job 1: both operands local, an 8 x 8 x 12 GEMM tile; checks every PSum and the
//        cycle count (one step per cycle: busy for steps + 3 cycles).
// Job 2: operand 1 popped from the west FIFO port (fed by the testbench with
//        random gaps), operand 0 local and forwarded to the south port (drained
//        with random back-pressure); checks PSums, the forwarded vectors and
//        that the TEU stalled. Accumulates onto job 1 in the same PSum SRAM.
// Job 3: operand 0 stored with B(k, j) at word 8k + 256j, so the 8 lanes of a
//        row of B meet in one bank: every step must be flagged `conflict`, take
//        8 read passes (8 * steps + 3 cycles) and still give the right PSums.
module tb_vm_teu;
  import vm_pkg::*;
  import tb_vm_gemm_pkg::*;
  localparam int K = 12;
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

  int checks = 0, failures = 0, n_stall = 0, n_conflict = 0;
  data_t A [8][K];
  data_t B [K][8];
  psum_t C [8][8];

  vm_teu dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) begin
    if (stall) n_stall++;
    if (conflict) n_conflict++;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic vec_t a_vec(input int g, input int k);
    vec_t v;
    for (int n = 0; n < LANES; n++) v[n] = A[lane_i(g, n)][k];
    return v;
  endfunction
  function automatic vec_t b_vec(input int k);
    vec_t v;
    for (int n = 0; n < LANES; n++) v[n] = B[k][lane_j(n)];
    return v;
  endfunction

  task automatic load_buffers(input bit clash = 0);
    data_t img0 [1 << ADDR_W];
    data_t img1 [1 << ADDR_W];
    for (int a = 0; a < (1 << ADDR_W); a++) begin img0[a] = '0; img1[a] = '0; end
    for (int k = 0; k < K; k++)
      for (int x = 0; x < 8; x++) begin
        img0[clash ? 8 * k + 256 * x : addr_b(k, x)] = B[k][x];
        img1[addr_a(x, k)] = A[x][k];
      end
    for (int b = 0; b < 2; b++)
      for (int r = 0; r < BANK_DEPTH; r++) begin
        @(negedge clk);
        ld_en = 1; ld_buf = 1'(b); ld_row = row_t'(r);
        for (int w = 0; w < LANES; w++) ld_data[w] = (b != 0) ? img1[r * LANES + w] : img0[r * LANES + w];
      end
    @(negedge clk);
    ld_en = 0;
  endtask

  task automatic check_psums(input string what, input int pbase = 3, input bit sel = 0);
    for (int g = 0; g < 2; g++) begin
      @(negedge clk);
      dr_en = 1; dr_sel = sel; dr_addr = paddr_t'(pbase + g);
      @(negedge clk);
      dr_en = 0;
      for (int n = 0; n < LANES; n++) begin
        checks++;
        if (dr_data[n] !== C[lane_i(g, n)][lane_j(n)]) begin
          failures++;
          $display("FAIL %s C(%0d,%0d) got %0d exp %0d", what, lane_i(g, n), lane_j(n),
                   dr_data[n], C[lane_i(g, n)][lane_j(n)]);
        end
      end
    end
  endtask

  task automatic new_data();
    for (int i = 0; i < 8; i++) for (int k = 0; k < K; k++) A[i][k] = data_t'($urandom);
    for (int k = 0; k < K; k++) for (int j = 0; j < 8; j++) B[k][j] = data_t'($urandom);
  endtask

  task automatic add_product();
    for (int i = 0; i < 8; i++)
      for (int j = 0; j < 8; j++)
        for (int k = 0; k < K; k++)
          C[i][j] += psum_t'(A[i][k] * B[k][j]);
  endtask

  initial begin
    int cycles;
    start = 0; cfg = '0; ld_en = 0; ld_buf = 0; ld_row = '0; ld_data = '0;
    dr_en = 0; dr_sel = 0; dr_addr = '0; out_ready = '0; in_valid = '0; in_data = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;

    // ---- job 1: local GEMM ----
    for (int i = 0; i < 8; i++) for (int j = 0; j < 8; j++) C[i][j] = 0;
    new_data();
    add_product();
    load_buffers();
    @(negedge clk);
    cfg = gemm_cfg(K, 3, 0, 0, SRC_LOCAL, FWD_NONE, SRC_LOCAL, FWD_NONE);
    start = 1;
    @(negedge clk);
    start = 0;
    cycles = 1;
    while (busy) begin @(negedge clk); cycles++; end
    checks++;
    if (cycles != 2 * K + 3) begin
      failures++; $display("FAIL job 1 took %0d cycles, expected %0d", cycles, 2 * K + 3);
    end
    check_psums("job1");

    // ---- job 2: operand 1 from west, operand 0 forwarded south ----
    new_data();
    add_product();
    load_buffers();
    @(negedge clk);
    cfg = gemm_cfg(K, 3, 0, 1, SRC_LOCAL, FWD_POS, SRC_NEG, FWD_NONE);
    start = 1;
    @(negedge clk);
    start = 0;
    fork
      begin : feed_west
        for (int g = 0; g < 2; g++)
          for (int k = 0; k < K; k++) begin
            in_valid[2] = 0;
            while ($urandom_range(2) == 0) @(negedge clk);
            in_valid[2] = 1; in_data[2] = a_vec(g, k);
            @(posedge clk);
            while (!in_ready[2]) @(posedge clk);
            @(negedge clk);
          end
        in_valid[2] = 0;
      end
      begin : take_south
        for (int g = 0; g < 2; g++)
          for (int k = 0; k < K; k++) begin
            out_ready[1] = 0;
            while ($urandom_range(2) == 0) @(negedge clk);
            out_ready[1] = 1;
            @(posedge clk);
            while (!out_valid[1]) @(posedge clk);
            checks++;
            if (out_data[1] !== b_vec(k)) begin
              failures++; $display("FAIL forwarded vector g=%0d k=%0d", g, k);
            end
            @(negedge clk);
          end
        out_ready[1] = 0;
      end
    join
    while (busy) @(negedge clk);
    check_psums("job2");
    checks++;
    if (n_stall == 0) begin failures++; $display("FAIL no stall seen"); end

    // ---- job 3: bank conflict ----
    for (int i = 0; i < 8; i++) for (int j = 0; j < 8; j++) C[i][j] = 0;
    new_data();
    add_product();
    load_buffers(1);
    @(negedge clk);
    cfg = gemm_cfg(K, 8, 1, 0, SRC_LOCAL, FWD_NONE, SRC_LOCAL, FWD_NONE);
    cfg.op0.o[0] = addr_t'(256);
    cfg.op0.o[1] = addr_t'(256);
    cfg.op0.o[2] = addr_t'(256);
    start = 1;
    @(negedge clk);
    start = 0;
    cycles = 1;
    while (busy) begin @(negedge clk); cycles++; end
    checks++;
    if (cycles != 8 * 2 * K + 3) begin
      failures++; $display("FAIL job 3 took %0d cycles, expected 8 passes a step: %0d", cycles, 8 * 2 * K + 3);
    end
    check_psums("job3", 8, 1);
    checks++;
    if (n_conflict != 2 * K) begin
      failures++; $display("FAIL conflict reported %0d times, expected %0d", n_conflict, 2 * K);
    end
    $display("stalls=%0d conflicts=%0d job3 cycles=%0d", n_stall, n_conflict, cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
