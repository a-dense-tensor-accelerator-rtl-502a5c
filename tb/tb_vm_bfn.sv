// tb_vm_bfn: self-checking test of the butterfly network vm_bfn.
// 1) Patterns of the form s(N) = s0 + sum 2^i o_i N_i (mod 32), o_i odd or 0,
//    must route every lane to its bank and never report blocking.
// 2) Random permutations and multicasts: when not blocked, every lane must get
//    its bank's word; whether it is blocked is checked against a path model.
// 3) A known blocking pair must be reported.
module tb_vm_bfn;
  import vm_pkg::*;
  logic [LANES-1:0][DATA_W-1:0] bank_data, lane_data;
  lane_t [LANES-1:0] src;
  logic  [LANES-1:0] used;
  logic blocked;
  int checks = 0, failures = 0;
  int n_blocked = 0;

  vm_bfn dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // model: lanes n, m collide after stage k
  function automatic bit model_blocked();
    for (int n = 0; n < LANES; n++)
      for (int m = n + 1; m < LANES; m++)
        if (src[n] != src[m])
          for (int k = 0; k < LANE_BITS; k++) begin
            int msk;
            msk = (1 << (k + 1)) - 1;
            if ((n & msk) == (m & msk) && (int'(src[n]) & ~msk & 31) == (int'(src[m]) & ~msk & 31))
              return 1;
          end
    return 0;
  endfunction

  task automatic check_routes(input string what);
    for (int n = 0; n < LANES; n++) begin
      checks++;
      if (lane_data[n] !== bank_data[src[n]]) begin
        failures++;
        $display("FAIL %s lane %0d got %h exp %h", what, n, lane_data[n], bank_data[src[n]]);
      end
    end
  endtask

  initial begin
    used = '1;
    // 1) conflict-free access form
    for (int t = 0; t < 300; t++) begin
      int s0;
      int o [LANE_BITS];
      s0 = $urandom_range(31);
      for (int i = 0; i < LANE_BITS; i++)
        o[i] = ($urandom_range(3) == 0) ? 0 : ($urandom_range(15) * 2 + 1);
      for (int n = 0; n < LANES; n++) begin
        int s;
        s = s0;
        for (int i = 0; i < LANE_BITS; i++) if (((n >> i) & 1) != 0) s += o[i] << i;
        src[n] = lane_t'(s);
      end
      for (int b = 0; b < LANES; b++) bank_data[b] = DATA_W'($urandom);
      #1;
      checks++;
      if (blocked) begin failures++; $display("FAIL form pattern reported blocked"); end
      check_routes("form");
    end
    // 2) random patterns
    for (int t = 0; t < 300; t++) begin
      bit mb;
      for (int n = 0; n < LANES; n++) src[n] = lane_t'((t % 2 != 0) ? $urandom_range(31) : (n ^ $urandom_range(1)));
      for (int b = 0; b < LANES; b++) bank_data[b] = DATA_W'($urandom);
      #1;
      mb = model_blocked();
      checks++;
      if (blocked != mb) begin failures++; $display("FAIL blocked=%0d model=%0d", blocked, mb); end
      if (blocked) n_blocked++;
      else check_routes("random");
    end
    // 3) known blocking pair: lanes 0 and 2 from banks 0 and 1
    for (int n = 0; n < LANES; n++) src[n] = lane_t'(n);
    src[0] = 5'd0; src[2] = 5'd1;
    #1;
    checks++;
    if (!blocked) begin failures++; $display("FAIL known blocking pair not reported"); end
    checks++;
    if (n_blocked == 0) begin failures++; $display("FAIL no random pattern blocked"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
