// vm_input_buffer: one 8 KB local input buffer of a TEU.
//
// 32 SRAM banks of 256 bytes (128 words of 16 bits) and the butterfly network
// that delivers one 32-word vector per cycle to the PE group. Word address
// A = row*32 + bank: the low five bits pick the bank, the rest the row.
// Read: with re=1 each lane N presents its word address raddr[N] (from vm_agu).
// The lanes are served in passes. A pass takes the waiting lanes from lane 0
// upwards and serves each one that does not clash with a lane already taken;
// two lanes clash when they need different rows of one bank, or when their
// butterfly paths need one selector with different sources. The lowest waiting lane is always served, so a read
// ends after at most 32 passes. Addresses of the conflict-free form
// (A_N = A_0 + sum 2^i o_i N_i with o_i odd or zero) always take one pass.
// Timing: the request is taken in the cycle re=1 and the first pass reads the
// banks in that cycle. rdata is complete one cycle after the last pass: in the
// cycle after the request when one pass suffices, otherwise `busy` is high
// until it is complete. `multi` tells that the data shown needed more than one
// pass. rdata is held while re=0 and busy=0. re must not be raised while busy.
// Write (from DRAM): we=1 writes wdata[b] to row wrow of every bank b.
// The bank count, bank size, the butterfly and the stall on a conflicting
// access follow the paper; the pass rule, the port protocol and the row-wide
// write are this design's choice.
module vm_input_buffer
  import vm_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  // vector read
  input  logic                 re,
  input  addr_t [LANES-1:0]    raddr,
  output vec_t                 rdata,
  output logic                 busy,
  output logic                 multi,
  // row write from DRAM
  input  logic                 we,
  input  row_t                 wrow,
  input  vec_t                 wdata
);
  addr_t [LANES-1:0] addr_q;
  logic  [LANES-1:0] pending_q, served_q;
  lane_t [LANES-1:0] src_q;
  vec_t              cap_q, bfn_out, bank_q;
  logic              multi_q;

  addr_t [LANES-1:0] act_addr;
  logic  [LANES-1:0] act, sel;
  lane_t [LANES-1:0] lane_bank;
  row_t  [LANES-1:0] lane_row;
  row_t  [LANES-1:0] bank_row;
  logic  [LANES-1:0] bank_re;
  logic              pass;

  assign pass     = re || (pending_q != '0);
  assign act_addr = re ? raddr : addr_q;
  assign act      = re ? '1 : pending_q;

  // lanes n and m clash: different rows of one bank, or butterfly paths that
  // meet after stage k (same lane bits 0..k, same source bits above k) with
  // different source banks
  function automatic logic clash(input lane_t n, input lane_t m, input lane_t bn, input lane_t bm,
                                 input row_t rn, input row_t rm);
    lane_t mask;
    logic  c;
    c = (bn == bm) && (rn != rm);
    if (bn != bm)
      for (int k = 0; k < LANE_BITS; k++) begin
        mask = lane_t'((1 << (k + 1)) - 1);
        if ((n & mask) == (m & mask) && (bn & ~mask) == (bm & ~mask))
          c = 1'b1;
      end
    return c;
  endfunction

  always_comb begin
    for (int n = 0; n < LANES; n++) begin
      lane_bank[n] = act_addr[n][LANE_BITS-1:0];
      lane_row[n]  = act_addr[n][ADDR_W-1:LANE_BITS];
    end
    // lanes served in this pass
    for (int n = 0; n < LANES; n++) begin
      sel[n] = act[n];
      for (int m = 0; m < n; m++)
        if (sel[m] && clash(lane_t'(n), lane_t'(m), lane_bank[n], lane_bank[m], lane_row[n], lane_row[m]))
          sel[n] = 1'b0;
    end
    // each bank reads the row of the served lanes that target it
    bank_row = '0;
    bank_re  = '0;
    for (int n = LANES - 1; n >= 0; n--)
      if (sel[n]) begin
        bank_row[lane_bank[n]] = lane_row[n];
        bank_re[lane_bank[n]]  = pass;
      end
  end

  for (genvar b = 0; b < LANES; b++) begin : g_bank
    vm_sram #(.DEPTH(BANK_DEPTH), .WIDTH(DATA_W)) u_bank (
      .clk, .rst_n,
      .re(bank_re[b]), .raddr(bank_row[b]), .rdata(bank_q[b]),
      .we(we), .waddr(wrow), .wdata(wdata[b])
    );
  end

  logic blocked;
  vm_bfn #(.W(DATA_W)) u_bfn (
    .bank_data(bank_q), .src(src_q), .used(served_q),
    .lane_data(bfn_out), .blocked(blocked)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      addr_q <= '0; pending_q <= '0; served_q <= '0; src_q <= '0;
      cap_q <= '0; multi_q <= 1'b0;
    end else begin
      for (int n = 0; n < LANES; n++)
        if (served_q[n]) cap_q[n] <= bfn_out[n];
      if (pass) begin
        served_q  <= sel;
        src_q     <= lane_bank;
        pending_q <= act & ~sel;
      end
      if (re) begin
        addr_q  <= raddr;
        multi_q <= (sel != '1);
      end
    end
  end

  always_comb
    for (int n = 0; n < LANES; n++)
      rdata[n] = served_q[n] ? bfn_out[n] : cap_q[n];

  assign busy  = pending_q != '0;
  assign multi = multi_q;

  a_no_blocking:  assert property (@(posedge clk) disable iff (!rst_n) !blocked);
  a_re_when_idle: assert property (@(posedge clk) disable iff (!rst_n) re |-> !busy);
endmodule
