// vm_peg: PE group of a TEU - 32 vectorised MAC PEs and the PSum buffer.
//
// Each accepted vector operation computes, for every lane N,
//     psum[paddr][N] = (first ? 0 : psum[paddr][N]) + a[N] * b[N]
// in the PSum SRAM selected by acc_sel (eq. 6 of the paper: the PSums stay in
// the TEU while the temporal index runs). The PSum buffer is two SRAMs of 2.5 KB,
// each 20 rows of 32 x 32-bit words. One SRAM accumulates while the other can be
// drained to DRAM through the drain port, so a finished tile leaves the TEU
// while the next one is computed (ping-pong; the paper shows two SRAMs but not
// how they are used, this is the design's choice).
// Pipeline: cycle 0 the operation is accepted and its PSum row read; cycle 1
// the 32 MACs add the product and write the row back. A row written in cycle 1
// is what the next operation (read in the same cycle) must see, so that value is
// forwarded from a write register (bypass, reported on `bypass`). The PEG
// accepts one operation per cycle, never stalls.
// Drain: dr_en with (dr_sel, dr_addr) returns the row on dr_data one cycle later;
// a drain of the SRAM that accumulates in the same cycle is not allowed.
// Operands are signed 16-bit, PSums signed 32-bit and wrap; both are this
// design's choice.
module vm_peg
  import vm_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  // vector MAC operation
  input  logic   in_valid,
  input  vec_t   in_a,
  input  vec_t   in_b,
  input  paddr_t in_paddr,
  input  logic   in_first,
  input  logic   acc_sel,
  // drain to DRAM
  input  logic   dr_en,
  input  logic   dr_sel,
  input  paddr_t dr_addr,
  output pvec_t  dr_data,
  // status
  output logic   busy,
  output logic   bypass
);
  logic   v1, first1, sel1;
  vec_t   a1, b1;
  paddr_t paddr1;
  logic   wr_v;
  logic   wr_sel;
  paddr_t wr_addr;
  pvec_t  wr_data;
  logic   dr_sel1;

  logic   [1:0] re;
  paddr_t [1:0] raddr;
  pvec_t  [1:0] rdata;
  logic   [1:0] we;
  pvec_t        new_row, old_row;

  // read-port use: accumulation first, drain otherwise
  always_comb begin
    for (int j = 0; j < 2; j++) begin
      if (in_valid && acc_sel == 1'(j)) begin
        re[j]    = 1'b1;
        raddr[j] = in_paddr;
      end else begin
        re[j]    = dr_en && dr_sel == 1'(j);
        raddr[j] = dr_addr;
      end
      we[j] = v1 && sel1 == 1'(j);
    end
  end

  for (genvar j = 0; j < 2; j++) begin : g_psum
    vm_sram #(.DEPTH(PSUM_DEPTH), .WIDTH(LANES*PSUM_W)) u_psum (
      .clk, .rst_n,
      .re(re[j]), .raddr(raddr[j]), .rdata(rdata[j]),
      .we(we[j]), .waddr(paddr1), .wdata(new_row)
    );
  end

  // MAC stage
  assign bypass = v1 && !first1 && wr_v && wr_sel == sel1 && wr_addr == paddr1;
  always_comb begin
    if (first1)      old_row = '0;
    else if (bypass) old_row = wr_data;
    else             old_row = rdata[sel1];
    for (int n = 0; n < LANES; n++)
      new_row[n] = old_row[n] + psum_t'(a1[n] * b1[n]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; first1 <= 1'b0; sel1 <= 1'b0; paddr1 <= '0;
      a1 <= '0; b1 <= '0;
      wr_v <= 1'b0; wr_sel <= 1'b0; wr_addr <= '0; wr_data <= '0;
      dr_sel1 <= 1'b0;
    end else begin
      v1 <= in_valid;
      if (in_valid) begin
        a1 <= in_a; b1 <= in_b; paddr1 <= in_paddr;
        first1 <= in_first; sel1 <= acc_sel;
      end
      wr_v <= v1;
      if (v1) begin
        wr_sel <= sel1; wr_addr <= paddr1; wr_data <= new_row;
      end
      if (dr_en) dr_sel1 <= dr_sel;
    end
  end

  assign dr_data = rdata[dr_sel1];
  assign busy    = v1;

  a_drain_free: assert property (@(posedge clk) disable iff (!rst_n)
    !(dr_en && in_valid && dr_sel == acc_sel));
endmodule
