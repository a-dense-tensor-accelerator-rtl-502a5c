// vm_teu: Tile Execution Unit, the building block of the VectorMesh array.
//
// Holds two 8 KB input buffers (operand 0 and operand 1), a PE group of 32 MAC
// lanes with a 5 KB PSum buffer, a loop sequencer, and four mesh-FIFO ports.
// Operand 0 travels on the vertical FIFOs (north/south), operand 1 on the
// horizontal ones (west/east), as in Fig. 1 of the paper. Per job, each operand
// is read from the local buffer or popped from one neighbour FIFO, and may be
// pushed on to one neighbour FIFO after use, so a tile held once in one TEU can
// feed a whole row or column of TEUs without being duplicated (Fig. 2).
//
// Pipeline: stage A - the sequencer offers a step, vm_agu forms the 32 lane
// addresses and the local buffers are read. Stage B - the two operand vectors
// are present (buffer output or FIFO head); the step fires when every FIFO it
// pops is non-empty, every FIFO it pushes is not full and no buffer is still
// serving a conflicting read in further passes, and then goes to the PEG.
// Otherwise stage B waits (`stall`), and stage A with it; the buffer outputs
// hold their value meanwhile. One step per cycle when nothing waits.
// Latency from a step's issue to its PSum write: 3 cycles.
//
// Ports: start/cfg as vm_teu_ctrl (job returns the latched record); busy until
// the last PSum write. ld_* writes
// one row (one word per bank) of buffer ld_buf. dr_* reads a PSum row as vm_peg.
// Side index 0..3 = north, south, west, east; out_* pushes to the FIFO on that
// side, in_* pops from it (valid/ready). `conflict` marks a step whose local
// read clashed in the banks or the butterfly and took several passes (its
// result is right, but the TEU stalled for it).
// The unit's contents follow the paper; the two-stage pipeline, the operand
// routing options and all handshakes are this design's choice.
module vm_teu
  import vm_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  // job
  input  logic         start,
  input  teucfg_t      cfg,
  output teucfg_t      job,          // job record latched at start
  output logic         busy,
  output logic         stall,
  output logic         conflict,
  // load from DRAM
  input  logic         ld_en,
  input  logic         ld_buf,
  input  row_t         ld_row,
  input  vec_t         ld_data,
  // drain to DRAM
  input  logic         dr_en,
  input  logic         dr_sel,
  input  paddr_t       dr_addr,
  output pvec_t        dr_data,
  // mesh FIFO ports, index 0 N, 1 S, 2 W, 3 E
  output logic [3:0]   out_valid,
  output vec_t [3:0]   out_data,
  input  logic [3:0]   out_ready,
  input  logic [3:0]   in_valid,
  input  vec_t [3:0]   in_data,
  output logic [3:0]   in_ready
);
  teucfg_t cq;
  logic    active, iss_valid, iss_ready, iss_first;
  addr_t   iss_base0, iss_base1;
  paddr_t  iss_paddr;

  vm_teu_ctrl u_ctrl (
    .clk, .rst_n, .start, .cfg, .cfg_q(cq), .active,
    .iss_valid, .iss_ready, .iss_base0, .iss_base1, .iss_paddr, .iss_first
  );

  // ---- stage A: addresses and local reads ----
  addr_t [LANES-1:0] addr0, addr1;
  vm_agu u_agu0 (.base(iss_base0), .o(cq.op0.o), .addr(addr0));
  vm_agu u_agu1 (.base(iss_base1), .o(cq.op1.o), .addr(addr1));

  logic   b_valid, b_first, b_fire, adv;
  paddr_t b_paddr;
  logic   re0, re1, busy0, busy1, multi0, multi1;
  vec_t   buf0, buf1;

  assign adv       = iss_valid && (!b_valid || b_fire);
  assign iss_ready = adv;
  assign re0       = adv && cq.op0.src == SRC_LOCAL;
  assign re1       = adv && cq.op1.src == SRC_LOCAL;

  vm_input_buffer u_ibuf0 (
    .clk, .rst_n, .re(re0), .raddr(addr0), .rdata(buf0), .busy(busy0), .multi(multi0),
    .we(ld_en && !ld_buf), .wrow(ld_row), .wdata(ld_data)
  );
  vm_input_buffer u_ibuf1 (
    .clk, .rst_n, .re(re1), .raddr(addr1), .rdata(buf1), .busy(busy1), .multi(multi1),
    .we(ld_en && ld_buf), .wrow(ld_row), .wdata(ld_data)
  );

  // ---- stage B: operand select, FIFO exchange ----
  function automatic int unsigned side_of(input src_e s, input int unsigned neg);
    return (s == SRC_POS) ? neg + 1 : neg;
  endfunction
  function automatic int unsigned fwd_side(input fwd_e f, input int unsigned neg);
    return (f == FWD_POS) ? neg + 1 : neg;
  endfunction

  logic [3:0] pop_need, push_need;
  vec_t       opv0, opv1;
  logic       ok;

  always_comb begin
    pop_need  = '0;
    push_need = '0;
    if (cq.op0.src != SRC_LOCAL) pop_need[side_of(cq.op0.src, 0)]  = 1'b1;
    if (cq.op1.src != SRC_LOCAL) pop_need[side_of(cq.op1.src, 2)]  = 1'b1;
    if (cq.op0.fwd != FWD_NONE)  push_need[fwd_side(cq.op0.fwd, 0)] = 1'b1;
    if (cq.op1.fwd != FWD_NONE)  push_need[fwd_side(cq.op1.fwd, 2)] = 1'b1;
    opv0 = (cq.op0.src == SRC_LOCAL) ? buf0 : in_data[side_of(cq.op0.src, 0)];
    opv1 = (cq.op1.src == SRC_LOCAL) ? buf1 : in_data[side_of(cq.op1.src, 2)];
    ok   = ((in_valid | ~pop_need) == 4'hf) && ((out_ready | ~push_need) == 4'hf) &&
           !busy0 && !busy1;
  end

  assign b_fire = b_valid && ok;
  assign stall  = b_valid && !ok;

  always_comb begin
    for (int s = 0; s < 4; s++) begin
      in_ready[s]  = b_fire && pop_need[s];
      out_valid[s] = b_fire && push_need[s];
      out_data[s]  = (s < 2) ? opv0 : opv1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      b_valid <= 1'b0; b_first <= 1'b0; b_paddr <= '0;
    end else begin
      if (adv) begin
        b_valid <= 1'b1; b_first <= iss_first; b_paddr <= iss_paddr;
      end else if (b_fire) begin
        b_valid <= 1'b0;
      end
    end
  end

  assign conflict = b_fire && ((cq.op0.src == SRC_LOCAL && multi0) ||
                               (cq.op1.src == SRC_LOCAL && multi1));

  // ---- PE group ----
  logic peg_busy, bypass_unused;
  vm_peg u_peg (
    .clk, .rst_n,
    .in_valid(b_fire), .in_a(opv0), .in_b(opv1), .in_paddr(b_paddr),
    .in_first(b_first), .acc_sel(cq.acc_sel),
    .dr_en, .dr_sel, .dr_addr, .dr_data,
    .busy(peg_busy), .bypass(bypass_unused)
  );

  assign busy = active || b_valid || peg_busy;
  assign job  = cq;

  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy);
  a_pop_valid:  assert property (@(posedge clk) disable iff (!rst_n)
    ((in_ready & ~in_valid) == 4'h0));
  a_push_ready: assert property (@(posedge clk) disable iff (!rst_n)
    ((out_valid & ~out_ready) == 4'h0));
endmodule
