// vm_teu_ctrl: loop sequencer of a TEU.
//
// Runs one tile job: four nested loops (i3 outer, i2, i1, i0 inner) with trip
// counts n3..n0 from the job record (vm_pkg::teucfg_t). For every loop point it
// issues one vector step: the base address of each operand,
//     base + i3*s3 + i2*s2 + i1*s1 + i0*s0,
// the PSum row pbase + i3, and `first`, set on the first temporal step of a row
// (i2 = i1 = i0 = 0) unless the job accumulates onto earlier PSums. i3 thus
// walks the groups of parallel indices of the tile and (i2, i1, i0) its
// temporal indices - for a convolution the input channel and the two kernel
// coordinates - the schedule of Sec. III-B/C of the paper. Addresses are formed
// incrementally, so no multiplier is needed.
// Interface: `start` (one cycle, while idle) latches `cfg`. Steps are offered
// with iss_valid and taken when iss_ready is high (valid/ready). `active` is high
// from start until the last step is taken. The paper only names controllers;
// the loop structure and the interface are this design's choice.
module vm_teu_ctrl
  import vm_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    start,
  input  teucfg_t cfg,
  output teucfg_t cfg_q,       // job record held for the datapath
  output logic    active,
  output logic    iss_valid,
  input  logic    iss_ready,
  output addr_t   iss_base0,
  output addr_t   iss_base1,
  output paddr_t  iss_paddr,
  output logic    iss_first
);
  cnt_t  i0, i1, i2, i3;
  // per operand: current address and the address at the start of the current
  // pass of loops 1, 2 and 3
  addr_t [1:0] p, r1, r2, r3;
  addr_t [1:0] st0, st1, st2, st3;

  assign st0 = {cfg_q.op1.s0, cfg_q.op0.s0};
  assign st1 = {cfg_q.op1.s1, cfg_q.op0.s1};
  assign st2 = {cfg_q.op1.s2, cfg_q.op0.s2};
  assign st3 = {cfg_q.op1.s3, cfg_q.op0.s3};

  logic last0, last1, last2, last3;
  assign last0 = (i0 == cfg_q.n0 - 1'b1);
  assign last1 = (i1 == cfg_q.n1 - 1'b1);
  assign last2 = (i2 == cfg_q.n2 - 1'b1);
  assign last3 = (i3 == cfg_q.n3 - 1'b1);

  assign iss_valid = active;
  assign iss_base0 = p[0];
  assign iss_base1 = p[1];
  assign iss_paddr = cfg_q.pbase + paddr_t'(i3);
  assign iss_first = !cfg_q.accum && i0 == '0 && i1 == '0 && i2 == '0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg_q  <= '0;
      active <= 1'b0;
      i0 <= '0; i1 <= '0; i2 <= '0; i3 <= '0;
      p <= '0; r1 <= '0; r2 <= '0; r3 <= '0;
    end else if (start && !active) begin
      cfg_q  <= cfg;
      active <= 1'b1;
      i0 <= '0; i1 <= '0; i2 <= '0; i3 <= '0;
      p  <= {cfg.op1.base, cfg.op0.base};
      r1 <= {cfg.op1.base, cfg.op0.base};
      r2 <= {cfg.op1.base, cfg.op0.base};
      r3 <= {cfg.op1.base, cfg.op0.base};
    end else if (active && iss_ready) begin
      if (!last0) begin
        i0 <= i0 + 1'b1;
        for (int k = 0; k < 2; k++) p[k] <= p[k] + st0[k];
      end else if (!last1) begin
        i0 <= '0;
        i1 <= i1 + 1'b1;
        for (int k = 0; k < 2; k++) begin
          r1[k] <= r1[k] + st1[k];
          p[k]  <= r1[k] + st1[k];
        end
      end else if (!last2) begin
        i0 <= '0;
        i1 <= '0;
        i2 <= i2 + 1'b1;
        for (int k = 0; k < 2; k++) begin
          r2[k] <= r2[k] + st2[k];
          r1[k] <= r2[k] + st2[k];
          p[k]  <= r2[k] + st2[k];
        end
      end else if (!last3) begin
        i0 <= '0;
        i1 <= '0;
        i2 <= '0;
        i3 <= i3 + 1'b1;
        for (int k = 0; k < 2; k++) begin
          r3[k] <= r3[k] + st3[k];
          r2[k] <= r3[k] + st3[k];
          r1[k] <= r3[k] + st3[k];
          p[k]  <= r3[k] + st3[k];
        end
      end else begin
        active <= 1'b0;
      end
    end
  end

  a_counts_nonzero: assert property (@(posedge clk) disable iff (!rst_n)
    (start && !active) |-> (cfg.n0 != '0 && cfg.n1 != '0 && cfg.n2 != '0 && cfg.n3 != '0));
endmodule
