// vectormesh: the VectorMesh dense tensor accelerator, a ROWS x COLS mesh of TEUs.
//
// Every TEU (vm_teu) computes one tile of a tensor workload with its 32 MAC
// lanes. Horizontally neighbouring TEUs share one bidirectional FIFO
// (vm_mesh_fifo) that carries operand 1; vertically neighbouring TEUs share one
// that carries operand 0. A tile of an input tensor loaded into one TEU can thus
// be streamed through a row or a column of TEUs instead of being loaded into
// each. The default 4 x 4 mesh is the paper's 512-PE configuration (2 x 2 gives
// its 128-PE one).
// The direction of each FIFO follows from the jobs of its two TEUs: it points
// west (north) when the east (south) TEU forwards its operand towards the other
// or the west (north) TEU takes its operand from the east (south). There is no
// wrap-around; the outer FIFO ports of the edge TEUs are idle.
// Interface, all arrays indexed by TEU t = row*COLS + col: start/cfg/busy/
// stall/conflict per TEU (see vm_teu), ld_* to write a row of an input buffer
// and dr_* to read a PSum row, the ports where DRAM (and a global buffer,
// which this RTL does not include) connect. Each TEU starts on its own start
// pulse, so TEUs may be started out of step; the FIFOs absorb the skew.
module vectormesh
  import vm_pkg::*;
#(
  parameter int unsigned ROWS = 4,
  parameter int unsigned COLS = 4,
  localparam int unsigned T   = ROWS * COLS
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic    [T-1:0]   start,
  input  teucfg_t [T-1:0]   cfg,
  output logic    [T-1:0]   busy,
  output logic    [T-1:0]   stall,
  output logic    [T-1:0]   conflict,
  input  logic    [T-1:0]   ld_en,
  input  logic    [T-1:0]   ld_buf,
  input  row_t    [T-1:0]   ld_row,
  input  vec_t    [T-1:0]   ld_data,
  input  logic    [T-1:0]   dr_en,
  input  logic    [T-1:0]   dr_sel,
  input  paddr_t  [T-1:0]   dr_addr,
  output pvec_t   [T-1:0]   dr_data
);
  localparam int N = 0, S = 1, W = 2, E = 3;

  teucfg_t    [T-1:0] job;
  logic [T-1:0][3:0]  out_valid, out_ready, in_valid, in_ready;
  vec_t [T-1:0][3:0]  out_data, in_data;

  for (genvar t = 0; t < T; t++) begin : g_teu
    vm_teu u_teu (
      .clk, .rst_n,
      .start(start[t]), .cfg(cfg[t]), .job(job[t]),
      .busy(busy[t]), .stall(stall[t]), .conflict(conflict[t]),
      .ld_en(ld_en[t]), .ld_buf(ld_buf[t]), .ld_row(ld_row[t]), .ld_data(ld_data[t]),
      .dr_en(dr_en[t]), .dr_sel(dr_sel[t]), .dr_addr(dr_addr[t]), .dr_data(dr_data[t]),
      .out_valid(out_valid[t]), .out_data(out_data[t]), .out_ready(out_ready[t]),
      .in_valid(in_valid[t]), .in_data(in_data[t]), .in_ready(in_ready[t])
    );
  end

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      localparam int unsigned Tc = r * COLS + c;
      // horizontal FIFO to the east neighbour (operand 1)
      if (c + 1 < COLS) begin : g_h
        localparam int unsigned Te = Tc + 1;
        logic dir, empty_unused;
        assign dir = job[Te].op1.fwd == FWD_NEG || job[Tc].op1.src == SRC_POS;
        vm_mesh_fifo u_fifo (
          .clk, .rst_n, .dir,
          .a_in_valid(out_valid[Tc][E]), .a_in_data(out_data[Tc][E]), .a_in_ready(out_ready[Tc][E]),
          .a_out_valid(in_valid[Tc][E]), .a_out_data(in_data[Tc][E]), .a_out_ready(in_ready[Tc][E]),
          .b_in_valid(out_valid[Te][W]), .b_in_data(out_data[Te][W]), .b_in_ready(out_ready[Te][W]),
          .b_out_valid(in_valid[Te][W]), .b_out_data(in_data[Te][W]), .b_out_ready(in_ready[Te][W]),
          .empty(empty_unused)
        );
      end else begin : g_edge_e
        assign out_ready[Tc][E] = 1'b0;
        assign in_valid[Tc][E]  = 1'b0;
        assign in_data[Tc][E]   = '0;
      end
      if (c == 0) begin : g_edge_w
        assign out_ready[Tc][W] = 1'b0;
        assign in_valid[Tc][W]  = 1'b0;
        assign in_data[Tc][W]   = '0;
      end
      // vertical FIFO to the south neighbour (operand 0)
      if (r + 1 < ROWS) begin : g_v
        localparam int unsigned Ts = Tc + COLS;
        logic dir, empty_unused;
        assign dir = job[Ts].op0.fwd == FWD_NEG || job[Tc].op0.src == SRC_POS;
        vm_mesh_fifo u_fifo (
          .clk, .rst_n, .dir,
          .a_in_valid(out_valid[Tc][S]), .a_in_data(out_data[Tc][S]), .a_in_ready(out_ready[Tc][S]),
          .a_out_valid(in_valid[Tc][S]), .a_out_data(in_data[Tc][S]), .a_out_ready(in_ready[Tc][S]),
          .b_in_valid(out_valid[Ts][N]), .b_in_data(out_data[Ts][N]), .b_in_ready(out_ready[Ts][N]),
          .b_out_valid(in_valid[Ts][N]), .b_out_data(in_data[Ts][N]), .b_out_ready(in_ready[Ts][N]),
          .empty(empty_unused)
        );
      end else begin : g_edge_s
        assign out_ready[Tc][S] = 1'b0;
        assign in_valid[Tc][S]  = 1'b0;
        assign in_data[Tc][S]   = '0;
      end
      if (r == 0) begin : g_edge_n
        assign out_ready[Tc][N] = 1'b0;
        assign in_valid[Tc][N]  = 1'b0;
        assign in_data[Tc][N]   = '0;
      end
    end
  end
endmodule
