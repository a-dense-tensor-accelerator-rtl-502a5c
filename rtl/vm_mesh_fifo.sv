// vm_mesh_fifo: bidirectional data-exchange FIFO between two neighbouring TEUs.
//
// One storage of DEPTH entries (4 in the paper) of one 32-word vector each,
// shared by both directions. `dir` selects the direction: 0 moves vectors from
// side A (the west or north TEU) to side B (east or south), 1 from B to A.
// Each side has a push port (in_*) and a pop port (out_*), both valid/ready:
// a push is taken when in_valid && in_ready, a pop when out_valid && out_ready.
// Only the upstream side's push and the downstream side's pop are live; the
// other two ports see ready=0 / valid=0. A full FIFO holds the sender back and
// an empty one the receiver, which is how the mesh absorbs the skew between
// TEUs. Push and pop may happen in the same cycle. Neither ready nor valid
// depends combinationally on the other side's signals (ready = not full,
// valid = not empty), so chains of TEUs and FIFOs form no combinational path
// across the mesh.
// The direction may change only while the FIFO is empty (asserted).
// Depth and width follow the paper; the shared-storage form of "bidirectional",
// the handshake and the direction input are this design's choice.
module vm_mesh_fifo
  import vm_pkg::*;
#(
  parameter int unsigned DEPTH = FIFO_DEPTH
) (
  input  logic clk,
  input  logic rst_n,
  input  logic dir,            // 0: A -> B, 1: B -> A
  // side A
  input  logic a_in_valid,
  input  vec_t a_in_data,
  output logic a_in_ready,
  output logic a_out_valid,
  output vec_t a_out_data,
  input  logic a_out_ready,
  // side B
  input  logic b_in_valid,
  input  vec_t b_in_data,
  output logic b_in_ready,
  output logic b_out_valid,
  output vec_t b_out_data,
  input  logic b_out_ready,
  output logic empty
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  vec_t          mem [DEPTH];
  logic [PW-1:0] rd_ptr, wr_ptr;
  logic [PW:0]   count;
  logic          full;
  logic          push_v, pop_r, push, pop;
  vec_t          push_d;

  assign full   = (count == (PW+1)'(DEPTH));
  assign empty  = (count == '0);
  assign push_v = dir ? b_in_valid  : a_in_valid;
  assign push_d = dir ? b_in_data   : a_in_data;
  assign pop_r  = dir ? a_out_ready : b_out_ready;
  assign pop    = pop_r && !empty;
  assign push   = push_v && !full;

  assign a_in_ready  = !dir && !full;
  assign b_in_ready  =  dir && !full;
  assign a_out_valid =  dir && !empty;
  assign b_out_valid = !dir && !empty;
  assign a_out_data  = mem[rd_ptr];
  assign b_out_data  = mem[rd_ptr];

  function automatic logic [PW-1:0] inc(input logic [PW-1:0] p);
    return (int'(p) == DEPTH - 1) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= push_d;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= inc(wr_ptr);
      if (pop)  rd_ptr <= inc(rd_ptr);
      count <= count + (PW+1)'(push) - (PW+1)'(pop);
    end
  end

  logic dir_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) dir_q <= 1'b0;
    else        dir_q <= dir;
  end
  a_dir_change_empty: assert property (@(posedge clk) disable iff (!rst_n)
    (dir != dir_q) |-> empty);
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    !(full && push));
endmodule
