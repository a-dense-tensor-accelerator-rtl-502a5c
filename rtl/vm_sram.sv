// vm_sram: synchronous SRAM with one read port and one write port.
//
// Stands for the SRAM macros of a TEU: each 256-byte bank of an input buffer and
// each half of the PSum buffer. Written as an array so that it simulates and
// synthesises as an inferred memory; a process macro would replace it.
// Timing: a read with re=1 at a clock edge returns mem[raddr] on rdata after that
// edge; with re=0 rdata keeps its value (needed by the TEU to hold data during a
// stall). A write with we=1 updates mem[waddr] at the edge; a read of the same
// word in the same cycle returns the old contents (read-before-write).
// Reset clears the read register only; the array is not reset, as in a macro.
// The paper gives the macros' sizes and count; ports and timing are this
// design's choice.
module vm_sram #(
  parameter int unsigned DEPTH = 128,
  parameter int unsigned WIDTH = 16,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  rdata <= '0;
    else if (re) rdata <= mem[raddr];
  end

  // Addresses must stay inside the array (DEPTH need not be a power of two).
  a_raddr: assert property (@(posedge clk) disable iff (!rst_n) re |-> (int'(raddr) < DEPTH));
  a_waddr: assert property (@(posedge clk) disable iff (!rst_n) we |-> (int'(waddr) < DEPTH));
endmodule
