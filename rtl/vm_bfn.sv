// vm_bfn: 32-lane butterfly network from the input-buffer banks to the PEs.
//
// Five stages of 2:1 selectors; stage k pairs positions that differ in bit k
// (LSB first). Lane N asks for the word of bank src[N]. Its path after stage k
// sits at the position whose low bits 0..k are those of N and whose high bits
// are those of src[N]; the selector of stage k at that position crosses when
// src[N] and N differ in bit k. Several lanes may share a path (multicast).
// Two lanes whose paths meet at one position with different source banks
// cannot both be served: `blocked` reports that. For the access form of vm_agu
// with odd-or-zero offsets this never happens.
// The paper names a classic butterfly network and the one-cycle guarantee; the
// stage order, the selector form and the routing computation are this design's.
// Purely combinational.
module vm_bfn
  import vm_pkg::*;
#(
  parameter int unsigned W = DATA_W
) (
  input  logic [LANES-1:0][W-1:0] bank_data,  // word read from each bank
  input  lane_t [LANES-1:0]       src,        // source bank of each lane
  input  logic [LANES-1:0]        used,       // lane takes part in this access
  output logic [LANES-1:0][W-1:0] lane_data,
  output logic                    blocked
);
  logic [LANE_BITS-1:0][LANES-1:0] xsel;      // selector settings per stage
  logic [LANE_BITS:0][LANES-1:0][W-1:0] v;     // values between stages

  // Routing: each used lane sets the selectors along its path.
  always_comb begin
    lane_t pos;
    pos  = '0;
    xsel = '0;
    for (int n = 0; n < LANES; n++) begin
      if (used[n]) begin
        for (int k = 0; k < LANE_BITS; k++) begin
          for (int b = 0; b < LANE_BITS; b++)
            pos[b] = (b <= k) ? n[b] : src[n][b];
          xsel[k][pos] = src[n][k] ^ n[k];
        end
      end
    end
  end

  // Blocking check: lanes n, m meet after stage k if they agree in bits 0..k
  // of the lane index and in bits k+1..4 of the source bank.
  always_comb begin
    lane_t mask;
    mask    = '0;
    blocked = 1'b0;
    for (int n = 0; n < LANES; n++)
      for (int m = n + 1; m < LANES; m++)
        if (used[n] && used[m] && src[n] != src[m])
          for (int k = 0; k < LANE_BITS; k++) begin
            mask = lane_t'((1 << (k + 1)) - 1);
            if ((lane_t'(n) & mask) == (lane_t'(m) & mask) &&
                (src[n] & ~mask) == (src[m] & ~mask))
              blocked = 1'b1;
          end
  end

  // Datapath.
  assign v[0] = bank_data;
  for (genvar k = 0; k < LANE_BITS; k++) begin : g_stage
    for (genvar p = 0; p < LANES; p++) begin : g_node
      assign v[k+1][p] = xsel[k][p] ? v[k][p ^ (1 << k)] : v[k][p];
    end
  end
  assign lane_data = v[LANE_BITS];
endmodule
