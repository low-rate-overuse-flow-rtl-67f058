// loft_hash: the per-minor-cycle hash H_{j,k}(f) of LOFT.
//
// Maps a flow ID to one of 2**IDX_W counters. Every minor cycle uses a
// different function of the family, selected by a 32-bit seed; the update
// path and the estimate engine use the same module so that the estimate can
// recompute which counter a flow hit in each minor cycle.
// The paper only asks for a hash that changes every minor cycle and names
// murmur3 as an efficient choice; this design uses the murmur3 finaliser on
// (flow ID xor seed * golden-ratio constant) and keeps the low IDX_W bits.
// Purely combinational.
//
// Lint: the upper bits of the 32-bit mix h are unused on purpose (only the
// low IDX_W bits index the counter array).
module loft_hash
  import loft_pkg::*;
#(
  parameter int unsigned IDX_W = 14
) (
  input  logic [31:0]       seed,
  input  logic [FLOW_W-1:0] flow_id,
  output logic [IDX_W-1:0]  idx
);
  logic [31:0] h;
  always_comb begin
    h   = fmix32(flow_id ^ (seed * 32'h9E37_79B1));
    idx = h[IDX_W-1:0];
  end
endmodule
