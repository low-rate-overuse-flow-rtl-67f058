// loft_counter_store: main-memory copy of the counter arrays of LOFT.
//
// At the end of each minor cycle the update path moves its counter array here.
// The store keeps the Z arrays of two major cycles (two banks selected by the
// parity of the global major-cycle number): the estimate engine reads the
// arrays of the major cycle that has just ended while the arrays of the
// running one are written. Size 2 * Z * W words of CW bits; in the paper this
// lives in DRAM (O(Z*W) main-memory entries). Here it is a plain array with one
// write port and one read port with one clock of read latency.
//
// Lint: wr_k / rd_k are 16-bit minor indices shared with the rest of the
// design; only their low $clog2(Z) bits address the store.
module loft_counter_store
  import loft_pkg::*;
#(
  parameter int unsigned IDX_W = 14,
  parameter int unsigned Z     = 16,
  parameter int unsigned CW    = CTR_W
) (
  input  logic             clk,
  input  logic             wr_en,
  input  logic             wr_bank,
  input  logic [15:0]      wr_k,
  input  logic [IDX_W-1:0] wr_idx,
  input  logic [CW-1:0]    wr_data,
  input  logic             rd_en,
  input  logic             rd_bank,
  input  logic [15:0]      rd_k,
  input  logic [IDX_W-1:0] rd_idx,
  output logic [CW-1:0]    rd_data
);
  localparam int unsigned KW = (Z > 1) ? $clog2(Z) : 1;
  logic [CW-1:0] mem [2][Z][1 << IDX_W];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_bank][wr_k[KW-1:0]][wr_idx] <= wr_data;
    if (rd_en) rd_data <= mem[rd_bank][rd_k[KW-1:0]][rd_idx];
  end
endmodule
