// loft_blacklist: drops the packets of flows found overusing.
//
// A content-addressed list of N flow IDs. lookup_flow is compared with every
// valid entry in the same clock (hit is combinational), so the blacklist
// filters one packet per clock in front of the detector. A flow reported by
// precise monitoring (ins_valid) is added unless it is already listed; when the
// list is full the oldest entry is replaced (round-robin pointer). The paper
// gives the blacklist's function only; size and replacement are this design's
// choices.
module loft_blacklist
  import loft_pkg::*;
#(
  parameter int unsigned N = 128
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [FLOW_W-1:0] lookup_flow,
  output logic              hit,
  input  logic              ins_valid,
  input  logic [FLOW_W-1:0] ins_flow,
  output logic [$clog2(N):0] count
);
  localparam int unsigned PW = (N > 1) ? $clog2(N) : 1;
  logic [FLOW_W-1:0] id  [N];
  logic [N-1:0]      vld;
  logic [PW-1:0]     wptr;
  logic              ins_hit;

  always_comb begin
    hit     = 1'b0;
    ins_hit = 1'b0;
    for (int i = 0; i < N; i++) begin
      if (vld[i] && id[i] == lookup_flow) hit = 1'b1;
      if (vld[i] && id[i] == ins_flow)    ins_hit = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld   <= '0;
      wptr  <= '0;
      count <= '0;
    end else if (ins_valid && !ins_hit) begin
      id[wptr]  <= ins_flow;
      vld[wptr] <= 1'b1;
      wptr      <= (wptr == PW'(N - 1)) ? '0 : wptr + 1'b1;
      if (!vld[wptr]) count <= count + 1'b1;
    end
  end
endmodule
