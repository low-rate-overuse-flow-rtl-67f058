// loft_sampler: randomised packet sampler that feeds the active-flow list.
//
// The paper samples packets so that sampling instants form a Poisson process
// of rate lambda: after each sample the next sample time is advanced by an
// exponentially distributed interval (mean 1/lambda), and the first packet at
// or after that time is sampled. In hardware, time is counted in clock cycles,
// where the exponential interval becomes a geometric one: in every clock a
// sampling instant occurs with probability p = lambda / f_clk. A credit
// counter counts instants that have passed but not yet been used; a packet is
// sampled while the credit is non-zero, and each sample uses one credit. This
// reproduces the pseudo code, including the case where several sample times
// have passed since the last packet. The random source is a 32-bit xorshift
// generator; an instant occurs when its output is below p * 2**32.
//
// Interface: packets in (in_valid, in_flow, one per clock, never stalled);
// sampled flow IDs out on a valid/ready handshake (out_valid is held with
// out_flow stable until out_ready). When the flow table is busy the packet is
// simply not sampled and the credit is kept for a later packet.
// Defaults: lambda = 2.1e6 samples/s (paper), f_clk = 200 MHz (paper).
//
// Lint: rst_n in the assertion's disable iff is reported as a synchronous use
// of an asynchronous reset; assertions do not synthesise, so it stands.
module loft_sampler
  import loft_pkg::*;
#(
  parameter longint unsigned SAMPLE_RATE = 64'd2100000,
  parameter longint unsigned CLK_HZ      = 64'd200000000,
  parameter int unsigned     CREDIT_W    = 16,
  parameter logic [31:0]     RNG_SEED    = 32'h2545_F491
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  logic [FLOW_W-1:0] in_flow,
  output logic              out_valid,
  output logic [FLOW_W-1:0] out_flow,
  input  logic              out_ready
);
  // p * 2**32, rounded to nearest
  localparam longint unsigned THRESH64 = ((SAMPLE_RATE << 32) + CLK_HZ / 2) / CLK_HZ;
  localparam logic [32:0] THRESH = (THRESH64 > 64'h1_0000_0000) ? 33'h1_0000_0000 : THRESH64[32:0];

  logic [31:0]         rng, rng_next;
  logic                arm;
  logic [CREDIT_W-1:0] credit;
  logic                take;

  always_comb begin
    rng_next = rng ^ (rng << 13);
    rng_next = rng_next ^ (rng_next >> 17);
    rng_next = rng_next ^ (rng_next << 5);
    arm      = {1'b0, rng} < THRESH;
    take     = in_valid && (credit != '0) && (!out_valid || out_ready);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rng       <= RNG_SEED;
      credit    <= '0;
      out_valid <= 1'b0;
      out_flow  <= '0;
    end else begin
      rng <= rng_next;
      case ({arm && (credit != '1), take})
        2'b10:   credit <= credit + 1'b1;
        2'b01:   credit <= credit - 1'b1;
        default: credit <= credit;
      endcase
      if (take) begin
        out_valid <= 1'b1;
        out_flow  <= in_flow;
      end else if (out_ready) begin
        out_valid <= 1'b0;
      end
    end
  end

  // handshake rule: a sample that is not taken stays on the output unchanged
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
            out_valid && !out_ready |=> out_valid && $stable(out_flow));
endmodule
