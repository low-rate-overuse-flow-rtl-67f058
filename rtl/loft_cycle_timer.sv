// loft_cycle_timer: minor-cycle, major-cycle and reset-cycle clock of LOFT.
//
// A minor cycle lasts CLK_PER_MINOR clock cycles (200 MHz / 64 minor cycles
// per second = 3,125,000 by default). Z minor cycles make one major cycle
// (16 by default: 64 minor / 4 major cycles per second). The reset rule of the
// paper's pseudo code, "if Z*j >= theta_reset then Reset", is applied at the
// major-cycle boundary: when the major cycle that just ended had index j with
// Z*j >= THETA_RESET, reset_tick is raised with major_tick and the next major
// cycle is numbered 1 again.
//
// Outputs, all registered:
//   k          minor index inside the current major cycle, 0..Z-1
//   j          index of the current major cycle since the last reset, from 1
//   jg         major cycles since power-up (wraps), used to seed the hash
//   minor_tick one-clock pulse in the first clock of each new minor cycle
//   major_tick one-clock pulse in the first clock of each new major cycle;
//              ended_j / ended_jg then hold the indices of the cycle just ended
//   reset_tick one-clock pulse together with major_tick at a reset point
//   now        free-running clock count, the time base of the leaky buckets
// The first minor cycle after rst_n starts with k=0, j=1, jg=0 and no tick.
module loft_cycle_timer
  import loft_pkg::*;
#(
  parameter int unsigned CLK_PER_MINOR = 3125000,
  parameter int unsigned Z             = 16,
  parameter int unsigned THETA_RESET   = 960
) (
  input  logic              clk,
  input  logic              rst_n,
  output logic [15:0]       k,
  output logic [15:0]       j,
  output logic [15:0]       jg,
  output logic [15:0]       ended_j,
  output logic [15:0]       ended_jg,
  output logic              minor_tick,
  output logic              major_tick,
  output logic              reset_tick,
  output logic [TIME_W-1:0] now
);
  logic [31:0] clk_cnt;
  logic        minor_end, major_end, reset_now;

  always_comb begin
    minor_end = (clk_cnt == CLK_PER_MINOR - 1);
    major_end = minor_end && (k == 16'(Z - 1));
    reset_now = major_end && (32'(Z) * 32'(j) >= 32'(THETA_RESET));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      clk_cnt    <= '0;
      k          <= '0;
      j          <= 16'd1;
      jg         <= '0;
      ended_j    <= '0;
      ended_jg   <= '0;
      minor_tick <= 1'b0;
      major_tick <= 1'b0;
      reset_tick <= 1'b0;
      now        <= '0;
    end else begin
      now        <= now + 1'b1;
      minor_tick <= minor_end;
      major_tick <= major_end;
      reset_tick <= reset_now;
      if (minor_end) begin
        clk_cnt <= '0;
        if (major_end) begin
          k        <= '0;
          ended_j  <= j;
          ended_jg <= jg;
          jg       <= jg + 1'b1;
          j        <= reset_now ? 16'd1 : j + 1'b1;
        end else begin
          k <= k + 1'b1;
        end
      end else begin
        clk_cnt <= clk_cnt + 1'b1;
      end
    end
  end
endmodule
