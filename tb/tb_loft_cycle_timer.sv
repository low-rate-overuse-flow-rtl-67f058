// tb_loft_cycle_timer: minor ticks every CLK_PER_MINOR clocks, a major tick
// every Z minor cycles, k/j/jg sequences, and the reset point Z*j >= THETA.
module tb_loft_cycle_timer;
  import loft_pkg::*;
  localparam int unsigned CPM = 7, Z = 3, TH = 7;   // reset after j=3 (Z*j = 9 >= 7)
  logic clk = 0, rst_n = 0;
  logic [15:0] k, j, jg, ej, ejg;
  logic mi, ma, rs;
  logic [TIME_W-1:0] now;
  int checks = 0, failures = 0;
  loft_cycle_timer #(.CLK_PER_MINOR(CPM), .Z(Z), .THETA_RESET(TH)) dut (
    .clk, .rst_n, .k, .j, .jg, .ended_j(ej), .ended_jg(ejg),
    .minor_tick(mi), .major_tick(ma), .reset_tick(rs), .now);
  always #5 clk = ~clk;

  task automatic chk(input logic c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL %s at t=%0t", msg, $time); end
  endtask

  initial begin
    int cyc, n_minor, exp_k, exp_j, exp_jg, n_major, n_reset;
    exp_k = 0; exp_j = 1; exp_jg = 0; n_minor = 0; n_major = 0; n_reset = 0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (cyc = 1; cyc <= CPM * Z * 8; cyc++) begin
      @(posedge clk); #1;
      // model: a new minor cycle starts every CPM clocks
      if (cyc % CPM == 0) begin
        n_minor++;
        if (exp_k == Z - 1) begin
          n_major++;
          chk(ej == 16'(exp_j) && ejg == 16'(exp_jg), "ended indices");
          chk(rs == (Z * exp_j >= TH), "reset tick");
          if (Z * exp_j >= TH) begin exp_j = 1; n_reset++; end else exp_j++;
          exp_jg++;
          exp_k = 0;
          chk(ma, "major tick");
        end else begin
          exp_k++;
          chk(!ma && !rs, "no major tick");
        end
        chk(mi, "minor tick");
      end else begin
        chk(!mi && !ma && !rs, "no tick");
      end
      chk(k == 16'(exp_k) && j == 16'(exp_j) && jg == 16'(exp_jg), "k/j/jg");
      chk(now == TIME_W'(cyc), "time");
    end
    chk(n_reset == 2, "two reset cycles in 8 major cycles");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (10000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
