// tb_loft_sampler: (a) at the default lambda = 2.1e6/s and 200 MHz, a packet
// in every clock for 200,000 clocks must give 2100 samples on average (Poisson,
// sigma ~46; accepted range 1850..2350) even with a consumer that is not
// always ready; each sample must be the flow of a packet that was present;
// samples come in increasing order and are never duplicated. (b) With
// lambda = f_clk every packet must be sampled. (c) After an idle gap of G
// clocks at p = 1/64 the stored credit lets about G/64 back-to-back packets be
// sampled.
module tb_loft_sampler;
  import loft_pkg::*;
  logic clk = 0, rst_n = 0;
  logic va = 0, vb = 0, vc = 0;
  logic [FLOW_W-1:0] fl = 0;
  logic oa, ob, oc, ra = 0;
  logic [FLOW_W-1:0] fa, fb, fc;
  int checks = 0, failures = 0;
  int na = 0, nb = 0, nc = 0, pb = 0;
  logic [FLOW_W-1:0] last_a = 0;

  loft_sampler dut_a (.clk, .rst_n, .in_valid(va), .in_flow(fl), .out_valid(oa), .out_flow(fa), .out_ready(ra));
  loft_sampler #(.SAMPLE_RATE(64'd200000000)) dut_b (.clk, .rst_n, .in_valid(vb), .in_flow(fl), .out_valid(ob), .out_flow(fb), .out_ready(1'b1));
  loft_sampler #(.SAMPLE_RATE(64'd3125000)) dut_c (.clk, .rst_n, .in_valid(vc), .in_flow(fl), .out_valid(oc), .out_flow(fc), .out_ready(1'b1));
  always #5 clk = ~clk;

  task automatic chk(input logic c, input string msg);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s t=%0t", msg, $time); end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (oa && ra) begin
      na++;
      chk(fa > last_a || na == 1, "samples in order, no duplicates");
      chk(fa < fl, "sample is an earlier packet");
      last_a <= fa;
    end
    if (ob) nb++;
    if (oc) nc++;
    if (vb) pb++;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    // (c) idle gap of 6400 clocks, then 400 packets back to back
    repeat (6400 - 3) @(negedge clk);
    for (int c = 0; c < 400; c++) begin
      @(negedge clk); fl = fl + 1; vc = 1;
    end
    @(negedge clk); vc = 0;
    repeat (3) @(negedge clk);
    $display("after gap: %0d samples (expect about %0d)", nc, (6400 + 400) / 64);
    chk(nc >= 70 && nc <= 150, "credit kept across idle gap");
    // (a) + (b)
    for (int c = 0; c < 200000; c++) begin
      @(negedge clk);
      fl = fl + 1;
      va = 1;
      ra = ($urandom % 10) < 8;
      vb = (c % 10) == 0;
    end
    @(negedge clk); va = 0; vb = 0; ra = 1;
    repeat (3) @(negedge clk);
    $display("samples a=%0d b=%0d of %0d packets", na, nb, pb);
    chk(na >= 1850 && na <= 2350, "sample rate lambda");
    chk(nb == pb, "p=1 samples every packet");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (300000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
