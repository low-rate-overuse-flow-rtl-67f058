// tb_loft_update: packets of a few flows (so that back-to-back packets hit the
// same counter and use the bypass) in six minor cycles; every drained array is
// compared entry by entry with a model that adds sizes with saturation at the
// counter width. Also checks the drain length, drain_last, the minor-cycle
// tags, one packet per clock throughput and the overrun flag.
module tb_loft_update;
  import loft_pkg::*;
  import tb_loft_ref_pkg::*;
  localparam int unsigned IDX_W = 4, W = 16, CW = 12, ZT = 3;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready;
  logic [FLOW_W-1:0] in_flow = 0;
  logic [SIZE_W-1:0] in_size = 0;
  logic minor_tick = 0;
  logic [15:0] k = 0, jg = 0;
  logic d_valid, d_last, bypass, saturated, overrun;
  logic [IDX_W-1:0] d_idx;
  logic [CW-1:0] d_data;
  logic [15:0] d_k, d_jg;
  int checks = 0, failures = 0;
  int n_bypass = 0, n_sat = 0, n_over = 0, n_drained = 0, n_pkts = 0;
  longint unsigned model [int][W];
  int unsigned cur_m = 0;

  loft_update #(.IDX_W(IDX_W), .CW(CW)) dut (
    .clk, .rst_n, .in_valid, .in_flow, .in_size, .in_ready, .minor_tick, .k, .jg,
    .drain_valid(d_valid), .drain_idx(d_idx), .drain_data(d_data), .drain_k(d_k),
    .drain_jg(d_jg), .drain_last(d_last), .bypass, .saturated, .overrun);
  always #5 clk = ~clk;

  task automatic chk(input logic c, input string msg);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s t=%0t", msg, $time); end
  endtask

  // model and scoreboard
  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) begin
      int unsigned x;
      longint unsigned v;
      x = ref_idx(jg, k, in_flow, IDX_W);
      v = model[cur_m][x] + in_size;
      model[cur_m][x] = (v > (64'd1 << CW) - 1) ? (64'd1 << CW) - 1 : v;
      n_pkts++;
    end
    if (d_valid) begin
      int unsigned m;
      m = d_jg * ZT + d_k;
      chk(model.exists(m), "drained cycle known");
      if (model.exists(m)) chk(64'(d_data) == model[m][d_idx], "drained counter value");
      chk(d_last == (d_idx == IDX_W'(W - 1)), "drain_last");
      n_drained++;
    end
    if (bypass) n_bypass++;
    if (saturated) n_sat++;
    if (overrun) n_over++;
  end

  task automatic tick(input int unsigned m);
    @(negedge clk);
    minor_tick = 1; k = 16'(m % ZT); jg = 16'(m / ZT); cur_m = m;
    for (int x = 0; x < W; x++) model[m][x] = 0;
    @(negedge clk);
    minor_tick = 0;
  endtask

  initial begin
    int t0;
    for (int x = 0; x < W; x++) model[0][x] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    wait (in_ready);
    for (int m = 0; m < 6; m++) begin
      // 60 back-to-back packets of 4 flows, then a gap longer than the drain
      t0 = n_pkts;
      @(negedge clk);
      for (int p = 0; p < 60; p++) begin
        in_valid = 1; in_flow = 32'h100 + ($urandom % 4); in_size = 16'($urandom % 200 + (m == 4 ? 400 : 40));
        @(negedge clk);
      end
      in_valid = 0;
      repeat (2) @(posedge clk);
      chk(n_pkts - t0 == 60, "one packet per clock accepted");
      repeat (W + 8) @(negedge clk);
      tick(m + 1);
    end
    repeat (W + 10) @(negedge clk);
    chk(n_drained == 6 * W, "six full arrays drained");
    chk(n_bypass > 0, "bypass used");
    chk(n_sat > 0, "saturation seen");
    chk(n_over == 0, "no overrun with long minor cycles");
    // minor cycle shorter than the drain
    tick(7);
    repeat (3) @(negedge clk);
    tick(8);
    repeat (W + 10) @(negedge clk);
    chk(n_over == 1, "overrun flagged");
    $display("bypass=%0d saturated=%0d drained=%0d", n_bypass, n_sat, n_drained);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
