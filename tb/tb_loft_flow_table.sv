// tb_loft_flow_table: a 16-slot table with a probe limit of 4. Random inserts
// of 40 flow IDs in two parities are checked against a linear-probing model
// (new / already listed / no slot, and the slot contents); then the estimate
// port writes and reads back A, C, |J| and clears activity bits, the clear
// command frees exactly the slots not active in the kept parity, and
// ins_pause holds inserts off.
module tb_loft_flow_table;
  import loft_pkg::*;
  import tb_loft_ref_pkg::*;
  localparam int unsigned TAB_W = 4, T = 16, MP = 4;
  logic clk = 0, rst_n = 0;
  logic ins_valid = 0, ins_par = 0, ins_pause = 0, ins_ready, ins_new, ins_dup, ins_miss;
  logic [FLOW_W-1:0] ins_flow = 0;
  logic rd_en = 0, rd_valid, wr_en = 0, wr_clr = 0, wr_clr_par = 0, clr_en = 0, clr_keep_par = 0;
  logic [TAB_W-1:0] rd_slot = 0, wr_slot = 0, clr_slot = 0;
  logic [FLOW_W-1:0] rd_id;
  logic [1:0] rd_act;
  logic [63:0] rd_a, wr_a = 0;
  logic [47:0] rd_c, wr_c = 0;
  logic [15:0] rd_nj, wr_nj = 0;
  int checks = 0, failures = 0, n_new = 0, n_dup = 0, n_miss = 0;
  logic mv [T]; logic [31:0] mid [T]; logic [1:0] mact [T];
  logic [63:0] ma [T]; logic [47:0] mc [T]; logic [15:0] mnj [T];

  loft_flow_table #(.TAB_W(TAB_W), .MAX_PROBE(MP)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input logic c, input string msg);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s t=%0t", msg, $time); end
  endtask

  task automatic insert(input logic [31:0] f, input logic p);
    int s, outcome;   // 0 new, 1 dup, 2 miss
    s = int'(ref_fmix(64'(f)) % T);
    outcome = 2;
    for (int n = 0; n < MP; n++) begin
      int q; q = (s + n) % T;
      if (mv[q] && mid[q] == f) begin outcome = 1; mact[q][p] = 1; break; end
      if (!mv[q]) begin outcome = 0; mv[q] = 1; mid[q] = f; mact[q] = p ? 2'b10 : 2'b01;
                        ma[q] = 0; mc[q] = 0; mnj[q] = 0; break; end
    end
    @(negedge clk); ins_valid = 1; ins_flow = f; ins_par = p;
    do @(posedge clk); while (!ins_ready);
    @(negedge clk); ins_valid = 0;
    while (!(ins_new || ins_dup || ins_miss)) @(negedge clk);
    chk((outcome == 0 && ins_new) || (outcome == 1 && ins_dup) || (outcome == 2 && ins_miss), "insert outcome");
    if (ins_new) n_new++;
    if (ins_dup) n_dup++;
    if (ins_miss) n_miss++;
  endtask

  task automatic read_all;
    for (int s = 0; s < T; s++) begin
      @(negedge clk); rd_en = 1; rd_slot = TAB_W'(s);
      @(negedge clk); rd_en = 0;
      chk(rd_valid == mv[s], "slot occupancy");
      if (mv[s]) begin
        chk(rd_id == mid[s] && rd_act == mact[s], "slot id and activity");
        chk(rd_a == ma[s] && rd_c == mc[s] && rd_nj == mnj[s], "slot A, C, |J|");
      end
    end
  endtask

  initial begin
    for (int s = 0; s < T; s++) begin mv[s] = 0; mact[s] = 0; end
    repeat (2) @(negedge clk); rst_n = 1;
    wait (ins_ready);
    for (int n = 0; n < 40; n++) insert(32'h5000 + ($urandom % 24), 1'(n >= 20));
    $display("new=%0d dup=%0d miss=%0d", n_new, n_dup, n_miss);
    chk(n_new > 0 && n_dup > 0, "new and duplicate inserts seen");
    read_all();
    // estimate port: write sums to every occupied slot, clearing parity 0
    for (int s = 0; s < T; s++) if (mv[s]) begin
      @(negedge clk);
      wr_en = 1; wr_slot = TAB_W'(s); wr_a = {$urandom, $urandom}; wr_c = 48'($urandom); wr_nj = 16'($urandom);
      wr_clr = 1; wr_clr_par = 0;
      ma[s] = wr_a; mc[s] = wr_c; mnj[s] = wr_nj; mact[s][0] = 0;
      @(negedge clk); wr_en = 0;
    end
    read_all();
    // pause blocks inserts
    @(negedge clk); ins_pause = 1; #1;
    chk(!ins_ready, "pause holds inserts off");
    // clear keeping parity 1
    for (int s = 0; s < T; s++) begin
      @(negedge clk); clr_en = 1; clr_slot = TAB_W'(s); clr_keep_par = 1;
      ma[s] = 0; mc[s] = 0; mnj[s] = 0;
      if (!mact[s][1]) begin mv[s] = 0; mact[s] = 0; end
      @(negedge clk); clr_en = 0;
    end
    ins_pause = 0;
    read_all();
    // one more round of inserts on the cleared table
    for (int n = 0; n < 10; n++) insert(32'h9000 + ($urandom % 8), 1'b0);
    read_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (5000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
