// tb_loft_estimate: the estimate engine with a small flow table (32 slots),
// counter store (8 counters, Z = 3) and watchlist (4 flows).
// Three major cycles are run. Before each, flows are marked active through the
// flow table's insert port and random counter arrays are written to the
// store. A model computes, with the same hash, numFlow, A_f, C_f, |J_f| and
// the score (|J|*A*2**16) / (j*C); after each run the table contents, the
// cleared activity bits, the number of active flows, the watchlist (the
// 4 largest scores, in order) and the run time are checked. The third run is
// a reset cycle: afterwards the table must hold only the flows already
// active in the running cycle, with zero sums.
module tb_loft_estimate;
  import loft_pkg::*;
  import tb_loft_ref_pkg::*;
  localparam int unsigned IDX_W = 3, W = 8, Z = 3, TAB_W = 5, T = 32, WFM = 4, FRAC = 16;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;

  // estimate
  logic start = 0, start_reset = 0, busy, done, wl_valid;
  logic [15:0] start_j = 0, start_jg = 0;
  logic e_rd_en, e_wr_en, e_wr_clr, e_wr_clr_par, e_clr_en, e_clr_keep, e_pause;
  logic [TAB_W-1:0] e_rd_slot, e_wr_slot, e_clr_slot;
  logic [63:0] e_wr_a; logic [47:0] e_wr_c; logic [15:0] e_wr_nj;
  logic cs_rd_en, cs_rd_bank; logic [15:0] cs_rd_k; logic [IDX_W-1:0] cs_rd_idx; logic [31:0] cs_rd_data;
  logic [FLOW_W-1:0] wl_id [WFM]; logic [WFM-1:0] wl_vld; logic [63:0] wl_score [WFM];
  logic [31:0] n_active;
  // flow table
  logic ins_valid = 0, ins_par = 0, ins_ready, ins_new, ins_dup, ins_miss;
  logic [FLOW_W-1:0] ins_flow = 0;
  logic rd_valid; logic [FLOW_W-1:0] rd_id; logic [1:0] rd_act;
  logic [63:0] rd_a; logic [47:0] rd_c; logic [15:0] rd_nj;
  logic tb_own = 1, tb_rd_en = 0; logic [TAB_W-1:0] tb_rd_slot = 0;
  // counter store write side
  logic cs_wr_en = 0, cs_wr_bank = 0; logic [15:0] cs_wr_k = 0; logic [IDX_W-1:0] cs_wr_idx = 0; logic [31:0] cs_wr_data = 0;

  loft_estimate #(.IDX_W(IDX_W), .Z(Z), .TAB_W(TAB_W), .WFM(WFM), .FRAC(FRAC)) dut (
    .clk, .rst_n, .start, .start_j, .start_jg, .start_reset, .busy, .done,
    .ft_rd_en(e_rd_en), .ft_rd_slot(e_rd_slot), .ft_rd_valid(rd_valid), .ft_rd_id(rd_id), .ft_rd_act(rd_act),
    .ft_rd_a(rd_a), .ft_rd_c(rd_c), .ft_rd_nj(rd_nj),
    .ft_wr_en(e_wr_en), .ft_wr_slot(e_wr_slot), .ft_wr_a(e_wr_a), .ft_wr_c(e_wr_c), .ft_wr_nj(e_wr_nj),
    .ft_wr_clr(e_wr_clr), .ft_wr_clr_par(e_wr_clr_par), .ft_clr_en(e_clr_en), .ft_clr_slot(e_clr_slot),
    .ft_clr_keep_par(e_clr_keep), .ft_pause(e_pause),
    .cs_rd_en, .cs_rd_bank, .cs_rd_k, .cs_rd_idx, .cs_rd_data,
    .wl_valid, .wl_id, .wl_vld, .wl_score, .n_active);

  loft_flow_table #(.TAB_W(TAB_W), .MAX_PROBE(8)) u_ft (
    .clk, .rst_n, .ins_valid, .ins_flow, .ins_par, .ins_pause(e_pause), .ins_ready, .ins_new, .ins_dup, .ins_miss,
    .rd_en(tb_own ? tb_rd_en : e_rd_en), .rd_slot(tb_own ? tb_rd_slot : e_rd_slot),
    .rd_valid, .rd_id, .rd_act, .rd_a, .rd_c, .rd_nj,
    .wr_en(e_wr_en), .wr_slot(e_wr_slot), .wr_a(e_wr_a), .wr_c(e_wr_c), .wr_nj(e_wr_nj),
    .wr_clr(e_wr_clr), .wr_clr_par(e_wr_clr_par), .clr_en(e_clr_en), .clr_slot(e_clr_slot), .clr_keep_par(e_clr_keep));

  loft_counter_store #(.IDX_W(IDX_W), .Z(Z)) u_cs (
    .clk, .wr_en(cs_wr_en), .wr_bank(cs_wr_bank), .wr_k(cs_wr_k), .wr_idx(cs_wr_idx), .wr_data(cs_wr_data),
    .rd_en(cs_rd_en), .rd_bank(cs_rd_bank), .rd_k(cs_rd_k), .rd_idx(cs_rd_idx), .rd_data(cs_rd_data));

  always #5 clk = ~clk;

  task automatic chk(input logic c, input string msg);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s t=%0t", msg, $time); end
  endtask

  // model state per flow ID (flows 0x700..0x70F)
  longint unsigned mA [16], mC [16], mNJ [16];
  logic mlisted [16], mact [16][2];
  longint unsigned ctr [Z][W];

  task automatic mark(input int f, input logic p);
    @(negedge clk); ins_valid = 1; ins_flow = 32'h700 + f; ins_par = p;
    do @(posedge clk); while (!ins_ready);
    @(negedge clk); ins_valid = 0;
    while (!(ins_new || ins_dup || ins_miss)) @(negedge clk);
    chk(!ins_miss, "table has room");
    if (!mlisted[f]) begin mlisted[f] = 1; mA[f] = 0; mC[f] = 0; mNJ[f] = 0; mact[f][0] = 0; mact[f][1] = 0; end
    mact[f][p] = 1;
  endtask

  task automatic run(input int j, input int jg, input logic rst);
    int p, nact, t0, lat;
    longint unsigned nf [W];
    longint unsigned sc [16];
    longint unsigned top [$];
    p = jg % 2;
    // random counter arrays for this major cycle
    for (int k = 0; k < Z; k++)
      for (int x = 0; x < W; x++) begin
        @(negedge clk);
        cs_wr_en = 1; cs_wr_bank = 1'(p); cs_wr_k = 16'(k); cs_wr_idx = IDX_W'(x); cs_wr_data = $urandom % 100000;
        ctr[k][x] = cs_wr_data;
      end
    @(negedge clk); cs_wr_en = 0;
    // model
    nact = 0;
    for (int k = 0; k < Z; k++) begin
      for (int x = 0; x < W; x++) nf[x] = 0;
      for (int f = 0; f < 16; f++) if (mlisted[f] && mact[f][p]) nf[ref_idx(jg, k, 64'h700 + f, IDX_W)]++;
      for (int f = 0; f < 16; f++) if (mlisted[f] && mact[f][p]) begin
        int x; x = ref_idx(jg, k, 64'h700 + f, IDX_W);
        mA[f] += ctr[k][x]; mC[f] += nf[x];
      end
    end
    for (int f = 0; f < 16; f++) begin
      sc[f] = 0;
      if (mlisted[f] && mact[f][p]) begin
        nact++;
        mNJ[f]++;
        mact[f][p] = 0;
        sc[f] = (mNJ[f] * mA[f] * (64'd1 << FRAC)) / (longint'(j) * mC[f]);
        top.push_back(sc[f]);
      end
    end
    top.rsort();
    // run
    tb_own = 0;
    @(negedge clk); start = 1; start_j = 16'(j); start_jg = 16'(jg); start_reset = rst;
    t0 = $time / 10;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    lat = $time / 10 - t0;
    tb_own = 1;
    chk(wl_valid, "watchlist published with done");
    chk(n_active == 32'(nact), "number of active flows");
    chk(lat >= Z * (W + 2 * T) && lat <= Z * (W + 2 * T + 12) + 2 * T + nact * (16 + 64 + FRAC + 4) + (rst ? T : 0) + 10,
        "run time within the engine's cycle budget");
    $display("run j=%0d: %0d active flows, %0d clocks, top score %0d", j, nact, lat, top.size() ? top[0] : 0);
    for (int i = 0; i < WFM; i++) begin
      chk(wl_vld[i] == (i < top.size()), "watchlist fill");
      if (i < top.size() && wl_vld[i]) begin
        chk(wl_score[i] == top[i], "watchlist score order");
        chk(sc[wl_id[i] - 32'h700] == wl_score[i], "watchlist flow has that score");
      end
    end
    if (rst)
      for (int f = 0; f < 16; f++) if (mlisted[f]) begin
        mA[f] = 0; mC[f] = 0; mNJ[f] = 0;
        if (!mact[f][1 - p]) mlisted[f] = 0;
      end
    // table contents
    for (int s = 0; s < T; s++) begin
      @(negedge clk); tb_rd_en = 1; tb_rd_slot = TAB_W'(s);
      @(negedge clk); tb_rd_en = 0;
      if (rd_valid) begin
        int f; f = int'(rd_id) - 32'h700;
        chk(f >= 0 && f < 16 && mlisted[f], "listed flow");
        if (f >= 0 && f < 16) begin
          chk(rd_a == mA[f] && 64'(rd_c) == mC[f] && 64'(rd_nj) == mNJ[f], "A, C, |J| match model");
          if (rd_a != mA[f] || 64'(rd_nj) != mNJ[f] || 64'(rd_c) != mC[f])
            $display("  f=%0d A=%0d/%0d C=%0d/%0d nj=%0d/%0d act=%b", f, rd_a, mA[f], rd_c, mC[f], rd_nj, mNJ[f], rd_act);
          chk(rd_act == {mact[f][1], mact[f][0]}, "activity bits");
        end
      end
    end
  endtask

  initial begin
    for (int f = 0; f < 16; f++) mlisted[f] = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    wait (ins_ready);
    // major cycle jg=4 (j=1): flows 0..11 active
    for (int f = 0; f < 12; f++) mark(f, 0);
    run(1, 4, 0);
    // jg=5 (j=2): flows 4..15 active; some flows active in jg=6 already
    for (int f = 4; f < 16; f++) mark(f, 1);
    for (int f = 0; f < 3; f++) mark(f, 0);
    run(2, 5, 0);
    // jg=6 (j=3) ends a reset cycle; flows 8..9 already seen in jg=7
    for (int f = 3; f < 10; f++) mark(f, 0);
    mark(8, 1); mark(9, 1);
    run(3, 6, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (100000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
