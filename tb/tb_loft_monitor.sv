// tb_loft_monitor: four watched flows with gamma = 0.5 byte/clock and
// beta = 3000 bytes: a compliant flow (100 B every 200 clocks), a 1.67x
// overuse flow (100 B every 120 clocks), a burst flow and a silent one, plus
// heavy traffic of an unwatched flow. Every packet is run through a
// leaky-bucket model; det_valid must come exactly one clock after the packet
// the model finds violating, only once per flow, and never for compliant or
// unwatched flows. A reload must empty the buckets.
module tb_loft_monitor;
  import loft_pkg::*;
  localparam int unsigned N = 4;
  logic clk = 0, rst_n = 0;
  logic [TIME_W-1:0] now = 0;
  logic load = 0;
  logic [FLOW_W-1:0] load_id [N];
  logic [N-1:0] load_vld = '0;
  logic pkt_valid = 0;
  pkt_t pkt = '0;
  logic det_valid;
  logic [FLOW_W-1:0] det_flow;
  logic [N-1:0] watched;
  int checks = 0, failures = 0, n_det = 0;
  longint unsigned lvl [N], last [N];
  logic mw [N];
  logic exp_det = 0;
  logic [31:0] exp_flow = 0;
  localparam longint unsigned GAMMA = 64'd1 << 23;   // 0.5 byte per clock
  localparam longint unsigned BETA = 3000;

  loft_monitor #(.N(N)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) now <= now + 1;

  task automatic chk(input logic c, input string msg);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s t=%0t", msg, $time); end
  endtask

  // model, evaluated on the same edge the DUT samples the packet
  always @(posedge clk) if (rst_n) begin
    chk(det_valid == exp_det && (!exp_det || det_flow == exp_flow), "detection matches model");
    if (det_valid) n_det++;
    exp_det <= 0;
    if (load) begin
      for (int i = 0; i < N; i++) begin mw[i] = load_vld[i]; lvl[i] = 0; last[i] = now; end
    end else if (pkt_valid) begin
      for (int i = 0; i < N; i++)
        if (mw[i] && load_id[i] == pkt.flow_id) begin
          longint unsigned leak, l;
          leak = GAMMA * (now - last[i]);
          l = (lvl[i] > leak) ? lvl[i] - leak : 0;
          l = l + (longint'(pkt.size) << RATE_FRAC);
          last[i] = now;
          if (l > (BETA << RATE_FRAC)) begin mw[i] = 0; exp_det <= 1; exp_flow <= pkt.flow_id; end
          else lvl[i] = l;
        end
    end
  end

  initial begin
    load_id[0] = 10; load_id[1] = 11; load_id[2] = 12; load_id[3] = 13;
    for (int i = 0; i < N; i++) mw[i] = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk); load = 1; load_vld = '1;
    @(negedge clk); load = 0;
    for (int c = 1; c <= 30000; c++) begin
      pkt_valid = 0; pkt.gamma = 32'(GAMMA); pkt.beta = 32'(BETA); pkt.size = 100;
      if (c % 200 == 0)                    begin pkt_valid = 1; pkt.flow_id = 10; end
      else if (c % 120 == 7)               begin pkt_valid = 1; pkt.flow_id = 11; end
      else if (c >= 20000 && c < 20040)    begin pkt_valid = 1; pkt.flow_id = 12; end
      else if (c % 3 == 1)                 begin pkt_valid = 1; pkt.flow_id = 20; pkt.size = 1500; end
      @(negedge clk);
    end
    pkt_valid = 0;
    repeat (2) @(negedge clk);
    chk(n_det == 2, "two overuse flows detected");
    chk(watched == 4'b1001, "violators released, others still watched");
    // reload: buckets start empty, flow 12 may send a 30-packet burst
    @(negedge clk); load = 1;
    @(negedge clk); load = 0;
    for (int c = 0; c < 30; c++) begin pkt_valid = 1; pkt.flow_id = 12; @(negedge clk); end
    pkt_valid = 0;
    repeat (2) @(negedge clk);
    chk(n_det == 2, "burst within beta after reload not reported");
    $display("detections=%0d", n_det);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (40000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
