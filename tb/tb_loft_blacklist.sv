// tb_loft_blacklist: lookups of listed and unlisted flows, no double entry for
// a flow inserted twice, and round-robin replacement of the oldest entry once
// the list is full.
module tb_loft_blacklist;
  import loft_pkg::*;
  localparam int unsigned N = 8;
  logic clk = 0, rst_n = 0;
  logic [FLOW_W-1:0] lookup_flow = 0, ins_flow = 0;
  logic hit, ins_valid = 0;
  logic [$clog2(N):0] count;
  int checks = 0, failures = 0;
  loft_blacklist #(.N(N)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input logic c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL %s t=%0t", msg, $time); end
  endtask
  task automatic ins(input logic [31:0] f);
    @(negedge clk); ins_valid = 1; ins_flow = f;
    @(negedge clk); ins_valid = 0;
  endtask
  task automatic look(input logic [31:0] f, input logic exp_hit, input string msg);
    lookup_flow = f; #1; chk(hit == exp_hit, msg);
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    look(32'd5, 0, "empty list");
    ins(32'd5); ins(32'd9); ins(32'd5);
    look(32'd5, 1, "listed flow 5"); look(32'd9, 1, "listed flow 9"); look(32'd7, 0, "unlisted flow");
    chk(count == 2, "duplicate not added");
    for (int i = 0; i < 7; i++) ins(32'd100 + i);   // 9 distinct inserts into 8 slots
    chk(count == N, "full");
    look(32'd5, 0, "oldest entry replaced");
    look(32'd9, 1, "second entry kept");
    look(32'd106, 1, "newest entry");
    for (int i = 0; i < 200; i++) begin
      logic [31:0] f; f = $urandom % 1000 + 2000; look(f, 0, "random unlisted");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (2000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
