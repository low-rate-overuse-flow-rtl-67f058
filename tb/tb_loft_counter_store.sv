// tb_loft_counter_store: fills both banks with Z arrays of random words and
// reads every word back (one clock read latency), including reads of one bank
// interleaved with writes of the other.
module tb_loft_counter_store;
  import loft_pkg::*;
  localparam int unsigned IDX_W = 5, W = 32, Z = 4;
  logic clk = 0;
  logic wr_en = 0, wr_bank = 0, rd_en = 0, rd_bank = 0;
  logic [15:0] wr_k = 0, rd_k = 0;
  logic [IDX_W-1:0] wr_idx = 0, rd_idx = 0;
  logic [31:0] wr_data = 0, rd_data;
  logic [31:0] model [2][Z][W];
  int checks = 0, failures = 0;
  loft_counter_store #(.IDX_W(IDX_W), .Z(Z)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    logic [31:0] expv;
    for (int b = 0; b < 2; b++)
      for (int k = 0; k < Z; k++)
        for (int i = 0; i < W; i++) begin
          @(negedge clk);
          wr_en = 1; wr_bank = 1'(b); wr_k = 16'(k); wr_idx = IDX_W'(i); wr_data = $urandom;
          model[b][k][i] = wr_data;
        end
    @(negedge clk); wr_en = 0;
    // read bank 0 while rewriting bank 1
    for (int k = 0; k < Z; k++)
      for (int i = 0; i < W; i++) begin
        @(negedge clk);
        rd_en = 1; rd_bank = 0; rd_k = 16'(k); rd_idx = IDX_W'(i); expv = model[0][k][i];
        wr_en = 1; wr_bank = 1; wr_k = 16'(k); wr_idx = IDX_W'(i); wr_data = ~model[1][k][i];
        model[1][k][i] = wr_data;
        @(negedge clk);
        rd_en = 0; wr_en = 0;
        checks++; if (rd_data != expv) failures++;
      end
    for (int k = 0; k < Z; k++)
      for (int i = 0; i < W; i++) begin
        @(negedge clk);
        rd_en = 1; rd_bank = 1; rd_k = 16'(k); rd_idx = IDX_W'(i);
        @(negedge clk); rd_en = 0;
        checks++; if (rd_data != model[1][k][i]) failures++;
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (5000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
