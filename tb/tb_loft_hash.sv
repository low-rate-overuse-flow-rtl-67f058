// tb_loft_hash: checks H_{j,k} against an independent model of the murmur3
// finaliser, and that changing the seed re-maps flows (about half of the
// flows of a counter land in the same counter only by chance, 1/W).
module tb_loft_hash;
  localparam int unsigned IDX_W = 10;
  logic [31:0] seed, flow;
  logic [IDX_W-1:0] idx;
  int checks = 0, failures = 0;

  loft_hash #(.IDX_W(IDX_W)) dut (.seed(seed), .flow_id(flow), .idx(idx));

  function automatic longint unsigned ref_hash(longint unsigned s, longint unsigned f);
    longint unsigned h;
    h = (f ^ ((s * 64'h9E3779B1) % 64'h1_0000_0000)) & 64'hFFFF_FFFF;
    h = h ^ (h / 65536);
    h = (h * 64'h85EBCA6B) % 64'h1_0000_0000;
    h = h ^ (h / 8192);
    h = (h * 64'hC2B2AE35) % 64'h1_0000_0000;
    h = h ^ (h / 65536);
    return h % (64'd1 << IDX_W);
  endfunction

  initial begin
    int same;
    logic [IDX_W-1:0] first;
    for (int n = 0; n < 2000; n++) begin
      seed = $urandom; flow = $urandom;
      #1;
      checks++;
      if (64'(idx) != ref_hash(64'(seed), 64'(flow))) begin
        failures++;
        if (failures < 5) $display("mismatch seed=%h flow=%h idx=%0d", seed, flow, idx);
      end
    end
    // same flow, consecutive seeds: the counter index must change most of the time
    same = 0;
    for (int n = 0; n < 1000; n++) begin
      flow = $urandom; seed = 32'h0001_0000 + n; #1; first = idx;
      seed = seed + 1; #1;
      if (idx == first) same++;
    end
    checks++;
    if (same > 20) begin failures++; $display("seed change re-mapped too few flows (%0d same)", same); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
