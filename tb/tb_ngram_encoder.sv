// tb_ngram_encoder: streams random letter hypervectors (with gaps and a
// mid-stream clear) and compares every n-gram with
// L1 ^ pi(L2) ^ pi^2(L3) ^ pi^3(L4), L1 the newest letter, computed from a
// history kept by the testbench; checks that the first N-1 letters of a text
// give no n-gram.
module tb_ngram_encoder;
  localparam int unsigned D = 64, N = 4;

  logic clk = 0, rst_n = 0, clr = 0, in_valid = 0, out_valid;
  logic [D-1:0] in_hv = '0, out_hv;
  logic [D-1:0] hist [$];
  int checks = 0, failures = 0, warmups = 0, ngrams = 0;

  always #5 clk = ~clk;
  ngram_encoder #(.D(D), .N(N)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  function automatic logic [D-1:0] rotn(logic [D-1:0] x, int n);
    logic [D-1:0] y;
    y = x;
    repeat (n) y = {y[D-2:0], y[D-1]};   // bit i moves to bit i+1
    return y;
  endfunction

  task automatic send(logic [D-1:0] hv);
    logic [D-1:0] e;
    @(negedge clk) begin in_valid = 1; in_hv = hv; end
    hist.push_front(hv);
    @(negedge clk) in_valid = 0;
    if (hist.size() >= N) begin
      e = '0;
      for (int j = 0; j < int'(N); j++) e ^= rotn(hist[j], j);
      check(out_valid, "n-gram produced");
      check(out_hv == e, "n-gram value");
      ngrams++;
    end else begin
      check(!out_valid, "no n-gram before N letters");
      warmups++;
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    // a hand-made case: one-hot letters make the rotation visible
    send(64'h1); send(64'h1); send(64'h1); send(64'h1);
    check(out_hv == 64'hF, "one-hot letters rotate to 0..3");
    for (int t = 0; t < 200; t++) begin
      send({$urandom, $urandom});
      if ($urandom % 4 == 0) @(negedge clk);            // idle gap
      if (t == 100) begin
        @(negedge clk) clr = 1;
        @(negedge clk) clr = 0;
        hist.delete();
      end
    end
    check(warmups == 2 * (N - 1), "warm-up seen at each text start");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
