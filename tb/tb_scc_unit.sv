// tb_scc_unit: the SCC unit against the two worked examples (a=1 b=2 c=2
// d=3 gives -0.111; identical vectors a=3 d=5 give 1) and against an
// integer evaluation of the SCC formula for random, correlated and
// anti-correlated pairs; checks the FRAC + 3 cycle latency after the last
// slice.
module tb_scc_unit;
  import hdc_tb_pkg::*;
  localparam int unsigned D = 256, LANES = 16, FRAC = 16, CW = $clog2(D + 1);

  logic clk = 0, rst_n = 0, in_valid = 0, in_last = 0, done;
  logic [LANES-1:0] x_bits = '0, y_bits = '0;
  logic signed [FRAC+1:0] scc_q;
  logic [CW-1:0] cnt_a, cnt_b, cnt_c, cnt_d;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  scc_unit #(.D(D), .LANES(LANES), .FRAC(FRAC)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  // stream two vectors of len bits (a multiple of LANES) and return SCC
  task automatic measure(logic [D-1:0] x, logic [D-1:0] y, int len, output longint q);
    int a = 0, b = 0, c = 0, d = 0, cyc;
    for (int i = 0; i < len; i++) begin
      a += x[i] & y[i]; b += x[i] & !y[i]; c += !x[i] & y[i]; d += !x[i] & !y[i];
    end
    for (int r = 0; r < len / int'(LANES); r++) begin
      @(negedge clk) begin
        in_valid = 1; in_last = (r == len / int'(LANES) - 1);
        x_bits = x[r * LANES +: LANES]; y_bits = y[r * LANES +: LANES];
      end
    end
    @(negedge clk) begin in_valid = 0; in_last = 0; end
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    check(cyc == int'(FRAC) + 3, $sformatf("latency %0d", cyc));
    check(cnt_a == CW'(a) && cnt_b == CW'(b) && cnt_c == CW'(c) && cnt_d == CW'(d), "a b c d counts");
    q = scc_q;
    check(q == ref_scc(a, b, c, d, FRAC), $sformatf("SCC %0d expected %0d (a%0d b%0d c%0d d%0d)",
          q, ref_scc(a, b, c, d, FRAC), a, b, c, d));
  endtask

  function automatic logic [D-1:0] rnd(int p256);
    logic [D-1:0] v;
    for (int i = 0; i < int'(D); i++) v[i] = ($urandom % 256) < p256;
    return v;
  endfunction

  initial begin
    longint q;
    logic [D-1:0] x, y;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // worked example (a): H1 = -1 +1 -1 +1 -1 +1 -1 -1, H2 = +1 -1 -1 -1 +1 +1 -1 -1.
    // One slice is 16 wide, so the 8 dimensions are sent twice: a, b, c, d
    // double and SCC stays -1/9.
    x = '0; y = '0;
    x[15:0] = {8'b01010100, 8'b01010100};
    y[15:0] = {8'b10001100, 8'b10001100};
    measure(x, y, 16, q);
    check(q == -longint'((65536) / 9), "example (a) gives -0.111");
    // worked example (b): H3 = H4 = +1 +1 +1 -1 -1 -1 -1 -1 (twice)
    x[15:0] = {8'b11100000, 8'b11100000};
    measure(x, x, 16, q);
    check(q == 65536, "example (b) gives 1");
    for (int t = 0; t < 60; t++) begin
      int p = 20 + $urandom % 200;
      x = rnd(p);
      case (t % 3)
        0: y = rnd(20 + $urandom % 200);                 // independent
        1: begin y = x; for (int f = 0; f < 30; f++) y[$urandom % D] ^= 1'b1; end
        default: y = ~x;                                 // anti-correlated
      endcase
      measure(x, y, D, q);
    end
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
