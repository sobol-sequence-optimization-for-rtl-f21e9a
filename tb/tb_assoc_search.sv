// tb_assoc_search: trains random class hypervectors, queries noisy copies
// and random vectors, and checks the returned class and distance against a
// testbench search (smallest Hamming distance, lowest class on ties) and the
// C + 1 cycle search time.
module tb_assoc_search;
  localparam int unsigned D = 256, C = 21;
  localparam int unsigned CLS_W = $clog2(C), DIST_W = $clog2(D + 1);

  logic clk = 0, rst_n = 0, train_we = 0, query_start = 0;
  logic [CLS_W-1:0] train_class = '0, result_class;
  logic [D-1:0] train_hv = '0, query_hv = '0;
  logic busy, result_valid;
  logic [DIST_W-1:0] result_dist;
  logic [D-1:0] cls [C];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  assoc_search #(.D(D), .C(C)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  function automatic logic [D-1:0] rnd();
    logic [D-1:0] v;
    for (int i = 0; i < int'(D); i += 32) v[i +: 32] = $urandom;
    return v;
  endfunction

  task automatic query(logic [D-1:0] q);
    int best, bestd, cyc;
    best = 0; bestd = D + 1;
    for (int c = 0; c < int'(C); c++) begin
      int h = $countones(q ^ cls[c]);
      if (h < bestd) begin bestd = h; best = c; end
    end
    @(negedge clk) begin query_start = 1; query_hv = q; end
    @(negedge clk) begin query_start = 0; query_hv = rnd(); end  // query is latched
    cyc = 1;
    while (!result_valid) begin @(negedge clk); cyc++; end
    check(cyc == int'(C) + 1, $sformatf("search took %0d cycles", cyc));
    check(int'(result_class) == best, $sformatf("class %0d, expected %0d", result_class, best));
    check(int'(result_dist) == bestd, "distance");
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < int'(C); c++) begin
      cls[c] = rnd();
      @(negedge clk) begin train_we = 1; train_class = CLS_W'(c); train_hv = cls[c]; end
    end
    @(negedge clk) train_we = 0;
    for (int t = 0; t < 60; t++) begin
      logic [D-1:0] q = cls[$urandom % C];
      for (int f = 0; f < 40; f++) q[$urandom % D] ^= 1'b1;
      query(q);
    end
    for (int t = 0; t < 20; t++) query(rnd());
    // a tie: two identical classes, the lower index wins
    cls[7] = cls[3];
    @(negedge clk) begin train_we = 1; train_class = 7; train_hv = cls[7]; end
    @(negedge clk) train_we = 0;
    query(cls[3]);
    check(result_class == 3 && result_dist == 0, "tie goes to the lower class");
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
