// tb_sobol_generator: checks the Sobol generator against the printed
// reference sequences of the first two dimensions and against an integer
// model of the recurrence for random descriptors, and checks the timing:
// the first row two cycles after start, then one row per cycle.
module tb_sobol_generator;
  import hdc_pkg::*;
  import hdc_tb_pkg::*;

  localparam int unsigned D = 256, SB = 8, LANES = 16, ROWS = D / LANES;

  logic clk = 0, rst_n = 0, start = 0;
  sobol_desc_t desc;
  logic busy, pt_valid;
  logic [$clog2(ROWS)-1:0] pt_row;
  logic [LANES-1:0][SB-1:0] pt_data;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  sobol_generator #(.D(D), .SB(SB), .LANES(LANES)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  // run one dimension, compare all points with the model
  task automatic run_dim(sobol_desc_t d, output int unsigned pts [D]);
    int cyc, rows_seen;
    desc  = d;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    cyc = 1; rows_seen = 0;
    while (rows_seen < ROWS) begin
      if (pt_valid) begin
        if (rows_seen == 0) check(cyc == 2, $sformatf("first row after %0d cycles", cyc));
        check(int'(pt_row) == rows_seen, "rows in order, one per cycle");
        for (int l = 0; l < int'(LANES); l++) begin
          pts[rows_seen * LANES + l] = pt_data[l];
          check(int'(pt_data[l]) == ref_sobol_point(d, rows_seen * LANES + l, SB),
                $sformatf("point %0d", rows_seen * LANES + l));
        end
        rows_seen++;
      end
      @(negedge clk); cyc++;
    end
    check(!pt_valid && !busy, "generator idle after the last row");
  endtask

  initial begin
    int unsigned pts [D];
    // printed first points: dimension 1 in eighths 0 4 2 6 1 5 3 7,
    // dimension 2 in eighths 0 4 6 2 5 1 3
    int unsigned dim1 [8] = '{0, 4, 2, 6, 1, 5, 3, 7};
    int unsigned dim2 [7] = '{0, 4, 6, 2, 5, 1, 3};
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_dim(vdc_desc(SB), pts);
    for (int i = 0; i < 8; i++) check(pts[i] == dim1[i] << (SB - 3), $sformatf("dim 1 point %0d", i));
    run_dim(dim2_desc(), pts);
    for (int i = 0; i < 7; i++) check(pts[i] == dim2[i] << (SB - 3), $sformatf("dim 2 point %0d", i));
    // every point of a Sobol dimension over 2^SB points is distinct
    begin
      bit seen [D];
      int dup = 0;
      foreach (seen[i]) seen[i] = 0;
      foreach (pts[i]) begin if (seen[pts[i]]) dup++; seen[pts[i]] = 1; end
      check(dup == 0, "dimension 2 is a permutation of 0..D-1");
    end
    for (int t = 0; t < 20; t++) run_dim(rand_desc(SB), pts);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
