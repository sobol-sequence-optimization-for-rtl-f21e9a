// tb_threshold_compare: the comparator array against the worked example of
// the first Sobol dimension at T = 0.5 (+1 -1 +1 -1 +1 -1 +1 -1) and against
// the rule "T <= x gives -1" for random numbers and thresholds.
module tb_threshold_compare;
  import hdc_tb_pkg::*;
  localparam int unsigned SB = 13, LANES = 64;

  logic clk = 0;
  logic [LANES-1:0][SB-1:0] sobol;
  logic [SB:0] t_code;
  logic [LANES-1:0] hv_bits;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  threshold_compare #(.SB(SB), .LANES(LANES)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    // 0, 1/2, 1/4, 3/4, 1/8, 5/8, 3/8, 7/8 against T = 0.5
    int unsigned eighths [8] = '{0, 4, 2, 6, 1, 5, 3, 7};
    bit expect8 [8] = '{1, 0, 1, 0, 1, 0, 1, 0};
    sobol = '0;
    for (int i = 0; i < 8; i++) sobol[i] = SB'(eighths[i] << (SB - 3));
    t_code = (SB+1)'(1 << (SB - 1));
    #1;
    for (int i = 0; i < 8; i++) check(hv_bits[i] == expect8[i], $sformatf("T=0.5 example bit %0d", i));
    // T = 0.38 at SB = 13 is code 3113: 3112 -> +1, 3113 -> -1
    t_code = 3113; sobol[0] = 3112; sobol[1] = 3113; sobol[2] = 8191; sobol[3] = 0;
    #1;
    check(hv_bits[0] == 1 && hv_bits[1] == 0 && hv_bits[2] == 0 && hv_bits[3] == 1, "T=0.38 edges");
    // T = 0 gives all -1, T = 1 gives all +1
    t_code = 0; #1; check(hv_bits == '0, "T=0 all -1");
    t_code = (SB+1)'(1 << SB); #1; check(hv_bits == '1, "T=1 all +1");
    for (int t = 0; t < 2000; t++) begin
      t_code = (SB+1)'($urandom % ((1 << SB) + 1));
      for (int l = 0; l < int'(LANES); l++) sobol[l] = SB'($urandom);
      #1;
      for (int l = 0; l < int'(LANES); l++)
        check(hv_bits[l] == ref_hv_bit(sobol[l], t_code), "random lane");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
