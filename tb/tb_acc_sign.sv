// tb_acc_sign: feeds random n-gram hypervectors, keeps per-dimension counts
// in the testbench and checks the majority vote (2*count > total gives +1,
// a tie gives -1), the n-gram count, clearing between texts and the
// one-cycle finalize latency.
module tb_acc_sign;
  localparam int unsigned D = 64, CNT_W = 10;

  logic clk = 0, rst_n = 0, clr = 0, in_valid = 0, finalize = 0, out_valid;
  logic [D-1:0] in_hv = '0, out_hv;
  logic [CNT_W-1:0] out_count;
  int cnt [D];
  int total;
  int checks = 0, failures = 0, ties = 0;

  always #5 clk = ~clk;
  acc_sign #(.D(D), .CNT_W(CNT_W)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  task automatic text(int len);
    @(negedge clk) clr = 1;
    @(negedge clk) clr = 0;
    foreach (cnt[d]) cnt[d] = 0;
    total = 0;
    for (int t = 0; t < len; t++) begin
      in_valid = 1;
      in_hv = {$urandom, $urandom};
      total++;
      for (int d = 0; d < int'(D); d++) cnt[d] += in_hv[d];
      @(negedge clk);
    end
    in_valid = 0;
    finalize = 1;
    @(negedge clk) finalize = 0;
    check(out_valid, "text hypervector one cycle after finalize");
    check(int'(out_count) == total, "n-gram count");
    for (int d = 0; d < int'(D); d++) begin
      if (2 * cnt[d] == total) ties++;
      check(out_hv[d] == (2 * cnt[d] > total), $sformatf("dimension %0d", d));
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 40; i++) text(1 + $urandom % 60);
    text(0);
    check(out_hv == '0, "empty text gives all -1");
    check(ties > 0, "ties exercised");
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
