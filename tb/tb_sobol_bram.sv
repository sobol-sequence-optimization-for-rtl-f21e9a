// tb_sobol_bram: writes random words to random addresses of the Sobol block
// RAM, keeps a shadow copy, and reads every address back, checking data and
// the one-cycle read latency.
module tb_sobol_bram;
  localparam int unsigned D = 256, SB = 8, LANES = 16, K = 28;
  localparam int unsigned WORDS = K * D / LANES, AW = $clog2(WORDS), DW = LANES * SB;

  logic clk = 0, rst_n = 0, we = 0, re = 0, rvalid;
  logic [AW-1:0] waddr = '0, raddr = '0;
  logic [DW-1:0] wdata = '0, rdata;
  int checks = 0, failures = 0;
  logic [DW-1:0] shadow [WORDS];

  always #5 clk = ~clk;
  sobol_bram #(.D(D), .SB(SB), .LANES(LANES), .K(K)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int a = 0; a < int'(WORDS); a++) begin
      we = 1; waddr = AW'(a);
      for (int w = 0; w < int'(DW); w += 32) wdata[w +: 32] = $urandom;
      shadow[a] = wdata;
      @(negedge clk);
    end
    for (int t = 0; t < 500; t++) begin
      int a = $urandom % WORDS;
      waddr = AW'(a);
      for (int w = 0; w < int'(DW); w += 32) wdata[w +: 32] = $urandom;
      shadow[a] = wdata;
      @(negedge clk);
    end
    we = 0;
    for (int a = 0; a < int'(WORDS); a++) begin
      re = 1; raddr = AW'(a);
      @(negedge clk);
      re = 0;
      check(rvalid, "rvalid one cycle after re");
      check(rdata == shadow[a], $sformatf("word %0d", a));
      @(negedge clk);
      check(!rvalid, "rvalid is a single pulse");
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
