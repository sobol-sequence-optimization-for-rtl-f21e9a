// tb_item_memory: fills the letter hypervector store slice by slice with
// random data, then checks whole-vector reads (port A) and slice reads
// (ports B and C) against a shadow copy, including the read latency.
module tb_item_memory;
  localparam int unsigned D = 256, LANES = 16, K = 28, ROWS = D / LANES;
  localparam int unsigned SYM_W = $clog2(K), ROW_W = $clog2(ROWS);

  logic clk = 0, rst_n = 0;
  logic wr_en = 0, a_en = 0, bc_en = 0, a_valid, bc_valid;
  logic [SYM_W-1:0] wr_sym = '0, a_sym = '0, b_sym = '0, c_sym = '0;
  logic [ROW_W-1:0] wr_row = '0, bc_row = '0;
  logic [LANES-1:0] wr_bits = '0, b_bits, c_bits;
  logic [D-1:0] a_hv;
  logic [D-1:0] shadow [K];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  item_memory #(.D(D), .LANES(LANES), .K(K)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < int'(K); k++)
      for (int r = 0; r < int'(ROWS); r++) begin
        wr_en = 1; wr_sym = SYM_W'(k); wr_row = ROW_W'(r); wr_bits = LANES'($urandom);
        shadow[k][r * LANES +: LANES] = wr_bits;
        @(negedge clk);
      end
    wr_en = 0;
    for (int t = 0; t < 300; t++) begin
      int k = $urandom % K, x = $urandom % K, y = $urandom % K, r = $urandom % ROWS;
      a_en = 1; a_sym = SYM_W'(k);
      bc_en = 1; b_sym = SYM_W'(x); c_sym = SYM_W'(y); bc_row = ROW_W'(r);
      @(negedge clk);
      a_en = 0; bc_en = 0;
      check(a_valid && bc_valid, "valid one cycle after the request");
      check(a_hv == shadow[k], "port A hypervector");
      check(b_bits == shadow[x][r * LANES +: LANES], "port B slice");
      check(c_bits == shadow[y][r * LANES +: LANES], "port C slice");
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
