// tb_sobol_hv_encoder: loads K random Sobol descriptors (the first two being
// the reference dimensions 1 and 2), runs a full alphabet generation and a
// re-threshold with a second T, captures the item memory writes and compares
// every letter hypervector bit with the threshold rule applied to the model
// of the Sobol points. Also checks the command's cycle counts.
module tb_sobol_hv_encoder;
  import hdc_pkg::*;
  import hdc_tb_pkg::*;

  localparam int unsigned D = 256, SB = 8, LANES = 16, K = 28, ROWS = D / LANES;
  localparam int unsigned SYM_W = $clog2(K), ROW_W = $clog2(ROWS);

  logic clk = 0, rst_n = 0;
  logic desc_we = 0;
  logic [SYM_W-1:0] desc_sel = '0;
  sobol_desc_t desc_in = '0;
  logic [SB:0] t_code = '0;
  logic cmd_start = 0, cmd_fill = 0, busy, done, im_we;
  logic [SYM_W-1:0] im_sym;
  logic [ROW_W-1:0] im_row;
  logic [LANES-1:0] im_bits;
  int checks = 0, failures = 0;

  sobol_desc_t descs [K];
  logic [D-1:0] got [K];
  int writes;

  always #5 clk = ~clk;
  sobol_hv_encoder #(.D(D), .SB(SB), .LANES(LANES), .K(K)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) if (rst_n && im_we) begin
    got[im_sym][im_row * LANES +: LANES] <= im_bits;
    writes <= writes + 1;
  end

  task automatic run(bit fill, int unsigned tc, int expect_cycles);
    int cyc;
    t_code = (SB+1)'(tc);
    writes = 0;
    @(negedge clk) begin cmd_start = 1; cmd_fill = fill; end
    @(negedge clk) cmd_start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    check(cyc == expect_cycles, $sformatf("command took %0d cycles, expected %0d", cyc, expect_cycles));
    check(writes == int'(K * ROWS), $sformatf("%0d item memory writes", writes));
    for (int k = 0; k < int'(K); k++) begin
      int ones = 0;
      for (int i = 0; i < int'(D); i++) begin
        bit e;
        e = ref_hv_bit(ref_sobol_point(descs[k], i, SB), tc);
        ones += e;
        check(got[k][i] == e, $sformatf("symbol %0d bit %0d", k, i));
      end
      // a Sobol dimension over 2^SB points hits every code once, so exactly
      // t_code of the D bits are +1
      check(ones == int'(tc), "fraction of +1s equals T");
    end
  endtask

  initial begin
    descs[0] = vdc_desc(SB);
    descs[1] = dim2_desc();
    for (int k = 2; k < int'(K); k++) descs[k] = rand_desc(SB);
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < int'(K); k++) begin
      @(negedge clk) begin desc_we = 1; desc_sel = SYM_W'(k); desc_in = descs[k]; end
    end
    @(negedge clk) desc_we = 0;
    // T = 0.38 -> ceil(0.38 * 256) = 98; full fill then encode
    run(1, 98, K * (ROWS + 2) + K * ROWS + 2);
    // new T = 0.70 -> ceil(179.2) = 180; re-threshold only
    run(0, 180, K * ROWS + 2);
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
