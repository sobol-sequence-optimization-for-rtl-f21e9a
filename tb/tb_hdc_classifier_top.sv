// tb_hdc_classifier_top: end-to-end test of the Sobol-based HDC language
// classifier at its default size (D = 8192, 28 symbols, 4-grams, 21 classes,
// 64 lanes). It
//   * loads 28 descriptors (Sobol dimensions 1 and 2, then random valid
//     ones), generates the alphabet at T = 0.38 and checks, through the SCC
//     probe, letter hypervectors against a model built from the Sobol
//     recurrence and the threshold rule;
//   * trains 21 classes, each from a text drawn from its own letter
//     distribution, and classifies query texts, comparing class and
//     distance with a model of n-gram encoding, majority vote and Hamming
//     search written in the testbench;
//   * re-thresholds at T = 0.70 without regenerating and classifies again;
//   * checks the cycle counts of generation, finishing a text and the probe,
//     and counts that every mechanism (generation with fill, re-threshold
//     only, input stall, n-gram warm-up, training, inference, SCC probe,
//     majority tie) happened at least once.
module tb_hdc_classifier_top;
  import hdc_pkg::*;
  import hdc_tb_pkg::*;

  localparam int unsigned D = HV_D, SB = $clog2(D), LANES = LANES_DEF;
  localparam int unsigned K = NUM_SYMBOLS, N = NGRAM_N, C = NUM_CLASSES;
  localparam int unsigned ROWS = D / LANES, FRAC = 16;
  localparam int unsigned SYM_W = $clog2(K), CLS_W = $clog2(C);
  localparam int unsigned DIST_W = $clog2(D + 1), CW = $clog2(D + 1);
  localparam int unsigned CNT_W = CNT_W_DEF;

  logic clk = 0, rst_n = 0;
  logic desc_we = 0;
  logic [SYM_W-1:0] desc_sel = '0;
  sobol_desc_t desc_in = '0;
  logic [SB:0] t_code = '0;
  logic gen_start = 0, gen_fill = 0, gen_busy, gen_done;
  logic text_start = 0, char_valid = 0, text_end = 0, char_ready;
  text_mode_e text_mode = MODE_INFER;
  logic [CLS_W-1:0] text_class = '0;
  logic [7:0] char_data = '0;
  logic train_done, result_valid;
  logic [CLS_W-1:0] result_class;
  logic [DIST_W-1:0] result_dist;
  logic [CNT_W-1:0] text_ngrams;
  logic scc_start = 0, scc_busy, scc_done;
  logic [SYM_W-1:0] scc_x_sym = '0, scc_y_sym = '0;
  logic signed [FRAC+1:0] scc_value;
  logic [CW-1:0] scc_a, scc_b, scc_c, scc_d;

  always #5 clk = ~clk;

  hdc_classifier_top dut (.*);

  int checks = 0, failures = 0;
  int n_fill = 0, n_rethresh = 0, n_stall = 0, n_warmup = 0;
  int n_train = 0, n_infer = 0, n_scc = 0, n_tie = 0, n_correct = 0;

  sobol_desc_t  descs [K];
  logic [D-1:0] letter [K];     // model letter hypervectors
  logic [D-1:0] cls_hv [C];     // model class hypervectors
  string        alpha [C];      // per-class preferred letters

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL: %s", what); end
  endtask

  function automatic int sym_of(byte ch);
    if (ch >= "a" && ch <= "z") return ch - "a";
    if (ch >= "A" && ch <= "Z") return ch - "A";
    if (ch == " ") return 26;
    return 27;
  endfunction

  function automatic void build_letters(int unsigned tc);
    for (int k = 0; k < int'(K); k++)
      for (int i = 0; i < int'(D); i++)
        letter[k][i] = ref_hv_bit(ref_sobol_point(descs[k], i, SB), tc);
  endfunction

  // Model text hypervector: n-grams G = L1 ^ pi(L2) ^ ... (L1 newest,
  // pi moves bit i to i+1), majority 2*cnt > total.
  function automatic logic [D-1:0] model_text(string s, output int ties, output int ngrams);
    int cnt [D];
    logic [D-1:0] g, r, hv;
    foreach (cnt[d]) cnt[d] = 0;
    ngrams = 0;
    for (int t = int'(N) - 1; t < s.len(); t++) begin
      g = '0;
      for (int j = 0; j < int'(N); j++) begin
        r = letter[sym_of(s[t - j])];
        repeat (j) r = {r[D-2:0], r[D-1]};
        g ^= r;
      end
      for (int d = 0; d < int'(D); d++) cnt[d] += g[d];
      ngrams++;
    end
    ties = 0;
    for (int d = 0; d < int'(D); d++) begin
      hv[d] = (2 * cnt[d] > ngrams);
      if (ngrams > 0 && 2 * cnt[d] == ngrams) ties++;
    end
    return hv;
  endfunction

  function automatic string make_text(int c, int len);
    string s = "";
    for (int i = 0; i < len; i++) begin
      int u = $urandom % 100;
      byte ch;
      if (u < 15)      ch = " ";
      else if (u < 85) ch = alpha[c][$urandom % alpha[c].len()];
      else if (u < 98) ch = byte'("a" + $urandom % 26);
      else             ch = ".";
      s = {s, string'(ch)};
    end
    return s;
  endfunction

  task automatic gen_alphabet(bit fill, int unsigned tc);
    int cyc;
    t_code = (SB+1)'(tc);
    @(negedge clk) begin gen_start = 1; gen_fill = fill; end
    @(negedge clk) gen_start = 0;
    cyc = 1;
    while (!gen_done) begin @(negedge clk); cyc++; end
    if (fill) begin
      n_fill++;
      check(cyc == int'(K * (ROWS + 2) + K * ROWS + 2), $sformatf("generation took %0d cycles", cyc));
    end else begin
      n_rethresh++;
      check(cyc == int'(K * ROWS + 2), $sformatf("re-threshold took %0d cycles", cyc));
    end
    build_letters(tc);
  endtask

  task automatic probe(int x, int y);
    int a = 0, b = 0, c = 0, d = 0, cyc;
    for (int i = 0; i < int'(D); i++) begin
      a += letter[x][i] & letter[y][i];   b += letter[x][i] & !letter[y][i];
      c += !letter[x][i] & letter[y][i];  d += !letter[x][i] & !letter[y][i];
    end
    @(negedge clk) begin scc_start = 1; scc_x_sym = SYM_W'(x); scc_y_sym = SYM_W'(y); end
    @(negedge clk) scc_start = 0;
    cyc = 1;
    while (!scc_done) begin @(negedge clk); cyc++; end
    n_scc++;
    check(cyc == int'(ROWS + FRAC + 4), $sformatf("probe took %0d cycles", cyc));
    check(int'(scc_a) == a && int'(scc_b) == b && int'(scc_c) == c && int'(scc_d) == d,
          $sformatf("letter pair %0d,%0d counts", x, y));
    check(longint'(scc_value) == ref_scc(a, b, c, d, FRAC),
          $sformatf("letter pair %0d,%0d SCC %0d, model %0d", x, y, scc_value, ref_scc(a, b, c, d, FRAC)));
  endtask

  // Send one text; returns after train_done or result_valid.
  task automatic run_text(string s, text_mode_e mode, int cls);
    int ties, ngrams, cyc;
    logic [D-1:0] model;
    model = model_text(s, ties, ngrams);
    if (ties > 0) n_tie++;
    // start
    @(negedge clk);
    while (!char_ready) begin @(negedge clk); end
    text_start = 1; text_mode = mode; text_class = CLS_W'(cls);
    @(negedge clk) text_start = 0;
    for (int i = 0; i < s.len(); i++) begin
      char_valid = 1; char_data = s[i];
      while (!char_ready) begin n_stall++; @(negedge clk); end
      @(negedge clk);
      if (i == int'(N) - 2) n_warmup++;
    end
    char_valid = 0;
    text_end = 1;
    @(negedge clk) text_end = 0;
    cyc = 1;
    // offer the next text's first character while the text is finished
    char_valid = 1; char_data = "x";
    while (!(train_done || result_valid)) begin
      if (!char_ready) n_stall++;
      @(negedge clk); cyc++;
    end
    char_valid = 0;
    check(int'(text_ngrams) == ngrams, "n-gram count");
    if (mode == MODE_TRAIN) begin
      n_train++;
      cls_hv[cls] = model;
      check(cyc == 5, $sformatf("training finish took %0d cycles", cyc));
    end else begin
      int best = 0, bestd = D + 1;
      for (int c = 0; c < int'(C); c++) begin
        int h = $countones(model ^ cls_hv[c]);
        if (h < bestd) begin bestd = h; best = c; end
      end
      n_infer++;
      check(cyc == int'(C) + 5, $sformatf("inference finish took %0d cycles", cyc));
      check(int'(result_class) == best, $sformatf("class %0d, model %0d", result_class, best));
      check(int'(result_dist) == bestd, $sformatf("distance %0d, model %0d", result_dist, bestd));
      if (int'(result_class) == cls) n_correct++;
    end
  endtask

  initial begin
    // classes: each prefers its own 7 letters
    for (int c = 0; c < int'(C); c++) begin
      alpha[c] = "";
      for (int i = 0; i < 7; i++) alpha[c] = {alpha[c], string'(byte'("a" + ($urandom % 26)))};
    end
    descs[0] = vdc_desc(SB);
    descs[1] = dim2_desc();
    for (int k = 2; k < int'(K); k++) descs[k] = rand_desc(SB);
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < int'(K); k++) begin
      @(negedge clk) begin desc_we = 1; desc_sel = SYM_W'(k); desc_in = descs[k]; end
    end
    @(negedge clk) desc_we = 0;

    // T = 0.38: ceil(0.38 * 8192) = 3113
    gen_alphabet(1, T_CODE_DEF);
    probe(0, 1); probe(4, 9); probe(7, 7);
    for (int c = 0; c < int'(C); c++) run_text(make_text(c, 403), MODE_TRAIN, c);
    for (int t = 0; t < 6; t++) begin
      int c = $urandom % C;
      run_text(make_text(c, 123), MODE_INFER, c);
    end
    // T = 0.70: ceil(0.70 * 8192) = ceil(5734.4) = 5735, stored numbers reused
    gen_alphabet(0, 5735);
    probe(2, 3);
    for (int c = 0; c < int'(C); c++) run_text(make_text(c, 323), MODE_TRAIN, c);
    for (int t = 0; t < 4; t++) begin
      int c = $urandom % C;
      run_text(make_text(c, 123), MODE_INFER, c);
    end

    $display("mechanisms: fill=%0d rethreshold=%0d stall=%0d warmup=%0d train=%0d infer=%0d scc=%0d tie=%0d correct=%0d/%0d",
             n_fill, n_rethresh, n_stall, n_warmup, n_train, n_infer, n_scc, n_tie, n_correct, n_infer);
    check(n_fill > 0, "generation with fill happened");
    check(n_rethresh > 0, "re-threshold happened");
    check(n_stall > 0, "input stall happened");
    check(n_warmup > 0, "n-gram warm-up happened");
    check(n_train > 0, "training happened");
    check(n_infer > 0, "inference happened");
    check(n_scc > 0, "SCC probe happened");
    check(n_tie > 0, "majority tie happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
