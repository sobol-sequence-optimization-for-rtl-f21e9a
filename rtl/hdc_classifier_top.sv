// hdc_classifier_top: hyperdimensional (HDC) language classifier whose
// letter hypervectors come from optimised Sobol sequences.
//
// Data flow.
//   1. Alphabet generation. The host loads one Sobol descriptor per symbol
//      and the threshold T, then issues gen_start. The encoding module fills
//      its Sobol block RAM (gen_fill = 1) and thresholds every Sobol number
//      into the item memory, giving the K letter hypervectors. gen_fill = 0
//      re-thresholds the stored numbers only (a new T without regeneration).
//   2. Text encoding. Characters stream in on char_valid/char_data. Each is
//      mapped to a symbol (a-z, space, other), its hypervector is read from
//      the item memory, the n-gram encoder rotates and XORs the last N
//      letters, and the accumulator counts the n-grams' +1s per dimension.
//   3. text_end finishes the text: once the pipeline has drained the
//      accumulator thresholds at half the n-gram count, giving the text
//      hypervector. In MODE_TRAIN it becomes the hypervector of class
//      text_class (train_done pulses); in MODE_INFER the associative search
//      compares it with every class and reports the closest one.
//   4. SCC probe. scc_start measures the stochastic cross-correlation of two
//      letter hypervectors in the item memory, the quality measure by which
//      the Sobol dimensions are selected.
//
// Interface and timing. text_start (clears the n-gram history and the
// counters, latches text_mode and text_class), char_valid and text_end are
// taken only while char_ready = 1; char_ready is low during alphabet
// generation and while a text is being finished or searched. A character
// costs one cycle. From text_end to result_valid takes 5 + C cycles
// (infer), to train_done 5 cycles (train). gen_start and scc_start are taken
// while gen_busy = 0 and, for scc_start, no probe is running; scc_done
// follows D/LANES + FRAC + 4 cycles after scc_start.
//
// The datapath (Sobol block RAM and threshold, letter hypervectors, rotate
// and XOR n-grams, accumulate and sign, similarity search) follows the
// classifier's architecture. The host interfaces, the training by one text
// per class, the symbol mapping and the on-chip SCC probe are this design's
// choices. The Joe-Kuo descriptors of the chosen Sobol dimensions are not
// part of the chip; they arrive through the descriptor port.
//
// Lint note: rst_n is reported as used both asynchronously and
// synchronously. Every flop uses it as an asynchronous reset; the
// synchronous use is only the `disable iff` of the assertions at the end,
// which are not hardware.
module hdc_classifier_top
  import hdc_pkg::*;
#(
  parameter int unsigned D     = HV_D,
  parameter int unsigned SB    = $clog2(D),
  parameter int unsigned LANES = LANES_DEF,
  parameter int unsigned K     = NUM_SYMBOLS,
  parameter int unsigned N     = NGRAM_N,
  parameter int unsigned C     = NUM_CLASSES,
  parameter int unsigned CNT_W = CNT_W_DEF,
  parameter int unsigned FRAC  = 16,
  localparam int unsigned ROWS   = D / LANES,
  localparam int unsigned ROW_W  = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned SYM_W  = $clog2(K),
  localparam int unsigned CLS_W  = $clog2(C),
  localparam int unsigned DIST_W = $clog2(D + 1),
  localparam int unsigned CW     = $clog2(D + 1)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // Sobol descriptor load and threshold
  input  logic                    desc_we,
  input  logic [SYM_W-1:0]        desc_sel,
  input  sobol_desc_t             desc_in,
  input  logic [SB:0]             t_code,
  // alphabet generation
  input  logic                    gen_start,
  input  logic                    gen_fill,
  output logic                    gen_busy,
  output logic                    gen_done,
  // text stream
  input  logic                    text_start,
  input  text_mode_e              text_mode,
  input  logic [CLS_W-1:0]        text_class,
  input  logic                    char_valid,
  input  logic [7:0]              char_data,
  input  logic                    text_end,
  output logic                    char_ready,
  // results
  output logic                    train_done,
  output logic                    result_valid,
  output logic [CLS_W-1:0]        result_class,
  output logic [DIST_W-1:0]       result_dist,
  output logic [CNT_W-1:0]        text_ngrams,
  // SCC probe over two letter hypervectors
  input  logic                    scc_start,
  input  logic [SYM_W-1:0]        scc_x_sym,
  input  logic [SYM_W-1:0]        scc_y_sym,
  output logic                    scc_busy,
  output logic                    scc_done,
  output logic signed [FRAC+1:0]  scc_value,
  output logic [CW-1:0]           scc_a,
  output logic [CW-1:0]           scc_b,
  output logic [CW-1:0]           scc_c,
  output logic [CW-1:0]           scc_d
);

  typedef enum logic [2:0] {
    T_READY, T_GEN, T_DRAIN, T_FINAL, T_WAIT_HV, T_SEARCH
  } top_state_e;

  top_state_e        state;
  logic [2:0]        drain_q;
  text_mode_e        mode_q;
  logic [CLS_W-1:0]  class_q;

  // ---------------------------------------------------------------- encoder
  logic              enc_busy, enc_done, im_we;
  logic [SYM_W-1:0]  im_sym;
  logic [ROW_W-1:0]  im_row;
  logic [LANES-1:0]  im_bits;
  logic              enc_start;

  assign enc_start = (state == T_READY) && gen_start && !scc_busy;

  sobol_hv_encoder #(.D(D), .SB(SB), .LANES(LANES), .K(K)) u_enc (
    .clk, .rst_n,
    .desc_we, .desc_sel, .desc_in, .t_code,
    .cmd_start (enc_start),
    .cmd_fill  (gen_fill),
    .busy      (enc_busy),
    .done      (enc_done),
    .im_we, .im_sym, .im_row, .im_bits
  );

  assign gen_busy = (state == T_GEN);
  assign gen_done = enc_done;

  // ------------------------------------------------------------ item memory
  logic              char_fire, a_valid, bc_en, bc_valid;
  logic [D-1:0]      a_hv;
  logic [LANES-1:0]  b_bits, c_bits;
  logic [ROW_W-1:0]  bc_row;
  logic [SYM_W-1:0]  scc_x_q, scc_y_q;

  assign char_ready = (state == T_READY);
  assign char_fire  = char_ready && char_valid;

  item_memory #(.D(D), .LANES(LANES), .K(K)) u_im (
    .clk, .rst_n,
    .wr_en   (im_we),
    .wr_sym  (im_sym),
    .wr_row  (im_row),
    .wr_bits (im_bits),
    .a_en    (char_fire),
    .a_sym   (SYM_W'(char_to_symbol(char_data))),
    .a_valid (a_valid),
    .a_hv    (a_hv),
    .bc_en   (bc_en),
    .b_sym   (scc_x_q),
    .c_sym   (scc_y_q),
    .bc_row  (bc_row),
    .bc_valid(bc_valid),
    .b_bits  (b_bits),
    .c_bits  (c_bits)
  );

  // ------------------------------------------------------- n-gram and Acc
  logic          txt_clr, ng_valid, hv_valid, finalize;
  logic [D-1:0]  ng_hv, text_hv;

  assign txt_clr = char_ready && text_start;

  ngram_encoder #(.D(D), .N(N)) u_ngram (
    .clk, .rst_n,
    .clr       (txt_clr),
    .in_valid  (a_valid),
    .in_hv     (a_hv),
    .out_valid (ng_valid),
    .out_hv    (ng_hv)
  );

  acc_sign #(.D(D), .CNT_W(CNT_W)) u_acc (
    .clk, .rst_n,
    .clr       (txt_clr),
    .in_valid  (ng_valid),
    .in_hv     (ng_hv),
    .finalize  (finalize),
    .out_valid (hv_valid),
    .out_hv    (text_hv),
    .out_count (text_ngrams)
  );

  // ------------------------------------------------------ search / training
  logic search_busy;

  assign finalize = (state == T_FINAL);

  assoc_search #(.D(D), .C(C)) u_search (
    .clk, .rst_n,
    .train_we     (hv_valid && mode_q == MODE_TRAIN),
    .train_class  (class_q),
    .train_hv     (text_hv),
    .query_start  (hv_valid && mode_q == MODE_INFER),
    .query_hv     (text_hv),
    .busy         (search_busy),
    .result_valid (result_valid),
    .result_class (result_class),
    .result_dist  (result_dist)
  );

  // --------------------------------------------------------------- control
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= T_READY;
      drain_q    <= '0;
      mode_q     <= MODE_INFER;
      class_q    <= '0;
      train_done <= 1'b0;
    end else begin
      train_done <= 1'b0;
      unique case (state)
        T_READY: begin
          if (text_start) begin
            mode_q  <= text_mode;
            class_q <= text_class;
          end
          if (enc_start) begin
            state <= T_GEN;
          end else if (text_end) begin
            // the last character (if any) still needs: item memory read,
            // n-gram register, accumulator update
            drain_q <= 3'd1;
            state   <= T_DRAIN;
          end
        end
        T_GEN: if (enc_done) state <= T_READY;
        T_DRAIN: begin
          if (drain_q == '0) state <= T_FINAL;
          else                drain_q <= drain_q - 1'b1;
        end
        T_FINAL: state <= T_WAIT_HV;
        T_WAIT_HV: begin
          if (mode_q == MODE_TRAIN) begin
            train_done <= 1'b1;
            state      <= T_READY;
          end else begin
            state <= T_SEARCH;
          end
        end
        T_SEARCH: if (result_valid) state <= T_READY;
        default: state <= T_READY;
      endcase
    end
  end

  // -------------------------------------------------------------- SCC probe
  typedef enum logic [1:0] {P_IDLE, P_READ, P_WAIT} probe_state_e;
  probe_state_e pstate;

  assign bc_en    = (pstate == P_READ);
  assign scc_busy = (pstate != P_IDLE);

  scc_unit #(.D(D), .LANES(LANES), .FRAC(FRAC)) u_scc (
    .clk, .rst_n,
    .in_valid (bc_valid),
    .in_last  (bc_valid && pstate == P_WAIT),
    .x_bits   (b_bits),
    .y_bits   (c_bits),
    .done     (scc_done),
    .scc_q    (scc_value),
    .cnt_a    (scc_a),
    .cnt_b    (scc_b),
    .cnt_c    (scc_c),
    .cnt_d    (scc_d)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pstate  <= P_IDLE;
      bc_row  <= '0;
      scc_x_q <= '0;
      scc_y_q <= '0;
    end else begin
      unique case (pstate)
        P_IDLE: if (scc_start && state != T_GEN && !enc_start) begin
          scc_x_q <= scc_x_sym;
          scc_y_q <= scc_y_sym;
          bc_row  <= '0;
          pstate  <= P_READ;
        end
        P_READ: begin
          if (int'(bc_row) == int'(ROWS) - 1) pstate <= P_WAIT;
          else                                bc_row <= bc_row + 1'b1;
        end
        P_WAIT: if (scc_done) pstate <= P_IDLE;
        default: pstate <= P_IDLE;
      endcase
    end
  end

  // ------------------------------------------------------------ assertions
  // the encoding module runs exactly while the top is in its generation state
  assert property (@(posedge clk) disable iff (!rst_n)
                   (state == T_GEN) |-> (enc_busy || enc_done));
  // search and training happen only while a text is being finished
  assert property (@(posedge clk) disable iff (!rst_n)
                   hv_valid |-> (state == T_WAIT_HV));
  // the item memory is never read for text while the alphabet is written
  assert property (@(posedge clk) disable iff (!rst_n)
                   im_we |-> !char_fire);
  // the search is idle whenever new characters are accepted
  assert property (@(posedge clk) disable iff (!rst_n)
                   char_fire |-> !search_busy);

endmodule
