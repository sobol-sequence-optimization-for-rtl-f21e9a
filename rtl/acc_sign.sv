// acc_sign: bundles the n-gram hypervectors of a text into its text
// hypervector by a per-dimension majority vote.
//
// How it works. Every dimension has a CNT_W-bit counter that adds the
// n-gram's bit (the population count of logic-1s, the binary form of adding
// +1s and -1s), and one more counter counts the n-grams. On `finalize` every
// dimension is thresholded at half the n-gram count: bit d of the text
// hypervector is 1 (+1) when 2*cnt[d] > count, else 0 (-1). A tie, an equal
// number of +1s and -1s, gives -1.
//
// Interface and timing. clr zeroes all counters (start of a text) and takes
// priority. in_valid/in_hv add one n-gram per cycle. finalize uses the
// counts as they stand in that cycle (an n-gram presented in the same cycle
// is not included) and gives out_valid/out_hv one cycle later; out_hv then
// holds until the next finalize. out_count reports the number of n-grams.
// The counters wrap after 2^CNT_W - 1 n-grams, which bounds the text length.
//
// Accumulating by population count and thresholding at half the count
// follows the classifier's hardware description; the counter width and the
// tie rule are this design's choices.
module acc_sign
  import hdc_pkg::*;
#(
  parameter int unsigned D     = HV_D,
  parameter int unsigned CNT_W = CNT_W_DEF
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clr,
  input  logic              in_valid,
  input  logic [D-1:0]      in_hv,
  input  logic              finalize,
  output logic              out_valid,
  output logic [D-1:0]      out_hv,
  output logic [CNT_W-1:0]  out_count
);

  logic [CNT_W-1:0] total_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      total_q   <= '0;
      out_valid <= 1'b0;
      out_count <= '0;
    end else begin
      if (clr)           total_q <= '0;
      else if (in_valid) total_q <= total_q + 1'b1;
      out_valid <= finalize;
      if (finalize) out_count <= total_q;
    end
  end

  // one counter and one majority comparator per dimension
  for (genvar d = 0; d < int'(D); d++) begin : g_dim
    logic [CNT_W-1:0] cnt_q;

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)        cnt_q <= '0;
      else if (clr)      cnt_q <= '0;
      else if (in_valid) cnt_q <= cnt_q + CNT_W'(in_hv[d]);
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)        out_hv[d] <= 1'b0;
      else if (finalize) out_hv[d] <= ({cnt_q, 1'b0} > {1'b0, total_q});
    end
  end

endmodule
