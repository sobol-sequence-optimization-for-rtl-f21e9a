// assoc_search: the associative memory of the classifier. It stores one
// hypervector per class (language) and finds the class closest to a query.
//
// How it works. Training writes a text hypervector into the class slot
// given by train_class (a class is trained from one, arbitrarily long, text;
// writing again replaces it). A query is latched on query_start and compared
// with one class per cycle: the Hamming distance, the population count of
// query XOR class, is computed over all D bits at once. For bipolar vectors
// the cosine similarity is (D - 2*Hamming) / D, so the class of smallest
// distance is the class of largest cosine similarity; ties go to the lower
// class index.
//
// Interface and timing. query_start is taken while busy = 0; the answer
// (result_valid pulse, result_class, result_dist) appears C + 1 cycles
// later. train_we writes in one cycle and may be used whenever busy = 0.
//
// Searching for the most similar class hypervector, with cosine similarity
// as the measure, follows the classifier's search stage; evaluating it as a
// Hamming distance, one class per cycle, is this design's choice.
module assoc_search
  import hdc_pkg::*;
#(
  parameter int unsigned D = HV_D,
  parameter int unsigned C = NUM_CLASSES,
  localparam int unsigned CLS_W  = $clog2(C),
  localparam int unsigned DIST_W = $clog2(D + 1)
) (
  input  logic               clk,
  input  logic               rst_n,
  // training
  input  logic               train_we,
  input  logic [CLS_W-1:0]   train_class,
  input  logic [D-1:0]       train_hv,
  // inference
  input  logic               query_start,
  input  logic [D-1:0]       query_hv,
  output logic               busy,
  output logic               result_valid,
  output logic [CLS_W-1:0]   result_class,
  output logic [DIST_W-1:0]  result_dist
);

  logic [D-1:0]       class_mem [C];
  logic [D-1:0]       q_q;
  logic [CLS_W-1:0]   c_q;
  logic [CLS_W-1:0]   best_c_q;
  logic [DIST_W-1:0]  best_d_q;
  logic [DIST_W-1:0]  hdist;

  always_ff @(posedge clk) begin
    if (train_we) class_mem[train_class] <= train_hv;
  end

  // Hamming distance: popcount of 64-bit chunks, then the sum of the chunks
  localparam int unsigned CH     = (D >= 64) ? 64 : D;
  localparam int unsigned NCH    = (D + CH - 1) / CH;
  localparam int unsigned CH_W   = $clog2(CH + 1);
  logic [D-1:0]                  x_diff;
  logic [NCH-1:0][CH_W-1:0]      ch_cnt;

  assign x_diff = q_q ^ class_mem[c_q];

  for (genvar g = 0; g < int'(NCH); g++) begin : g_chunk
    always_comb begin
      ch_cnt[g] = '0;
      for (int b = 0; b < int'(CH); b++)
        if (g * CH + b < D) ch_cnt[g] += CH_W'(x_diff[g * CH + b]);
    end
  end

  always_comb begin
    hdist = '0;
    for (int g = 0; g < int'(NCH); g++) hdist += DIST_W'(ch_cnt[g]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy         <= 1'b0;
      q_q          <= '0;
      c_q          <= '0;
      best_c_q     <= '0;
      best_d_q     <= '0;
      result_valid <= 1'b0;
      result_class <= '0;
      result_dist  <= '0;
    end else begin
      result_valid <= 1'b0;
      if (!busy) begin
        if (query_start) begin
          busy <= 1'b1;
          q_q  <= query_hv;
          c_q  <= '0;
        end
      end else begin
        if (c_q == '0 || hdist < best_d_q) begin
          best_c_q <= c_q;
          best_d_q <= hdist;
        end
        if (int'(c_q) == int'(C) - 1) begin
          busy         <= 1'b0;
          result_valid <= 1'b1;
          if (c_q == '0 || hdist < best_d_q) begin
            result_class <= c_q;
            result_dist  <= hdist;
          end else begin
            result_class <= best_c_q;
            result_dist  <= best_d_q;
          end
        end else begin
          c_q <= c_q + 1'b1;
        end
      end
    end
  end

endmodule
