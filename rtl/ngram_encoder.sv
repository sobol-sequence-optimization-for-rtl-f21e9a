// ngram_encoder: binds the last N letter hypervectors into one n-gram
// hypervector,  G = L1 ^ pi(L2) ^ pi^2(L3) ^ ... ^ pi^(N-1)(LN),
// where L1 is the newest letter, LN the oldest, ^ is the bitwise XOR
// (multiplication of bipolar vectors) and pi a rotation by one position.
//
// How it works. N registers R[0..N-1] form a chain. When a letter arrives,
// R[0] takes it unrotated and every R[j] takes pi(R[j-1]), so R[j] always
// holds the letter of j steps ago rotated j times. The n-gram is the XOR of
// the new register contents. pi moves bit i to bit i+1 and bit D-1 to bit 0.
// A counter of letters seen since `clr` suppresses output until N letters
// have arrived, so the first n-gram of a text is formed by its first N
// letters.
//
// Interface and timing. in_valid/in_hv present one letter hypervector per
// cycle at most; out_valid/out_hv follow one cycle later. clr (start of a
// new text) empties the history; it takes priority over in_valid.
//
// The rotate-and-XOR n-gram construction is the encoder of the classifier;
// the direction of the rotation and the register chain organisation are
// this design's choices.
module ngram_encoder
  import hdc_pkg::*;
#(
  parameter int unsigned D = HV_D,
  parameter int unsigned N = NGRAM_N,
  localparam int unsigned FILL_W = $clog2(N + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clr,
  input  logic          in_valid,
  input  logic [D-1:0]  in_hv,
  output logic          out_valid,
  output logic [D-1:0]  out_hv
);

  function automatic logic [D-1:0] rot1(input logic [D-1:0] x);
    return {x[D-2:0], x[D-1]};
  endfunction

  logic [D-1:0]      r_q [N];
  logic [D-1:0]      r_n [N];
  logic [D-1:0]      g_n;
  logic [FILL_W-1:0] fill_q;

  always_comb begin
    r_n[0] = in_hv;
    for (int j = 1; j < int'(N); j++) r_n[j] = rot1(r_q[j-1]);
    g_n = '0;
    for (int j = 0; j < int'(N); j++) g_n ^= r_n[j];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fill_q    <= '0;
      out_valid <= 1'b0;
      out_hv    <= '0;
      for (int j = 0; j < int'(N); j++) r_q[j] <= '0;
    end else if (clr) begin
      fill_q    <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      if (in_valid) begin
        for (int j = 0; j < int'(N); j++) r_q[j] <= r_n[j];
        if (int'(fill_q) < int'(N)) fill_q <= fill_q + 1'b1;
        if (int'(fill_q) >= int'(N) - 1) begin
          out_valid <= 1'b1;
          out_hv    <= g_n;
        end
      end
    end
  end

endmodule
