// scc_unit: stochastic cross-correlation (SCC) of two hypervectors, the
// measure used to rate how independent two Sobol-based hypervectors are.
//
// With a = #(+1,+1), b = #(+1,-1), c = #(-1,+1), d = #(-1,-1) over the
// n = a+b+c+d dimensions,
//   SCC = (ad - bc) / (n*min(a+b, a+c) - (a+b)(a+c))   if ad > bc
//   SCC = (ad - bc) / ((a+b)(a+c) - n*max(a-d, 0))     otherwise.
// SCC lies in [-1, +1]; 0 means uncorrelated. When ad = bc the result is 0
// (the second denominator can then be 0 as well).
//
// How it works. Both hypervectors are streamed in LANES-bit slices; per
// cycle the unit adds the slice's counts of the four bit pairs. After the
// slice flagged `last`, one cycle forms the numerator and denominator with
// multipliers, and a restoring divider produces |SCC| bit by bit, one
// quotient bit per cycle, FRAC + 1 cycles in all.
//
// Interface and timing. in_valid/x_bits/y_bits/in_last stream one slice per
// cycle; a new stream starts after `done`. done pulses FRAC + 3 cycles after
// the last slice with scc_q = SCC * 2^FRAC, truncated toward zero, as a
// signed number (+1.0 = 2^FRAC), and the four counts.
//
// The formula is the SCC definition used for the hypervector selection; the
// streaming counters, the fixed-point format and the divider are this
// design's choices.
module scc_unit
  import hdc_pkg::*;
#(
  parameter int unsigned D     = HV_D,
  parameter int unsigned LANES = LANES_DEF,
  parameter int unsigned FRAC  = 16,
  localparam int unsigned CW   = $clog2(D + 1),
  localparam int unsigned PW   = 2 * CW + 2
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic                    in_last,
  input  logic [LANES-1:0]        x_bits,
  input  logic [LANES-1:0]        y_bits,
  output logic                    done,
  output logic signed [FRAC+1:0]  scc_q,
  output logic [CW-1:0]           cnt_a,
  output logic [CW-1:0]           cnt_b,
  output logic [CW-1:0]           cnt_c,
  output logic [CW-1:0]           cnt_d
);

  typedef enum logic [1:0] {S_COUNT, S_PREP, S_DIV} state_e;

  state_e                  state;
  logic [CW-1:0]           a_q, b_q, c_q, d_q;
  logic [PW-1:0]           den_q, rem_q;   // denominator, remainder
  logic                    neg_q;
  logic [FRAC-1:0]         quo_q;
  logic [$clog2(FRAC+2)-1:0] step_q;

  // slice counts
  logic [CW-1:0] sa, sb, sc, sd;
  always_comb begin
    sa = '0; sb = '0; sc = '0; sd = '0;
    for (int l = 0; l < int'(LANES); l++) begin
      logic xb, yb;
      xb = x_bits[l];
      yb = y_bits[l];
      unique case ({xb, yb})
        2'b11:   sa += 1'b1;
        2'b10:   sb += 1'b1;
        2'b01:   sc += 1'b1;
        default: sd += 1'b1;
      endcase
    end
  end

  // numerator and denominator
  logic [PW-1:0] ad, bc, apb, apc, n, mn, prod, num_abs, den;
  logic          pos;
  always_comb begin
    ad   = PW'(a_q) * PW'(d_q);
    bc   = PW'(b_q) * PW'(c_q);
    apb  = PW'(a_q) + PW'(b_q);
    apc  = PW'(a_q) + PW'(c_q);
    n    = PW'(a_q) + PW'(b_q) + PW'(c_q) + PW'(d_q);
    prod = apb * apc;
    pos  = (ad > bc);
    if (pos) begin
      mn      = (apb < apc) ? apb : apc;
      num_abs = ad - bc;
      den     = n * mn - prod;
    end else begin
      mn      = (a_q > d_q) ? PW'(a_q) - PW'(d_q) : '0;
      num_abs = bc - ad;
      den     = prod - n * mn;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_COUNT;
      a_q    <= '0; b_q <= '0; c_q <= '0; d_q <= '0;
      den_q  <= '0; rem_q <= '0;
      neg_q  <= 1'b0;
      quo_q  <= '0;
      step_q <= '0;
      done   <= 1'b0;
      scc_q  <= '0;
      cnt_a  <= '0; cnt_b <= '0; cnt_c <= '0; cnt_d <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_COUNT: if (in_valid) begin
          a_q <= a_q + sa;
          b_q <= b_q + sb;
          c_q <= c_q + sc;
          d_q <= d_q + sd;
          if (in_last) state <= S_PREP;
        end
        S_PREP: begin
          den_q  <= den;
          rem_q  <= num_abs;
          neg_q  <= !pos && (num_abs != '0);
          quo_q  <= '0;
          step_q <= '0;
          state  <= S_DIV;
        end
        S_DIV: begin
          // restoring division of |num| * 2^FRAC by den, MSB (2^0) first
          logic [PW-1:0] r;
          r = (step_q == '0) ? rem_q : {rem_q[PW-2:0], 1'b0};
          if (den_q != '0 && r >= den_q) begin
            quo_q <= {quo_q[FRAC-2:0], 1'b1};
            rem_q <= r - den_q;
          end else begin
            quo_q <= {quo_q[FRAC-2:0], 1'b0};
            rem_q <= r;
          end
          step_q <= step_q + 1'b1;
          if (int'(step_q) == int'(FRAC)) begin
            logic [FRAC:0] q;
            q = {quo_q[FRAC-1:0], (den_q != '0 && r >= den_q)};
            scc_q <= neg_q ? -$signed({1'b0, q}) : $signed({1'b0, q});
            cnt_a <= a_q; cnt_b <= b_q; cnt_c <= c_q; cnt_d <= d_q;
            a_q <= '0; b_q <= '0; c_q <= '0; d_q <= '0;
            done  <= 1'b1;
            state <= S_COUNT;
          end
        end
        default: state <= S_COUNT;
      endcase
    end
  end

endmodule
