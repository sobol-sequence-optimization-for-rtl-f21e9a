// threshold_compare: turns LANES Sobol numbers into LANES hypervector bits.
//
// Each lane compares its Sobol number x (an SB-bit fraction) with the
// threshold T: when T <= x the dimension becomes -1, stored as logic-0,
// otherwise +1, stored as logic-1. With T held as t_code = ceil(T * 2^SB)
// the test is the integer comparison x >= t_code. A lower T therefore
// gives fewer +1s: about a fraction T of the dimensions are +1.
//
// Purely combinational; the enclosing module registers the result.
// The comparison rule is the hypervector generation rule of the design;
// the fixed-point coding of T is this implementation's choice.
module threshold_compare
  import hdc_pkg::*;
#(
  parameter int unsigned SB    = SB_DEF,
  parameter int unsigned LANES = LANES_DEF
) (
  input  logic [LANES-1:0][SB-1:0] sobol,
  input  logic [SB:0]              t_code,   // ceil(T * 2^SB), 0 .. 2^SB
  output logic [LANES-1:0]         hv_bits
);

  always_comb begin
    for (int l = 0; l < int'(LANES); l++)
      hv_bits[l] = ({1'b0, sobol[l]} < t_code);   // T > x  ->  +1
  end

endmodule
