// sobol_generator: emits all D points of one Sobol dimension, LANES points
// per clock cycle.
//
// How it works. On `start` the descriptor of the dimension (degree s,
// polynomial coefficients a, initial direction integers m_1..m_s) is expanded
// into SB direction numbers with the Sobol recurrence
//   m_k = 2 a_1 m_{k-1} ^ 4 a_2 m_{k-2} ^ ... ^ 2^{s-1} a_{s-1} m_{k-s+1}
//         ^ 2^s m_{k-s} ^ m_{k-s}                       (k > s)
// and v_k = m_k / 2^k, held as the SB-bit fraction V_k = m_k << (SB-k).
// The points are then produced in natural order, point i being the XOR of
// the V_k for which bit k-1 of i is set. This is the standard (non-Gray-code)
// ordering: the first dimension gives 0, 1/2, 1/4, 3/4, 1/8, 5/8, 3/8, 7/8
// and the second 0, 1/2, 3/4, 1/4, 5/8, 1/8, 3/8, ... as the reference
// sequences do. Every lane has its own XOR tree, so a row of LANES points
// costs one cycle.
//
// Interface and timing. `start` is sampled when the generator is idle
// (busy = 0). Two cycles later the D/LANES rows follow on consecutive cycles
// with pt_valid = 1, row r carrying points r*LANES + l in lane l (lane 0 in
// the low bits). busy is high from the cycle after start until the last row
// appears on pt_data. A start while busy is ignored.
//
// The recurrence and the point formula are the published definition of
// Sobol sequences; the lane-parallel organisation, the descriptor encoding
// (that of the Joe-Kuo tables) and the handshake are this design's choices.
module sobol_generator
  import hdc_pkg::*;
#(
  parameter int unsigned D     = HV_D,
  parameter int unsigned SB    = $clog2(D),
  parameter int unsigned LANES = LANES_DEF,
  localparam int unsigned ROWS  = D / LANES,
  localparam int unsigned ROW_W = (ROWS > 1) ? $clog2(ROWS) : 1
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       start,
  input  sobol_desc_t                desc,
  output logic                       busy,
  output logic                       pt_valid,
  output logic [ROW_W-1:0]           pt_row,
  output logic [LANES-1:0][SB-1:0]   pt_data
);

  // Direction numbers V_1..V_SB (index k-1) of a descriptor.
  function automatic logic [SB-1:0][SB-1:0] direction_numbers(input sobol_desc_t d);
    logic [SB-1:0][SB-1:0] mk;   // m_1..m_SB, index k-1
    logic [SB-1:0][SB-1:0] vk;
    int unsigned s;
    s = int'(d.s);
    if (s == 0) s = 1;
    for (int k = 1; k <= int'(SB); k++) begin
      if (k <= int'(s)) begin
        mk[k-1] = d.m[k-1][SB-1:0];
      end else begin
        mk[k-1] = (mk[k-int'(s)-1] << s) ^ mk[k-int'(s)-1];
        // static bound; terms j >= s do not exist
        for (int j = 1; j < int'(SOBOL_MAXB); j++) begin
          if (j < int'(s) && d.a[int'(s)-1-j]) mk[k-1] ^= mk[k-j-1] << j;
        end
      end
      vk[k-1] = mk[k-1] << (int'(SB) - k);
    end
    return vk;
  endfunction

  logic [SB-1:0][SB-1:0] v_q;
  logic [ROW_W-1:0]      row_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      row_q <= '0;
      v_q   <= '0;
    end else if (!busy) begin
      if (start) begin
        busy  <= 1'b1;
        row_q <= '0;
        v_q   <= direction_numbers(desc);
      end
    end else begin
      row_q <= row_q + 1'b1;
      if (int'(row_q) == int'(ROWS) - 1) busy <= 1'b0;
    end
  end

  // Point i = row*LANES + lane: XOR of V_k over the set bits of i.
  logic [LANES-1:0][SB-1:0] pts;
  always_comb begin
    for (int l = 0; l < int'(LANES); l++) begin
      logic [31:0] idx;
      idx    = 32'(row_q) * 32'(LANES) + 32'(l);
      pts[l] = '0;
      for (int b = 0; b < int'(SB); b++)
        if (idx[b]) pts[l] ^= v_q[b];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pt_valid <= 1'b0;
      pt_row   <= '0;
      pt_data  <= '0;
    end else begin
      pt_valid <= busy;
      pt_row   <= row_q;
      pt_data  <= pts;
    end
  end

  initial begin
    assert (D % LANES == 0) else $error("LANES must divide D");
    assert (SB <= SOBOL_MAXB) else $error("SB exceeds SOBOL_MAXB");
  end

endmodule
