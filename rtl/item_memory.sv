// item_memory: the letter hypervector store. One D-bit hypervector per
// symbol of the alphabet (26 letters, space and a catch-all symbol).
//
// How it works. The encoding module writes each hypervector in LANES-bit
// slices, slice `wr_row` covering bits wr_row*LANES .. wr_row*LANES+LANES-1.
// Three registered read ports serve the rest of the chip:
//   port A   the whole hypervector of symbol a_sym, for the n-gram encoder;
//   ports B/C one LANES-bit slice each of two symbols, for the correlation
//            (SCC) probe that compares two letter hypervectors.
// Every read returns its data in the cycle after the request, with a valid
// flag. The store itself is not reset: it holds whatever was last written.
//
// Keeping a copy of the generated letter hypervectors for the n-gram stage
// follows the classifier's architecture; the slice write port and the extra
// probe ports are this design's choices.
module item_memory
  import hdc_pkg::*;
#(
  parameter int unsigned D     = HV_D,
  parameter int unsigned LANES = LANES_DEF,
  parameter int unsigned K     = NUM_SYMBOLS,
  localparam int unsigned ROWS  = D / LANES,
  localparam int unsigned ROW_W = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned SYM_W = $clog2(K)
) (
  input  logic              clk,
  input  logic              rst_n,
  // slice write
  input  logic              wr_en,
  input  logic [SYM_W-1:0]  wr_sym,
  input  logic [ROW_W-1:0]  wr_row,
  input  logic [LANES-1:0]  wr_bits,
  // port A: whole hypervector
  input  logic              a_en,
  input  logic [SYM_W-1:0]  a_sym,
  output logic              a_valid,
  output logic [D-1:0]      a_hv,
  // ports B and C: slices
  input  logic              bc_en,
  input  logic [SYM_W-1:0]  b_sym,
  input  logic [SYM_W-1:0]  c_sym,
  input  logic [ROW_W-1:0]  bc_row,
  output logic              bc_valid,
  output logic [LANES-1:0]  b_bits,
  output logic [LANES-1:0]  c_bits
);

  logic [ROWS-1:0][LANES-1:0] mem [K];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_sym][wr_row] <= wr_bits;
    if (a_en)  a_hv   <= mem[a_sym];
    if (bc_en) begin
      b_bits <= mem[b_sym][bc_row];
      c_bits <= mem[c_sym][bc_row];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_valid  <= 1'b0;
      bc_valid <= 1'b0;
    end else begin
      a_valid  <= a_en;
      bc_valid <= bc_en;
    end
  end

endmodule
