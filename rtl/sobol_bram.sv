// sobol_bram: block RAM holding the Sobol numbers of the K selected
// dimensions, D points each, from which the encoding module derives the
// letter hypervectors.
//
// The memory is organised as K*D/LANES words of LANES points (LANES*SB bits),
// word address = sequence * (D/LANES) + row. It is a simple dual-port RAM:
// one synchronous write port and one synchronous read port. A read issued
// with `re` in one cycle returns its word on `rdata` with `rvalid` in the
// next cycle. Nothing is reset; the contents are defined by what is written.
//
// Keeping the Sobol numbers in a block RAM, rather than creating random
// numbers at run time, is how the encoding module is described; the word
// width and the port arrangement are choices of this design.
module sobol_bram
  import hdc_pkg::*;
#(
  parameter int unsigned D     = HV_D,
  parameter int unsigned SB    = $clog2(D),
  parameter int unsigned LANES = LANES_DEF,
  parameter int unsigned K     = NUM_SYMBOLS,
  localparam int unsigned WORDS  = K * (D / LANES),
  localparam int unsigned ADDR_W = $clog2(WORDS),
  localparam int unsigned DATA_W = LANES * SB
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              we,
  input  logic [ADDR_W-1:0] waddr,
  input  logic [DATA_W-1:0] wdata,
  input  logic              re,
  input  logic [ADDR_W-1:0] raddr,
  output logic [DATA_W-1:0] rdata,
  output logic              rvalid
);

  logic [DATA_W-1:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rvalid <= 1'b0;
    else        rvalid <= re;
  end

endmodule
