// sobol_hv_encoder: the hypervector encoding module. It produces the whole
// alphabet of letter hypervectors from Sobol sequences kept in block RAM.
//
// How it works. A register file holds one Sobol descriptor per symbol (the
// K dimensions picked offline as the least correlated ones). A command runs
// in up to two phases:
//   FILL    (only when cmd_fill = 1) the Sobol generator is run once per
//           symbol and its rows of LANES points are written into the Sobol
//           block RAM, word address = symbol * D/LANES + row.
//   ENCODE  the block RAM is read back word by word; every word goes through
//           the LANES-lane threshold comparator (T <= x gives -1, logic-0,
//           else +1, logic-1) and the resulting LANES hypervector bits are
//           written into the item memory at (symbol, row).
// A command with cmd_fill = 0 only re-thresholds what the RAM holds, which is
// how a new threshold T is tried without generating the sequences again.
//
// Interface and timing. cmd_start is taken while busy = 0. FILL costs
// D/LANES + 2 cycles per symbol, ENCODE one cycle per RAM word plus two, so
// a full command takes K*(D/LANES + 2) + K*D/LANES + 2 cycles (7,226 for the
// defaults) and a re-threshold K*D/LANES + 2 (3,586).
// `done` pulses for one cycle at the end. The item memory write port
// (im_we, im_sym, im_row, im_bits) is driven straight from the RAM read
// data and comparator, one word per cycle. desc_we writes a descriptor at
// any time; t_code is sampled during ENCODE and must be held stable.
//
// Reading the sequences from a block RAM and comparing them with T follows
// the encoding module as described; generating the RAM contents on chip from
// the Joe-Kuo descriptors, the lane count and the command interface are this
// design's choices.
module sobol_hv_encoder
  import hdc_pkg::*;
#(
  parameter int unsigned D     = HV_D,
  parameter int unsigned SB    = $clog2(D),
  parameter int unsigned LANES = LANES_DEF,
  parameter int unsigned K     = NUM_SYMBOLS,
  localparam int unsigned ROWS   = D / LANES,
  localparam int unsigned ROW_W  = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned SYM_W  = $clog2(K),
  localparam int unsigned WORDS  = K * ROWS,
  localparam int unsigned ADDR_W = $clog2(WORDS)
) (
  input  logic               clk,
  input  logic               rst_n,
  // descriptor register file
  input  logic               desc_we,
  input  logic [SYM_W-1:0]   desc_sel,
  input  sobol_desc_t        desc_in,
  // threshold T as ceil(T * 2^SB)
  input  logic [SB:0]        t_code,
  // command
  input  logic               cmd_start,
  input  logic               cmd_fill,
  output logic               busy,
  output logic               done,
  // item memory write port
  output logic               im_we,
  output logic [SYM_W-1:0]   im_sym,
  output logic [ROW_W-1:0]   im_row,
  output logic [LANES-1:0]   im_bits
);

  typedef enum logic [2:0] {
    S_IDLE, S_FILL_START, S_FILL_WAIT, S_ENCODE, S_DRAIN
  } state_e;

  state_e            state;
  sobol_desc_t       desc_rf [K];
  logic [SYM_W-1:0]  sym_q;      // symbol being filled / read
  logic [ROW_W-1:0]  row_q;      // row being read
  logic [SYM_W-1:0]  sym_d;      // symbol / row of the word now on rdata
  logic [ROW_W-1:0]  row_d;

  // Generator
  logic                      gen_start, gen_valid, gen_busy;
  logic [ROW_W-1:0]          gen_row;
  logic [LANES-1:0][SB-1:0]  gen_data;

  sobol_generator #(.D(D), .SB(SB), .LANES(LANES)) u_gen (
    .clk, .rst_n,
    .start    (gen_start),
    .desc     (desc_rf[sym_q]),
    .busy     (gen_busy),
    .pt_valid (gen_valid),
    .pt_row   (gen_row),
    .pt_data  (gen_data)
  );

  // Block RAM
  logic                 ram_re, ram_rvalid;
  logic [ADDR_W-1:0]    ram_waddr, ram_raddr;
  logic [LANES*SB-1:0]  ram_rdata;

  assign ram_waddr = ADDR_W'(32'(sym_q) * 32'(ROWS) + 32'(gen_row));
  assign ram_raddr = ADDR_W'(32'(sym_q) * 32'(ROWS) + 32'(row_q));
  assign ram_re    = (state == S_ENCODE);

  sobol_bram #(.D(D), .SB(SB), .LANES(LANES), .K(K)) u_ram (
    .clk, .rst_n,
    .we     (gen_valid),
    .waddr  (ram_waddr),
    .wdata  (gen_data),
    .re     (ram_re),
    .raddr  (ram_raddr),
    .rdata  (ram_rdata),
    .rvalid (ram_rvalid)
  );

  // Threshold comparators
  threshold_compare #(.SB(SB), .LANES(LANES)) u_cmp (
    .sobol   (ram_rdata),
    .t_code  (t_code),
    .hv_bits (im_bits)
  );

  assign im_we  = ram_rvalid;
  assign im_sym = sym_d;
  assign im_row = row_d;

  assign gen_start = (state == S_FILL_START);
  assign busy      = (state != S_IDLE);

  always_ff @(posedge clk) begin
    if (desc_we) desc_rf[desc_sel] <= desc_in;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      sym_q <= '0;
      row_q <= '0;
      sym_d <= '0;
      row_d <= '0;
      done  <= 1'b0;
    end else begin
      done  <= 1'b0;
      sym_d <= sym_q;
      row_d <= row_q;
      unique case (state)
        S_IDLE: begin
          if (cmd_start) begin
            sym_q <= '0;
            row_q <= '0;
            state <= cmd_fill ? S_FILL_START : S_ENCODE;
          end
        end
        S_FILL_START: state <= S_FILL_WAIT;
        S_FILL_WAIT: begin
          if (gen_valid && int'(gen_row) == int'(ROWS) - 1) begin
            if (int'(sym_q) == int'(K) - 1) begin
              sym_q <= '0;
              state <= S_ENCODE;
            end else begin
              sym_q <= sym_q + 1'b1;
              state <= S_FILL_START;
            end
          end
        end
        S_ENCODE: begin
          if (int'(row_q) == int'(ROWS) - 1) begin
            row_q <= '0;
            if (int'(sym_q) == int'(K) - 1) state <= S_DRAIN;
            else                            sym_q <= sym_q + 1'b1;
          end else begin
            row_q <= row_q + 1'b1;
          end
        end
        S_DRAIN: begin
          // the last word is on the read port this cycle
          state <= S_IDLE;
          done  <= 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // while a sequence is being written, the generator stays busy until the
  // cycle its last row is delivered
  assert property (@(posedge clk) (state == S_FILL_WAIT && !gen_busy) |-> gen_valid);

endmodule
