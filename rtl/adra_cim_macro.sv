// adra_cim_macro: computing-in-memory macro with asymmetric dual-row
// activation (ADRA) on a 1T-FeFET array.
//
// Two rows are read at once with their wordlines at two different gate
// voltages (VGREAD1 < VGREAD2). Each of the four bit pairs (A,B) then gives a
// different senseline current, so three sense amplifiers per column recover
// OR, B and AND, an OAI gate recovers A, and a compute module per column adds
// or subtracts the two words in the same single array access. Comparison comes
// from the sign and the zero flag of the difference.
//
// Structure: adra_controller -> two adra_row_decoder -> adra_wordline_driver,
// adra_bitline_driver -> fefet_array -> NW x adra_word_periphery -> result
// registers. The array is ROWS x COLS cells holding NW = COLS/WORD_BITS words
// per row; word w occupies columns w*WORD_BITS .. w*WORD_BITS+WORD_BITS-1, bit
// 0 in the lowest column. Defaults are the largest evaluated array (1024 x
// 1024) with 32-bit words and full parallelism (one periphery per column).
//
// Interface and timing: a request (op, row_a, row_b, word_en, wdata) is taken
// when req_valid && req_ready. OP_READ, OP_ADD and OP_SUB respond one cycle
// later with rsp_valid and the registered outputs; one such request can be
// taken every cycle. OP_WRITE writes wdata into row_a in two cycles and holds
// req_ready low in the second. For OP_ADD/OP_SUB, rsp_a is the row_a word
// (VGREAD1 row) and rsp_b the row_b word; for OP_READ the word is on rsp_b.
// Words whose word_en bit is clear are not accessed and read as zero.
module adra_cim_macro
  import adra_pkg::*;
#(
  parameter int unsigned ROWS      = 1024,
  parameter int unsigned COLS      = 1024,
  parameter int unsigned WORD_BITS = 32,
  localparam int unsigned NW       = COLS / WORD_BITS,
  localparam int unsigned AW       = (ROWS > 1) ? $clog2(ROWS) : 1
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        req_valid,
  output logic                        req_ready,
  input  op_t                         req_op,
  input  logic [AW-1:0]               req_row_a,
  input  logic [AW-1:0]               req_row_b,
  input  logic [NW-1:0]               req_word_en,
  input  logic [COLS-1:0]             req_wdata,
  output logic                        rsp_valid,
  output op_t                         rsp_op,
  output logic [COLS-1:0]             rsp_a,
  output logic [COLS-1:0]             rsp_b,
  output logic [COLS-1:0]             rsp_and,
  output logic [COLS-1:0]             rsp_or,
  output logic [COLS-1:0]             rsp_xor,
  output logic [NW-1:0][WORD_BITS:0]  rsp_sum,
  output logic [NW-1:0]               rsp_lt,
  output logic [NW-1:0]               rsp_eq
);
  logic            dec1_en, dec2_en;
  logic [AW-1:0]   dec1_addr, dec2_addr;
  wr_phase_t       wr_phase;
  logic [COLS-1:0] col_en, wdata;
  logic            sa_en, select, cap_en;
  logic [ROWS-1:0] sel1, sel2;
  int              wl_mv   [ROWS];
  int              rbl_mv  [COLS];
  int              sl_mv   [COLS];
  int unsigned     i_sl_na [COLS];

  adra_controller #(.ROWS(ROWS), .COLS(COLS), .WORD_BITS(WORD_BITS)) u_ctrl (
    .clk, .rst_n,
    .req_valid, .req_ready, .req_op, .req_row_a, .req_row_b, .req_word_en,
    .req_wdata,
    .dec1_en, .dec1_addr, .dec2_en, .dec2_addr, .wr_phase, .col_en, .wdata,
    .sa_en, .select, .cap_en, .rsp_valid, .rsp_op);

  adra_row_decoder #(.ROWS(ROWS)) u_dec1 (.en(dec1_en), .addr(dec1_addr), .sel(sel1));
  adra_row_decoder #(.ROWS(ROWS)) u_dec2 (.en(dec2_en), .addr(dec2_addr), .sel(sel2));

  adra_wordline_driver #(.ROWS(ROWS)) u_wld (
    .sel1, .sel2, .wr_phase, .wl_mv);

  adra_bitline_driver #(.COLS(COLS)) u_bld (
    .col_en, .wr_phase, .wdata, .rbl_mv, .sl_mv);

  fefet_array #(.ROWS(ROWS), .COLS(COLS)) u_array (
    .clk, .wl_mv, .rbl_mv, .sl_mv, .i_sl_na);

  logic [COLS-1:0]            a_w, b_w, and_w, or_w, xor_w;
  logic [NW-1:0][WORD_BITS:0] sum_w;
  logic [NW-1:0]              lt_w, eq_w;

  for (genvar w = 0; w < NW; w++) begin : g_word
    int unsigned isl [WORD_BITS];
    for (genvar i = 0; i < WORD_BITS; i++) begin : g_i
      assign isl[i] = i_sl_na[w*WORD_BITS + i];
    end
    adra_word_periphery #(.N(WORD_BITS)) u_per (
      .i_sl_na(isl), .sa_en, .select,
      .a     (a_w  [w*WORD_BITS +: WORD_BITS]),
      .b     (b_w  [w*WORD_BITS +: WORD_BITS]),
      .and_ab(and_w[w*WORD_BITS +: WORD_BITS]),
      .or_ab (or_w [w*WORD_BITS +: WORD_BITS]),
      .xor_ab(xor_w[w*WORD_BITS +: WORD_BITS]),
      .sum   (sum_w[w]),
      .lt    (lt_w[w]),
      .eq    (eq_w[w]));
  end

  // Result registers, loaded in the access cycle.
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rsp_a   <= '0;
      rsp_b   <= '0;
      rsp_and <= '0;
      rsp_or  <= '0;
      rsp_xor <= '0;
      rsp_sum <= '0;
      rsp_lt  <= '0;
      rsp_eq  <= '0;
    end else if (cap_en) begin
      rsp_a   <= a_w;
      rsp_b   <= b_w;
      rsp_and <= and_w;
      rsp_or  <= or_w;
      rsp_xor <= xor_w;
      rsp_sum <= sum_w;
      rsp_lt  <= lt_w;
      rsp_eq  <= eq_w;
    end
  end
endmodule
