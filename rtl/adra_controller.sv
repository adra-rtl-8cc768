// adra_controller: access sequencer of the ADRA macro.
//
// One request is taken per cycle when req_ready is high (valid/ready
// handshake). Reads and CiM operations take one array access, in the cycle
// the request is accepted: the decoders, drivers and sense amplifiers are
// driven straight from the request, and cap_en tells the macro to register
// the results, which appear one cycle later with rsp_valid.
//   OP_READ : decoder 2 alone asserts row_a at VGREAD2; the B sense output
//             is the stored word.
//   OP_ADD / OP_SUB : decoder 1 asserts row_a at VGREAD1 and decoder 2 asserts
//             row_b at VGREAD2 (rows must differ); SELECT = 0 / 1.
//   OP_WRITE: two cycles. Cycle 1 drives row_a to VRESET (row cleared), cycle
//             2 drives it to VSET with the '0' columns inhibited; req_ready
//             is low in cycle 2. No response is produced.
// Only the columns of words whose word_en bit is set have their bitlines
// driven during reads and CiM (the parallelism P of the design is
// popcount(word_en)/NW). Writes always write the whole row. dec1_addr is
// req_row_a wired through: decoder 1 only ever selects the A row, and its
// enable decides whether that row is asserted. The handshake,
// the latency of one cycle and the write sequencing are this design's
// choices; the single-access CiM and the two-phase write follow the design.
module adra_controller
  import adra_pkg::*;
#(
  parameter int unsigned ROWS      = 1024,
  parameter int unsigned COLS      = 1024,
  parameter int unsigned WORD_BITS = 32,
  localparam int unsigned NW       = COLS / WORD_BITS,
  localparam int unsigned AW       = (ROWS > 1) ? $clog2(ROWS) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  // request
  input  logic            req_valid,
  output logic            req_ready,
  input  op_t             req_op,
  input  logic [AW-1:0]   req_row_a,
  input  logic [AW-1:0]   req_row_b,
  input  logic [NW-1:0]   req_word_en,
  input  logic [COLS-1:0] req_wdata,
  // array control
  output logic            dec1_en,
  output logic [AW-1:0]   dec1_addr,
  output logic            dec2_en,
  output logic [AW-1:0]   dec2_addr,
  output wr_phase_t       wr_phase,
  output logic [COLS-1:0] col_en,
  output logic [COLS-1:0] wdata,
  output logic            sa_en,
  output logic            select,
  // result capture and response
  output logic            cap_en,
  output logic            rsp_valid,
  output op_t             rsp_op
);
  typedef enum logic {S_ACCESS = 1'b0, S_WSET = 1'b1} state_t;

  state_t          state;
  logic [AW-1:0]   wrow_q;
  logic [COLS-1:0] wdata_q;
  logic            fire;

  assign req_ready = (state == S_ACCESS);
  assign fire      = req_valid && req_ready && (req_op != OP_NOP);

  always_comb begin
    dec1_en   = 1'b0;
    dec1_addr = req_row_a;
    dec2_en   = 1'b0;
    dec2_addr = req_row_a;
    wr_phase  = WR_NONE;
    col_en    = '0;
    wdata     = req_wdata;
    sa_en     = 1'b0;
    select    = 1'b0;
    cap_en    = 1'b0;
    if (state == S_WSET) begin
      dec2_en   = 1'b1;
      dec2_addr = wrow_q;
      wr_phase  = WR_SET;
      wdata     = wdata_q;
    end else if (fire) begin
      for (int w = 0; w < NW; w++)
        col_en[w*WORD_BITS +: WORD_BITS] = {WORD_BITS{req_word_en[w]}};
      unique case (req_op)
        OP_READ: begin
          dec2_en = 1'b1;
          sa_en   = 1'b1;
          cap_en  = 1'b1;
        end
        OP_ADD, OP_SUB: begin
          dec1_en   = 1'b1;
          dec2_en   = 1'b1;
          dec2_addr = req_row_b;
          sa_en     = 1'b1;
          select    = (req_op == OP_SUB);
          cap_en    = 1'b1;
        end
        OP_WRITE: begin
          dec2_en  = 1'b1;
          wr_phase = WR_RESET;
          col_en   = '0;
        end
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= S_ACCESS;
      wrow_q    <= '0;
      wdata_q   <= '0;
      rsp_valid <= 1'b0;
      rsp_op    <= OP_NOP;
    end else begin
      rsp_valid <= cap_en;
      if (cap_en) rsp_op <= req_op;
      unique case (state)
        S_ACCESS:
          if (fire && req_op == OP_WRITE) begin
            state   <= S_WSET;
            wrow_q  <= req_row_a;
            wdata_q <= req_wdata;
          end
        S_WSET: state <= S_ACCESS;
        default: state <= S_ACCESS;
      endcase
    end
  end

  // Dual-row activation needs two different rows.
  a_dual_rows_differ: assert property (@(posedge clk) disable iff (!rst_n)
    fire && (req_op == OP_ADD || req_op == OP_SUB) |-> req_row_a != req_row_b);
  // A request must stay stable while it is held off.
  a_req_stable: assert property (@(posedge clk) disable iff (!rst_n)
    req_valid && !req_ready |=> req_valid && $stable(req_op));
endmodule
