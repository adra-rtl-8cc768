// adra_row_decoder: one of the two row decoders of an ADRA array.
//
// ADRA asserts two wordlines at two different gate voltages, so the array has
// two decoders whose final stages drive VGREAD1 and VGREAD2 respectively. This
// module is the logic part: a binary row address and an enable give a one-hot
// row select (all zero when disabled). The decoder structure (predecode,
// gates) is not specified; a plain behavioural decoder is used.
// Combinational.
module adra_row_decoder #(
  parameter int unsigned ROWS = 1024,
  localparam int unsigned AW  = (ROWS > 1) ? $clog2(ROWS) : 1
) (
  input  logic            en,
  input  logic [AW-1:0]   addr,
  output logic [ROWS-1:0] sel
);
  always_comb begin
    sel = '0;
    if (en && (32'(addr) < ROWS)) sel[addr] = 1'b1;
  end
endmodule
