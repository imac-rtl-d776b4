// imac_row_decoder: row address decoder of one 256-row array.
//
// Turns the binary row address into a one-hot row select; with `en` low no
// row is selected. Purely combinational. The paper only names the decoder;
// a plain binary-to-one-hot decoder is this design's choice.
module imac_row_decoder #(
  parameter int unsigned N_ROW = imac_pkg::N_ROW,
  localparam int unsigned AW   = $clog2(N_ROW)
) (
  input  logic             en,
  input  logic [AW-1:0]    addr,
  output logic [N_ROW-1:0] sel
);
  always_comb begin
    sel = '0;
    if (en) sel[addr] = 1'b1;
  end
endmodule
