// imac_sign_steer: sign of the product and choice of accumulator.
//
// Magnitudes are multiplied in the analog domain; signs are handled
// digitally. The weight sign is stored in the fifth column of each weight
// and read on its bitline BL while the wordline is on; the product sign is
// the XOR of that bit with the input sign, as in the paper. Because the
// sample is taken after the wordline has gone low, the XOR result is
// captured in a register on every clock edge at which `wl` was high and
// held until the next multiply. `sel_pos`/`sel_neg` pick the accumulator
// that takes the product (positive products on the positive accumulator).
// The capture register is this design's choice. Reset is asynchronous,
// active low.
module imac_sign_steer (
  input  logic clk,
  input  logic rst_n,
  input  logic wl,        // wordline pulse of the current multiply
  input  logic in_sign,   // sign of the input Vin
  input  logic w_sign,    // weight sign read from the sign column
  output logic prod_sign, // 1 = negative product
  output logic sel_pos,
  output logic sel_neg
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  prod_sign <= 1'b0;
    else if (wl) prod_sign <= in_sign ^ w_sign;
  end
  assign sel_pos = ~prod_sign;
  assign sel_neg =  prod_sign;
endmodule
