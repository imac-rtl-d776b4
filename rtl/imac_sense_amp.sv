// imac_sense_amp: comparator of the SAR ADC (behavioural model of an analog block).
//
// The DAC output V_x drives the + input and the accumulated voltage V_acc
// the - input, as in the paper's ADC figure; Comp Out is high when V_x is
// above V_acc, which tells the SAR logic to clear the bit under test. An
// input offset (the paper quotes a comparator offset of 5 mV or less) can
// be set with OFFSET_UV; it defaults to zero. Combinational.
module imac_sense_amp #(
  parameter int OFFSET_UV = 0
) (
  input  imac_pkg::uv_t v_plus,    // V_x
  input  imac_pkg::uv_t v_minus,   // V_acc
  output logic          comp_out
);
  assign comp_out = (v_plus + OFFSET_UV) > v_minus;
endmodule
