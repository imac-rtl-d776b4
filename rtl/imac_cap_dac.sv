// imac_cap_dac: capacitor-array DAC of the SAR ADC (behavioural model of an analog block).
//
// Converts the trial code D3..D0 to V_x = V_ss + D * (V_dd - V_ss) / 2^BITS,
// so the first trial (D = 1000) compares against (V_dd + V_ss)/2 as the
// paper describes. V_dd and V_ss are the references of the array; their
// defaults are this design's choice: V_acc after ten zero products (top) and
// after ten full-scale products (bottom), so the 4-bit code spans the whole
// range of a ten-element dot product. Values in microvolts; combinational.
module imac_cap_dac #(
  parameter int unsigned   BITS   = imac_pkg::ADC_BITS,
  parameter imac_pkg::uv_t V_REFH = imac_pkg::V_ACC_ZERO,
  parameter imac_pkg::uv_t V_REFL = imac_pkg::V_ACC_FULL
) (
  input  logic [BITS-1:0] d,
  output imac_pkg::uv_t   v_x
);
  assign v_x = V_REFL + imac_pkg::uv_t'((longint'(d) * (longint'(V_REFH) - longint'(V_REFL))) >>> BITS);
endmodule
