// imac_wl_dac: wordline DAC (behavioural model of an analog block).
//
// Maps the 4-bit input magnitude Vin linearly onto the wordline voltage
// V_WL = 300 mV + Vin * 700/15 mV, so Vin = 0 sits near the access
// transistor threshold (no discharge) and Vin = 15 gives 1 V. The mapping
// is the paper's. The output is the analog level in microvolts, rounded to
// the nearest microvolt; with `en` low the output is 0 V. Combinational.
module imac_wl_dac
  import imac_pkg::*;
(
  input  logic                en,
  input  logic [MAG_BITS-1:0] code,
  output uv_t                 v_wl
);
  localparam int unsigned FS = 2**MAG_BITS - 1;
  always_comb begin
    if (en) v_wl = V_WL_MIN + uv_t'((int'(code) * V_WL_SPAN + int'(FS / 2)) / int'(FS));
    else    v_wl = 0;
  end
endmodule
