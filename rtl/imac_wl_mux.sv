// imac_wl_mux: analog wordline multiplexer (behavioural model of an analog block).
//
// Sits between the row decoder and the wordlines. In a normal access
// (`rw_en`) the decoded row is driven to the full supply, as in a plain SRAM
// read or write. In compute mode the decoded row is driven, for the length
// of the wordline pulse `wl_pulse`, with the WL DAC voltage `v_dac`. Only
// the selected line is on; `v_wl` is its level in microvolts (0 V when no
// line is on). Combinational. The paper names the MUX and says that the
// array is a plain SRAM when it is disabled; the gating by the pulse is
// this design's reading of its timing diagram.
module imac_wl_mux #(
  parameter int unsigned N_ROW = imac_pkg::N_ROW
) (
  input  logic [N_ROW-1:0] sel,       // one-hot row from the decoder
  input  logic             rw_en,     // normal read / write access
  input  logic             wl_pulse,  // compute-mode wordline pulse
  input  imac_pkg::uv_t              v_dac,     // WL DAC level
  output logic [N_ROW-1:0] wl,        // wordlines that are on
  output imac_pkg::uv_t              v_wl       // level of the line that is on
);
  always_comb begin
    wl   = '0;
    v_wl = 0;
    if (rw_en) begin
      wl   = sel;
      v_wl = imac_pkg::V_DD;
    end else if (wl_pulse) begin
      wl   = sel;
      v_wl = v_dac;
    end
  end
endmodule
