// imac_analog_acc: analog accumulator (behavioural model of an analog block).
//
// A transmission gate (M7/M8) samples the charge-shared bitline voltage onto
// a 2.5 fF sampling capacitor while `en_sample` is high. While `en_acc` is
// high the PMOS M9, its gate at 0 V, conducts until V_sample has fallen to
// its threshold (600 mV), so it moves C_sample*(V_sample - V_th) onto the
// 40 fF accumulation capacitor whatever that capacitor already holds, as
// long as V_acc stays below V_th. Each accumulation thus adds
// dV_acc = C_sample/C_acc * (V_sample - V_th). Capacitances, threshold and
// the equation are the paper's.
//
// Sign handling (this design's choice): the product sign picks one of two
// accumulators. To give both the same number of samples per conversion,
// and so the same ADC range, the accumulator that is not picked (`sel` low)
// samples the precharge level V_DD, the bitline voltage of a zero product.
// `clr` discharges the accumulation capacitor; the paper does not show how
// it is reset. The model updates on the rising clock edge from the strobes
// of the cycle before it; `v_acc` is in microvolts. `sat` flags an
// accumulation that started with V_acc above V_th, where the equation no
// longer holds.
module imac_analog_acc
  import imac_pkg::*;
(
  input  logic clk,
  input  logic clr,        // discharge the accumulation capacitor
  input  logic sel,        // this accumulator takes the product
  input  uv_t  v_in,       // V_ch-sh
  input  logic en_sample,
  input  logic en_acc,
  output uv_t  v_acc,
  output logic sat
);
  uv_t v_sample;

  always_ff @(posedge clk) begin
    if (clr) begin
      v_acc    <= 0;
      v_sample <= V_TH_M9;
      sat      <= 1'b0;
    end else begin
      if (en_sample)
        v_sample <= sel ? v_in : V_DD;
      else if (en_acc && v_sample > V_TH_M9) begin
        v_acc    <= v_acc + uv_t'((longint'(v_sample) - longint'(V_TH_M9)) * longint'(C_SAMPLE_AF)
                                  / longint'(C_ACC_AF));
        v_sample <= V_TH_M9;
        if (v_acc > V_TH_M9) sat <= 1'b1;
      end
    end
  end
endmodule
