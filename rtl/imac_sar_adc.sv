// imac_sar_adc: 4-bit successive-approximation ADC (behavioural model: it
// contains the analog comparator and capacitor DAC models).
//
// Three parts, as in the paper: the sense amplifier compares the input
// V_acc (- input) with the DAC voltage V_x (+ input); the SAR logic sets
// and decides one bit per clock, MSB first; the capacitor-array DAC turns
// the trial code into V_x. Inputs below the conversion range read 0,
// inputs above it read 15. The ADC clock of the paper's figure is a clock
// enable every DIV cycles, restarted by `start`, so each of the five SAR
// steps lasts DIV cycles: `start` for one cycle, `done` for one cycle
// 5*DIV cycles later with `code` valid (50 cycles with the default DIV=10,
// five times a multiply, as T_adc/T_amac in the paper). The input must be
// held during the conversion. The divider is this design's choice.
module imac_sar_adc #(
  parameter int unsigned   BITS   = imac_pkg::ADC_BITS,
  parameter int unsigned   DIV    = imac_pkg::ADC_DIV,
  parameter imac_pkg::uv_t V_REFH = imac_pkg::V_ACC_ZERO,
  parameter imac_pkg::uv_t V_REFL = imac_pkg::V_ACC_FULL
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  imac_pkg::uv_t   v_in,
  output logic [BITS-1:0] code,
  output logic            busy,
  output logic            done
);
  logic [BITS-1:0] d;
  imac_pkg::uv_t   v_x;
  logic            comp_out;
  logic            ce;

  localparam int unsigned CW = (DIV > 1) ? $clog2(DIV) : 1;
  logic [CW-1:0] cnt;

  // ADC clock: one enabled cycle every DIV cycles, phase restarted by start.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                         cnt <= '0;
    else if (start && !busy)            cnt <= CW'(1 % DIV);
    else if (cnt == CW'(DIV - 1))       cnt <= '0;
    else                                cnt <= cnt + 1'b1;
  end
  assign ce = (DIV == 1) || ((cnt == CW'(DIV - 1)) && !(start && !busy));

  imac_sense_amp u_sa (.v_plus(v_x), .v_minus(v_in), .comp_out);
  imac_sar_logic #(.BITS(BITS)) u_sar (.clk, .rst_n, .start, .ce, .comp_out, .d, .code, .busy, .done);
  imac_cap_dac #(.BITS(BITS), .V_REFH(V_REFH), .V_REFL(V_REFL)) u_dac (.d, .v_x);
endmodule
