// imac_top: in-SRAM multiply-accumulate macro: two 256x256 6T arrays
// sharing one set of column peripherals, and the sequencer.
//
// The macro is an ordinary SRAM until a compute operation starts. Normal
// access (`rw_en`, accepted while `rw_ready`): one row of the array picked
// by `rw_array` is read on `rdata` (combinational) or, with `rw_we`,
// written under the column mask `wmask` at the clock edge.
//
// Compute: each row holds N_GROUP = 51 sign-magnitude weights of 5 bits
// (sign + 4-bit magnitude). `start` begins an operation on array
// `array_sel`; ten steps follow on the valid/ready stream, each naming a
// row and a sign-magnitude input. For every weight group g the macro forms
// sum_i in_i * W[row_i][g] in the analog domain: the input magnitude sets
// the wordline voltage, the staggered precharge release weighs the four
// weight bits 8:4:2:1, charge sharing forms the product, and products are
// accumulated on a positive or negative capacitor according to the XOR of
// the signs. Two 4-bit SAR ADCs then convert both accumulators and the
// difference of their codes is added to the group's partial sum
// (`psum[g]`, cleared first when `clear` was set at `start`); `relu[g]` is
// the partial sum clamped at zero. `done` pulses when the registers have
// been updated. One ADC step is (V_ACC_ZERO - V_ACC_FULL)/16 of
// accumulator voltage, about 141 units of product sum (ten full-scale
// products are 2250 units).
//
// Timing with the defaults: one multiply per 10 clock ticks (a tick is the
// unit delay tau). With a steady input stream, `done` comes 152 cycles
// after `start`: the start cycle, one cycle to take the first step, ten
// multiplies of 10 cycles, and five SAR steps of 10 cycles (load and four
// bit decisions). At tau = 0.1 ns this is 10 x 1 ns + 5 ns, the paper's
// T_amac and T_adc.
// Reset is asynchronous, active low.
module imac_top
  import imac_pkg::*;
(
  input  logic                      clk,
  input  logic                      rst_n,
  // normal SRAM access
  input  logic                      rw_en,
  input  logic                      rw_we,
  input  logic                      rw_array,
  input  logic [ROW_W-1:0]          rw_row,
  input  logic [N_COL-1:0]          wdata,
  input  logic [N_COL-1:0]          wmask,
  output logic [N_COL-1:0]          rdata,
  output logic                      rw_ready,
  // compute operation
  input  logic                      start,
  input  logic                      clear,
  input  logic                      array_sel,
  output logic                      busy,
  output logic                      done,
  input  logic                      step_valid,
  output logic                      step_ready,
  input  logic [ROW_W-1:0]          step_row,
  input  smag_t                     step_in,
  // results per weight group
  output logic signed [PSUM_W-1:0]  psum     [N_GROUP],
  output logic        [PSUM_W-1:0]  relu     [N_GROUP],
  output logic [ADC_BITS-1:0]       code_pos [N_GROUP],
  output logic [ADC_BITS-1:0]       code_neg [N_GROUP],
  output logic [N_GROUP-1:0]        prod_sign,   // sign of the latest product
  output logic [N_GROUP-1:0]        acc_sat
);
  logic             cur_array, computing, acc_clr, adc_start, adc_done, psum_valid, psum_clear;
  logic [ROW_W-1:0] cur_row;
  smag_t            cur_in;
  mac_strobe_t      strobe;
  logic [N_GROUP-1:0] adc_done_g;

  uv_t              v_chsh_b [N_ARRAY][N_GROUP];
  logic [N_GROUP-1:0] w_sign_b [N_ARRAY];
  logic [N_COL-1:0] rdata_b  [N_ARRAY];

  imac_timing_ctrl u_ctrl (
    .clk, .rst_n, .start, .clear, .array_sel, .busy, .done,
    .step_valid, .step_ready, .step_row, .step_in,
    .cur_array, .cur_row, .cur_in, .computing, .strobe,
    .acc_clr, .adc_start, .adc_done, .psum_valid, .psum_clear
  );

  assign rw_ready = !busy;

  for (genvar b = 0; b < N_ARRAY; b++) begin : g_bank
    logic rw_b, cmp_b;
    assign rw_b  = rw_en && rw_ready && (rw_array == 1'(b));
    assign cmp_b = computing && (cur_array == 1'(b));
    imac_bank u_bank (
      .clk,
      .row      (cmp_b ? cur_row : rw_row),
      .rw_en    (rw_b),
      .we       (rw_we),
      .wdata, .wmask,
      .rdata    (rdata_b[b]),
      .cmp_en   (cmp_b),
      .wl_pulse (strobe.wl),
      .vin_mag  (cur_in.mag),
      .vpre     (strobe.vpre),
      .ch_sh    (strobe.ch_sh),
      .v_chsh   (v_chsh_b[b]),
      .w_sign   (w_sign_b[b])
    );
  end

  assign rdata = rdata_b[rw_array];

  for (genvar g = 0; g < N_GROUP; g++) begin : g_col
    imac_column_periph u_col (
      .clk, .rst_n,
      .wl         (strobe.wl),
      .in_sign    (cur_in.sign),
      .w_sign     (w_sign_b[cur_array][g]),
      .v_chsh     (v_chsh_b[cur_array][g]),
      .en_sample  (strobe.en_sample),
      .en_acc     (strobe.en_acc),
      .acc_clr,
      .adc_start,
      .psum_valid,
      .psum_clear,
      .adc_done   (adc_done_g[g]),
      .code_pos   (code_pos[g]),
      .code_neg   (code_neg[g]),
      .psum       (psum[g]),
      .relu       (relu[g]),
      .prod_sign  (prod_sign[g]),
      .acc_sat    (acc_sat[g])
    );
  end
  assign adc_done = &adc_done_g;   // all groups convert in lock step
endmodule
