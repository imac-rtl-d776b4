// imac_column_periph: peripheral circuits of one weight group (sign column
// plus four magnitude columns), shared by the two arrays (behavioural
// model: it contains the analog accumulators and ADC models).
//
// Per multiply: the sign logic captures the product sign while the
// wordline is on; during `en_sample` both accumulators sample (the one the
// sign picks takes V_ch-sh, the other the zero-product level V_DD); during
// `en_acc` both transfer their sample. After ten multiplies `adc_start`
// starts the two 4-bit SAR ADCs; when they finish, the subtractor forms
// code_neg - code_pos and the register adds it to the partial sum
// (`psum_valid`, with `psum_clear` restarting the sum); ReLU is applied on
// the register output. This follows the paper's array figure (Xor, acc,
// SAR ADC, Subst, Reg, ReLU); see the submodules for the details that are
// this design's own.
module imac_column_periph
  import imac_pkg::*;
(
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     wl,
  input  logic                     in_sign,
  input  logic                     w_sign,
  input  uv_t                      v_chsh,
  input  logic                     en_sample,
  input  logic                     en_acc,
  input  logic                     acc_clr,
  input  logic                     adc_start,
  input  logic                     psum_valid,
  input  logic                     psum_clear,
  output logic                     adc_done,
  output logic [ADC_BITS-1:0]      code_pos,
  output logic [ADC_BITS-1:0]      code_neg,
  output logic signed [PSUM_W-1:0] psum,
  output logic        [PSUM_W-1:0] relu,
  output logic                     prod_sign,  // 1 = last product negative
  output logic                     acc_sat
);
  logic sel_pos, sel_neg;
  uv_t  v_acc_pos, v_acc_neg;
  logic sat_pos, sat_neg;
  logic busy_pos, busy_neg, done_neg;

  imac_sign_steer u_sign (.clk, .rst_n, .wl, .in_sign, .w_sign, .prod_sign, .sel_pos, .sel_neg);

  imac_analog_acc u_acc_pos (.clk, .clr(acc_clr), .sel(sel_pos), .v_in(v_chsh),
                             .en_sample, .en_acc, .v_acc(v_acc_pos), .sat(sat_pos));
  imac_analog_acc u_acc_neg (.clk, .clr(acc_clr), .sel(sel_neg), .v_in(v_chsh),
                             .en_sample, .en_acc, .v_acc(v_acc_neg), .sat(sat_neg));

  imac_sar_adc u_adc_pos (.clk, .rst_n, .start(adc_start), .v_in(v_acc_pos),
                          .code(code_pos), .busy(busy_pos), .done(adc_done));
  imac_sar_adc u_adc_neg (.clk, .rst_n, .start(adc_start), .v_in(v_acc_neg),
                          .code(code_neg), .busy(busy_neg), .done(done_neg));

  imac_sub_reg_relu u_srr (.clk, .rst_n, .valid(psum_valid), .clear(psum_clear),
                           .code_pos, .code_neg, .psum, .relu);

  assign acc_sat = sat_pos | sat_neg;

  // Both converters run in lock step.
  always_ff @(posedge clk)
    if (rst_n)
      a_lockstep: assert (busy_pos == busy_neg && adc_done == done_neg)
        else $error("ADC pair out of step");
endmodule
