// imac_sub_reg_relu: subtractor, partial-sum register and ReLU of one weight group.
//
// The two ADCs convert the positive and the negative accumulator. A larger
// accumulated product leaves a lower V_acc (a bigger product discharges the
// bitlines further, so less charge is moved), so each ADC code counts down
// as its product sum grows. The signed dot product is therefore
// code_neg - code_pos, in units of one ADC step. The register adds that
// difference to the running partial sum, so dot products longer than ten
// elements are built from several conversions; `clear` starts a new sum.
// The sum saturates at the limits of PSUM_W bits. `relu` is the partial sum
// with negative values replaced by zero; its top bit is therefore always 0,
// kept so that `relu` has the width of `psum`.
//
// The paper shows a subtractor, a register and a ReLU in this order; the
// accumulating register, its width and the saturation are this design's
// choices. Timing: the register updates on the rising edge at which `valid`
// (both ADCs done) is high. Reset asynchronous, active low.
module imac_sub_reg_relu #(
  parameter int unsigned BITS   = imac_pkg::ADC_BITS,
  parameter int unsigned PSUM_W = imac_pkg::PSUM_W
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     valid,
  input  logic                     clear,
  input  logic [BITS-1:0]          code_pos,
  input  logic [BITS-1:0]          code_neg,
  output logic signed [PSUM_W-1:0] psum,
  output logic        [PSUM_W-1:0] relu
);
  localparam logic signed [PSUM_W:0] PMAX = (PSUM_W+1)'(2**(PSUM_W-1) - 1);
  localparam logic signed [PSUM_W:0] PMIN = -(PSUM_W+1)'(2**(PSUM_W-1));

  logic signed [BITS:0]   diff;
  logic signed [PSUM_W:0] next;

  always_comb begin
    diff = $signed({1'b0, code_neg}) - $signed({1'b0, code_pos});
    next = (clear ? '0 : (PSUM_W+1)'(psum)) + (PSUM_W+1)'(diff);
    if (next > PMAX)      next = PMAX;
    else if (next < PMIN) next = PMIN;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     psum <= '0;
    else if (valid) psum <= next[PSUM_W-1:0];
  end

  assign relu = psum[PSUM_W-1] ? '0 : psum;
endmodule
