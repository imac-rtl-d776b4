// imac_bitline_group: precharge, bitlines and charge sharing of one 4-bit weight
// (behavioural model of an analog block).
//
// The four magnitude bits w3..w0 of a weight sit in four adjacent cells of
// one row. Each bitline BLB_j has its own precharge circuit. While `vpre[j]`
// is low the precharge holds BLB_j at V_DD; once it is released, a cell
// that stores 1 (Qb = 0) discharges BLB_j through its access transistor
// whenever the wordline is on. The discharge per tick of tau is
// DV_TICK * (V_WL - 300 mV) / 700 mV, so it is proportional to the input;
// the wordline is high for 8 tau and the precharges are released at 0, 4,
// 6 and 7 tau, which makes the discharge of BLB3..BLB0 8:4:2:1. A cell
// storing 0 leaves BLB_j at V_DD. When `ch_sh` closes the sharing switches,
// the four bitlines settle to their mean, V_ch-sh, whose drop from V_DD is
// proportional to Vin * W.
//
// Timing: the model integrates once per rising clock edge, using the
// strobes that were high during the cycle before it. `v_chsh` is the mean
// of the four bitlines and is valid while `ch_sh` is high. The linear,
// constant-current discharge is the paper's first-order description; the
// residual non-linearity it corrects by tuning the release times is not
// modelled.
module imac_bitline_group
  import imac_pkg::*;
(
  input  logic                clk,
  input  logic [MAG_BITS-1:0] q,        // stored bits w3..w0 of the row that is on
  input  logic                wl_on,    // wordline of that row is on
  input  uv_t                 v_wl,     // its level
  input  logic [MAG_BITS-1:0] vpre,     // 1 = precharge of BLB_j released
  input  logic                ch_sh,    // charge-sharing switches closed
  output uv_t                 v_chsh    // charge-shared bitline voltage
);
  uv_t blb [MAG_BITS];
  uv_t dv;      // discharge of a released bitline in one tick
  uv_t mean;

  always_comb begin
    if (wl_on && v_wl > V_WL_MIN)
      dv = uv_t'(longint'(DV_TICK) * (longint'(v_wl) - longint'(V_WL_MIN)) / longint'(V_WL_SPAN));
    else
      dv = 0;
  end

  always_comb begin
    longint sum;
    sum = 0;
    for (int j = 0; j < MAG_BITS; j++) sum += longint'(blb[j]);
    mean = uv_t'(sum / longint'(MAG_BITS));
  end
  assign v_chsh = mean;

  always_ff @(posedge clk) begin
    for (int j = 0; j < MAG_BITS; j++) begin
      if (!vpre[j])      blb[j] <= V_DD;
      else if (ch_sh)    blb[j] <= mean;
      else if (q[j])     blb[j] <= (blb[j] > dv) ? blb[j] - dv : 0;
    end
  end
endmodule
