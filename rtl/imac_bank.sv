// imac_bank: one 256x256 6T array with its row periphery and bitline
// circuits (behavioural model: it contains the analog wordline and bitline
// models).
//
// Row decoder, wordline MUX and WL DAC drive the wordlines; the array
// stores N_GROUP weights per row, each in five adjacent columns: column
// 5g holds the sign, columns 5g+1 .. 5g+4 the magnitude bits w0..w3 (MSB
// in the highest column). The last N_COL mod 5 columns are ordinary memory.
// In a normal access (`rw_en`) the decoded row is read (`rdata`) or written
// (`we`, `wdata`, `wmask`). In compute mode (`wl_pulse`) the decoded row is
// driven by the WL DAC level for input `vin_mag`; each group's four BLBs
// discharge under the strobes `vpre` and are charge-shared by `ch_sh` onto
// `v_chsh[g]`, and the sign cell is read digitally as `w_sign[g]`.
module imac_bank
  import imac_pkg::*;
(
  input  logic                clk,
  input  logic [ROW_W-1:0]    row,
  input  logic                rw_en,
  input  logic                we,
  input  logic [N_COL-1:0]    wdata,
  input  logic [N_COL-1:0]    wmask,
  output logic [N_COL-1:0]    rdata,
  input  logic                cmp_en,     // compute operation on this bank
  input  logic                wl_pulse,
  input  logic [MAG_BITS-1:0] vin_mag,
  input  logic [MAG_BITS-1:0] vpre,
  input  logic                ch_sh,
  output uv_t                 v_chsh [N_GROUP],
  output logic [N_GROUP-1:0]  w_sign
);
  logic [N_ROW-1:0] sel, wl;
  uv_t              v_dac, v_wl;
  logic [N_COL-1:0] row_q;
  logic             wl_any;

  imac_row_decoder u_dec (.en(rw_en | cmp_en), .addr(row), .sel);
  imac_wl_dac      u_dac (.en(cmp_en), .code(vin_mag), .v_wl(v_dac));
  imac_wl_mux      u_mux (.sel, .rw_en, .wl_pulse(wl_pulse & cmp_en), .v_dac, .wl, .v_wl);
  imac_sram_array  u_arr (.clk, .wl, .we(we & rw_en), .wdata, .wmask, .rdata, .row_q);

  assign wl_any = |wl;

  for (genvar g = 0; g < N_GROUP; g++) begin : g_grp
    logic [MAG_BITS-1:0] vpre_g;
    // With no compute operation on this bank its precharge stays on.
    assign vpre_g = cmp_en ? vpre : '0;
    imac_bitline_group u_bl (
      .clk,
      .q      (row_q[g*BW+1 +: MAG_BITS]),
      .wl_on  (wl_any & cmp_en),
      .v_wl,
      .vpre   (vpre_g),
      .ch_sh  (ch_sh & cmp_en),
      .v_chsh (v_chsh[g])
    );
    assign w_sign[g] = row_q[g*BW];
  end
endmodule
