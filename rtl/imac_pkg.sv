// imac_pkg: constants and types shared by the in-SRAM multiply-accumulate macro.
//
// Array geometry, operand precision and the accumulation count follow the
// paper's main configuration (256x256 6T array, 4-bit magnitude plus sign,
// ten analog accumulations per conversion, 4-bit SAR ADC). The timing of one
// functional read is counted in ticks of the unit delay tau: the wordline
// is high for 8 tau and the precharge of the weight bits 3..0 is released at
// 0, 4, 6 and 7 tau. Charge sharing and charge transfer each last one tick;
// that length is this design's choice. Analog levels used by the behavioural
// models are given in volts.
package imac_pkg;

  // ---- array geometry ----------------------------------------------------
  parameter int unsigned N_ROW     = 256;             // rows per array
  parameter int unsigned N_COL     = 256;             // columns per array
  parameter int unsigned MAG_BITS  = 4;               // weight / input magnitude bits
  parameter int unsigned BW        = MAG_BITS + 1;    // columns per weight (sign + magnitude)
  parameter int unsigned N_GROUP   = N_COL / BW;      // weights per row (51, one column unused)
  parameter int unsigned N_ARRAY   = 2;               // arrays sharing one set of peripherals
  parameter int unsigned ROW_W     = $clog2(N_ROW);

  // ---- accumulation and conversion ---------------------------------------
  parameter int unsigned R_ACC     = 10;              // analog MACs per ADC conversion
  parameter int unsigned ADC_BITS  = 4;
  parameter int unsigned PSUM_W    = 16;              // partial-sum register width
  // SAR clock divider: each of the five SAR steps (load + 4 decisions) lasts
  // ADC_DIV ticks, so a conversion takes 5 * ADC_DIV = 50 ticks, five times a
  // 10-tick multiply, the ratio of T_adc = 5 ns to T_amac = 1 ns.
  parameter int unsigned ADC_DIV   = 10;

  // ---- functional-read timing, in ticks of tau -----------------------------
  parameter int unsigned T_WL      = 8;               // wordline pulse width (8 tau)
  parameter int unsigned T_PRE3    = 0;               // precharge release of bit 3
  parameter int unsigned T_PRE2    = 4;               // ... bit 2
  parameter int unsigned T_PRE1    = 6;               // ... bit 1
  parameter int unsigned T_PRE0    = 7;               // ... bit 0
  parameter int unsigned T_CHSH    = 1;               // charge-sharing / sampling pulse
  parameter int unsigned T_ACCP    = 1;               // charge-transfer pulse
  parameter int unsigned T_MAC     = T_WL + T_CHSH + T_ACCP;

  // ---- analog levels for the behavioural models, in microvolts ------------
  // Analog node voltages are carried as signed integers in uV (uv_t).
  typedef int signed uv_t;
  parameter uv_t V_DD      = 1_200_000; // precharge level of the bitlines
  parameter uv_t V_WL_MIN  =   300_000; // wordline level for input 0
  parameter uv_t V_WL_SPAN =   700_000; // wordline span for inputs 0..15
  parameter uv_t DV_TICK   =   106_250; // BLB drop per tau at full input (850 mV / 8 tau)
  parameter uv_t V_TH_M9   =   600_000; // threshold of the transfer PMOS M9
  parameter int  C_SAMPLE_AF =  2_500;  // sampling capacitor, aF (2.5 fF)
  parameter int  C_ACC_AF    = 40_000;  // accumulation capacitor, aF (40 fF)
  // Largest V_ch-sh drop (input 15, weight 15): (8+4+2+1) tau of full discharge
  // averaged over four bitlines.
  parameter uv_t DV_CHSH_MAX = DV_TICK * (2**MAG_BITS - 1) / MAG_BITS;
  // ADC reference levels: V_acc after R_ACC zero products (top of the range)
  // and after R_ACC full-scale products (bottom of the range).
  parameter uv_t V_ACC_ZERO = uv_t'(longint'(R_ACC) * (longint'(V_DD) - longint'(V_TH_M9)) * longint'(C_SAMPLE_AF) / longint'(C_ACC_AF));
  parameter uv_t V_ACC_FULL = uv_t'(longint'(R_ACC) * (longint'(V_DD) - longint'(DV_CHSH_MAX) - longint'(V_TH_M9)) * longint'(C_SAMPLE_AF) / longint'(C_ACC_AF));

  // Sign-magnitude operand: one sign bit and a 4-bit magnitude.
  typedef struct packed {
    logic                sign;
    logic [MAG_BITS-1:0] mag;
  } smag_t;

  // Strobes of one functional read, as drawn in the paper's timing diagram.
  typedef struct packed {
    logic                wl;        // wordline pulse
    logic [MAG_BITS-1:0] vpre;      // 1 = precharge of that bit released
    logic                ch_sh;     // charge-sharing switches closed
    logic                en_sample; // sample-and-hold gate closed
    logic                en_acc;    // charge transfer onto the accumulation capacitor
  } mac_strobe_t;

endpackage
