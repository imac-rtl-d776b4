// imac_timing_ctrl: sequencer of the multiply-accumulate operation.
//
// One operation is a ten-element dot product per weight group: ten
// multiplies, each on its own row with its own input, accumulated in the
// analog domain, then one conversion by the ADCs and one update of the
// partial-sum registers.
//
// Each multiply lasts T_MAC = 10 ticks of tau and drives the strobes of the
// paper's timing diagram (tick t, counted from the rising wordline):
//   WL          t in [0, 8)
//   V_pre3..0   t in [0|4|6|7, 8 + T_CHSH)   precharge of bit j released
//   ch-sh       t in [8, 8 + T_CHSH)          charge sharing
//   en_sample   t in [8, 8 + T_CHSH)          sample-and-hold closed
//   en_acc      t in [8 + T_CHSH, T_MAC)      charge transfer to C_acc
// The edge times 0, 4, 6, 7, 8 come from the paper; T_CHSH = T_ACCP = 1
// tick is this design's choice.
//
// Interface: `start` (while idle) begins an operation and latches `clear`
// (start a new partial sum) and `array_sel`. The multiplies arrive on a
// valid/ready stream (`step_valid/step_ready`, row address and
// sign-magnitude input). A step is taken while waiting or in the last tick
// of the previous multiply, so a steady stream runs one multiply per
// T_MAC cycles; without a valid step the sequencer stalls between
// multiplies with the precharge on. After R_ACC multiplies it pulses
// `adc_start`, waits for `adc_done`, then the registers update (the
// `adc_done` cycle, with `psum_clear` = latched `clear`), the accumulators
// are cleared and `done` pulses. Reset asynchronous, active low.
module imac_timing_ctrl
  import imac_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  // operation
  input  logic              start,
  input  logic              clear,
  input  logic              array_sel,
  output logic              busy,
  output logic              done,
  // multiply stream
  input  logic              step_valid,
  output logic              step_ready,
  input  logic [ROW_W-1:0]  step_row,
  input  smag_t             step_in,
  // to the array and its periphery
  output logic              cur_array,
  output logic [ROW_W-1:0]  cur_row,
  output smag_t             cur_in,
  output logic              computing,   // wordline address and DAC valid
  output mac_strobe_t       strobe,
  output logic              acc_clr,
  output logic              adc_start,
  input  logic              adc_done,
  output logic              psum_valid,
  output logic              psum_clear
);
  typedef enum logic [2:0] {S_IDLE, S_WAIT, S_MAC, S_ADC_GO, S_ADC_WAIT} state_t;

  localparam int unsigned TW = $clog2(T_MAC);
  localparam int unsigned CW = $clog2(R_ACC + 1);

  state_t        state;
  logic [TW-1:0] tick;
  logic [CW-1:0] nmac;       // multiplies finished in this operation
  logic          clear_q;
  logic          last_tick;
  logic          take;

  assign last_tick  = (state == S_MAC) && (tick == TW'(T_MAC - 1));
  assign step_ready = (state == S_WAIT) || (last_tick && (nmac != CW'(R_ACC - 1)));
  assign take       = step_ready && step_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      tick      <= '0;
      nmac      <= '0;
      clear_q   <= 1'b0;
      cur_array <= 1'b0;
      cur_row   <= '0;
      cur_in    <= '0;
    end else begin
      if (take) begin
        cur_row <= step_row;
        cur_in  <= step_in;
      end
      unique case (state)
        S_IDLE: if (start) begin
          clear_q   <= clear;
          cur_array <= array_sel;
          nmac      <= '0;
          state     <= S_WAIT;
        end
        S_WAIT: if (take) begin
          tick  <= '0;
          state <= S_MAC;
        end
        S_MAC: begin
          if (last_tick) begin
            nmac <= nmac + 1'b1;
            tick <= '0;
            if (nmac == CW'(R_ACC - 1)) state <= S_ADC_GO;
            else if (!take)             state <= S_WAIT;
          end else begin
            tick <= tick + 1'b1;
          end
        end
        S_ADC_GO:   state <= S_ADC_WAIT;
        S_ADC_WAIT: if (adc_done) state <= S_IDLE;
        default:    state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    strobe = '0;
    if (state == S_MAC) begin
      strobe.wl        = tick < TW'(T_WL);
      strobe.vpre[3]   = (int'(tick) >= int'(T_PRE3)) && (tick < TW'(T_WL + T_CHSH));
      strobe.vpre[2]   = (int'(tick) >= int'(T_PRE2)) && (tick < TW'(T_WL + T_CHSH));
      strobe.vpre[1]   = (int'(tick) >= int'(T_PRE1)) && (tick < TW'(T_WL + T_CHSH));
      strobe.vpre[0]   = (int'(tick) >= int'(T_PRE0)) && (tick < TW'(T_WL + T_CHSH));
      strobe.ch_sh     = (tick >= TW'(T_WL)) && (tick < TW'(T_WL + T_CHSH));
      strobe.en_sample = strobe.ch_sh;
      strobe.en_acc    = (tick >= TW'(T_WL + T_CHSH));
    end
  end

  assign computing  = (state == S_MAC);
  assign busy       = (state != S_IDLE);
  assign adc_start  = (state == S_ADC_GO);
  assign psum_valid = (state == S_ADC_WAIT) && adc_done;
  assign psum_clear = clear_q;
  assign done       = psum_valid;
  assign acc_clr    = psum_valid || !rst_n;
endmodule
