// imac_sar_logic: successive-approximation register of the SAR ADC.
//
// The logic steps on the ADC clock, given here as the clock enable `ce`.
// After `start`, at the first enabled edge from the start cycle on, it
// loads the trial code 1000 (MSB set, all others clear), which the
// capacitor DAC turns into V_x. At each of the next BITS enabled edges it
// reads the comparator: if Comp Out is 0 (input above V_x) the bit under
// test stays 1, otherwise it is cleared; then the next lower bit is set for
// trial. After the LSB has been decided `done` pulses for one cycle and
// `code` holds the result until the next `start`. A conversion thus takes
// one load step and BITS decision steps: 5 ADC clocks for the paper's
// 4-bit ADC, or 5 cycles with `ce` held high.
//
// The bit-by-bit procedure is the paper's; the load step, the clock enable
// and the start/done handshake are this design's choice. `start` while
// busy is ignored; a `start` that arrives between ADC clocks is held until
// the next one. Reset is asynchronous, active low.
module imac_sar_logic #(
  parameter int unsigned BITS = imac_pkg::ADC_BITS
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic            ce,         // ADC clock enable
  input  logic            comp_out,   // 1: V_x above the input, clear the bit
  output logic [BITS-1:0] d,          // trial code to the DAC
  output logic [BITS-1:0] code,       // result
  output logic            busy,
  output logic            done
);
  localparam int unsigned IW = (BITS > 1) ? $clog2(BITS) : 1;
  logic [IW-1:0] idx;   // bit under test
  logic          pend;  // start seen, load not yet done

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      d    <= '0;
      code <= '0;
      idx  <= '0;
      busy <= 1'b0;
      done <= 1'b0;
      pend <= 1'b0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if ((start || pend) && !ce) pend <= 1'b1;
        if ((start || pend) && ce) begin
          pend       <= 1'b0;
          d          <= '0;
          d[BITS-1]  <= 1'b1;
          idx        <= IW'(BITS - 1);
          busy       <= 1'b1;
        end
      end else if (ce) begin
        if (comp_out) d[idx] <= 1'b0;
        if (idx == '0) begin
          busy <= 1'b0;
          done <= 1'b1;
          code <= comp_out ? (d & ~(BITS'(1))) : d;
        end else begin
          d[idx - 1'b1] <= 1'b1;
          idx           <= idx - 1'b1;
        end
      end
    end
  end
endmodule
