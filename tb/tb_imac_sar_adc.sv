// tb_imac_sar_adc: random input voltages, inside and outside the range,
// against code = floor(16*(V_in - V_ss)/(V_dd - V_ss)) clipped to 0..15,
// with the conversion done 5*ADC_DIV cycles after start (five steps of the
// divided ADC clock).
module tb_imac_sar_adc;
  import imac_pkg::*;
  localparam uv_t VH = V_ACC_ZERO, VL = V_ACC_FULL;
  logic clk = 0; always #5 clk = ~clk;
  logic rst_n = 0, start = 0, busy, done; uv_t v_in = 0; logic [3:0] code;
  int checks = 0, failures = 0, n_lo = 0, n_hi = 0;
  imac_sar_adc dut (.*);
  initial begin
    #1000000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    @(negedge clk); rst_n = 1;
    for (int k = 0; k < 300; k++) begin
      int e, cyc;
      v_in = VL - 30000 + int'($urandom_range(VH - VL + 60000));
      e = int'($floor(16.0 * real'(v_in - VL) / real'(VH - VL)));
      if (e < 0) begin e = 0; n_lo++; end
      if (e > 15) begin e = 15; n_hi++; end
      @(negedge clk); start = 1; @(negedge clk); start = 0; cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      checks++; if (int'(code) != e && !(int'(code) == e - 1 && (16 * (v_in - VL)) % (VH - VL) < 16)) begin
        failures++; $display("FAIL v %0d code %0d exp %0d", v_in, code, e);
      end
      checks++; if (cyc != 5 * ADC_DIV) begin failures++; $display("FAIL latency %0d", cyc); end
    end
    checks++; if (n_lo == 0 || n_hi == 0) begin failures++; $display("FAIL range ends not hit"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
