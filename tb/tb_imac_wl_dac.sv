// tb_imac_wl_dac: every input code against V_WL = 300 mV + code*700/15 mV
// (to 1 uV), and 0 V when disabled.
module tb_imac_wl_dac;
  import imac_pkg::*;
  logic en; logic [3:0] code; uv_t v_wl;
  int checks = 0, failures = 0;
  imac_wl_dac dut (.*);
  initial begin
    #100000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int c = 0; c < 16; c++) begin
      real e;
      e = 300000.0 + real'(c) * 700000.0 / 15.0;
      en = 1; code = 4'(c); #1;
      checks++; if (real'(v_wl) - e > 1.0 || e - real'(v_wl) > 1.0) begin failures++; $display("FAIL code %0d: %0d", c, v_wl); end
      en = 0; #1;
      checks++; if (v_wl != 0) begin failures++; $display("FAIL disabled"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
