// tb_imac_cap_dac: every code against V_x = V_ss + D*(V_dd - V_ss)/16, and
// the MSB trial at the mid-point (V_dd + V_ss)/2.
module tb_imac_cap_dac;
  import imac_pkg::*;
  localparam uv_t VH = 375000, VL = 125000;
  logic [3:0] d; uv_t v_x;
  int checks = 0, failures = 0;
  imac_cap_dac #(.BITS(4), .V_REFH(VH), .V_REFL(VL)) dut (.*);
  initial begin
    #100000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int c = 0; c < 16; c++) begin
      d = 4'(c); #1;
      checks++; if (v_x != VL + c * (VH - VL) / 16) begin failures++; $display("FAIL code %0d: %0d", c, v_x); end
    end
    d = 4'b1000; #1;
    checks++; if (v_x != (VH + VL) / 2) begin failures++; $display("FAIL midpoint"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
