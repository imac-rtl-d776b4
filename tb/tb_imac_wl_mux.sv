// tb_imac_wl_mux: normal access drives the selected line at V_DD, compute
// mode drives it at the DAC level only during the wordline pulse, and no
// line is on otherwise.
module tb_imac_wl_mux;
  import imac_pkg::*;
  localparam int N = 16;
  logic [N-1:0] sel, wl; logic rw_en, wl_pulse; uv_t v_dac, v_wl;
  int checks = 0, failures = 0;
  imac_wl_mux #(.N_ROW(N)) dut (.*);
  task automatic chk(input bit ok, input string s);
    checks++; if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask
  initial begin
    #100000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int k = 0; k < 50; k++) begin
      sel = '0; sel[$urandom_range(N-1)] = 1; v_dac = 300000 + int'($urandom_range(700000));
      rw_en = 1; wl_pulse = 0; #1;
      chk(wl == sel && v_wl == V_DD, "normal access");
      rw_en = 0; wl_pulse = 1; #1;
      chk(wl == sel && v_wl == v_dac, "compute pulse");
      rw_en = 0; wl_pulse = 0; #1;
      chk(wl == '0 && v_wl == 0, "idle");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
