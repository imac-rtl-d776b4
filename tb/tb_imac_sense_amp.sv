// tb_imac_sense_amp: Comp Out is high exactly when V_x (+) is above V_acc (-).
module tb_imac_sense_amp;
  import imac_pkg::*;
  uv_t v_plus, v_minus; logic comp_out;
  int checks = 0, failures = 0;
  imac_sense_amp dut (.*);
  initial begin
    #100000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int k = 0; k < 500; k++) begin
      v_plus = int'($urandom_range(400000)); v_minus = (k % 5 == 0) ? v_plus : int'($urandom_range(400000)); #1;
      checks++; if (comp_out != (v_plus > v_minus)) begin failures++; $display("FAIL %0d %0d", v_plus, v_minus); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
