// tb_imac_analog_acc: random sample/transfer sequences against
// dV_acc = 2.5/40 * (V_sample - 0.6 V) (within 2 uV per step), zero-product
// samples (V_DD) when not selected, no transfer below threshold, clear,
// and the saturation flag once V_acc has passed the threshold.
module tb_imac_analog_acc;
  import imac_pkg::*;
  logic clk = 0; always #5 clk = ~clk;
  logic clr = 1, sel = 0, en_sample = 0, en_acc = 0, sat; uv_t v_in = 0, v_acc;
  int checks = 0, failures = 0;
  imac_analog_acc dut (.*);
  task automatic chk(input bit ok, input string s);
    checks++; if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask
  initial begin
    #10000000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    real e;
    int n;
    @(negedge clk); @(negedge clk); clr = 0;
    for (int rep = 0; rep < 40; rep++) begin
      e = 0.0;
      n = 10 + (rep % 3 == 0 ? 40 : 0);   // some runs go past the threshold
      for (int k = 0; k < n; k++) begin
        sel = 1'($urandom); v_in = 500000 + int'($urandom_range(700000));
        en_sample = 1; @(negedge clk); en_sample = 0;
        en_acc = 1; @(negedge clk); en_acc = 0;
        if (e <= 600000.0) chk(sat == 1'b0, "no saturation below V_th");
        if (sel) e += (v_in > 600000) ? real'(v_in - 600000) / 16.0 : 0.0;
        else     e += 600000.0 / 16.0;
        chk(real'(v_acc) - e < 2.0 * (k + 1) && e - real'(v_acc) < 2.0 * (k + 1),
            $sformatf("v_acc %0d exp %f", v_acc, e));
      end
      if (n > 20) chk(sat == 1'b1, "saturation flagged");
      clr = 1; @(negedge clk); clr = 0;
      chk(v_acc == 0 && sat == 0, "clear");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
