// tb_imac_bitline_group: drives one functional read with the paper's timing
// (wordline 8 tau, precharge of bits 3..0 released at 0, 4, 6, 7 tau,
// charge sharing at 8 tau) for every input and weight, and checks the
// charge-shared voltage against V_DD - 106.25 mV*(Vin/15)*W/4 (within 20 uV),
// and that the bitlines are back at V_DD after the precharge returns.
module tb_imac_bitline_group;
  import imac_pkg::*;
  logic clk = 0; always #5 clk = ~clk;
  logic [3:0] q = '0, vpre = '0; logic wl_on = 0, ch_sh = 0; uv_t v_wl = 0, v_chsh;
  int checks = 0, failures = 0;
  imac_bitline_group dut (.*);
  initial begin
    #10000000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (2) @(negedge clk);
    for (int vin = 0; vin < 16; vin++)
      for (int w = 0; w < 16; w++) begin
        real e;
        q = 4'(w);
        for (int t = 0; t < 10; t++) begin
          wl_on = t < 8;
          v_wl  = wl_on ? 300000 + (vin * 700000 + 7) / 15 : 0;
          vpre  = {t >= 0 && t < 9, t >= 4 && t < 9, t >= 6 && t < 9, t >= 7 && t < 9};
          ch_sh = (t == 8);
          if (t == 8) begin
            #1 e = 1200000.0 - 106250.0 * (real'(vin) / 15.0) * real'(w) / 4.0;
            checks++;
            if (real'(v_chsh) - e > 20.0 || e - real'(v_chsh) > 20.0) begin
              failures++; $display("FAIL vin %0d w %0d: %0d exp %f", vin, w, v_chsh, e);
            end
          end
          @(negedge clk);
        end
        vpre = '0; wl_on = 0; ch_sh = 0;
        @(negedge clk);
        checks++; if (v_chsh != V_DD) begin failures++; $display("FAIL precharge"); end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
