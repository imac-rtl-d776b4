// tb_imac_bank: one full-size array bank. Writes random weights, reads
// them back, then runs single multiplies with the paper's strobe timing on
// random rows and inputs and checks V_ch-sh of all 51 weight groups
// against V_DD - 106.25 mV*(Vin/15)*W/4 (within 30 uV) and the weight sign
// read from each group's sign column.
module tb_imac_bank;
  import imac_pkg::*;
  logic clk = 0; always #5 clk = ~clk;
  logic [ROW_W-1:0] row = '0; logic rw_en = 0, we = 0, cmp_en = 0, wl_pulse = 0, ch_sh = 0;
  logic [N_COL-1:0] wdata = '0, wmask = '0, rdata;
  logic [3:0] vin_mag = '0, vpre = '0;
  uv_t v_chsh [N_GROUP]; logic [N_GROUP-1:0] w_sign;
  logic [N_COL-1:0] shadow [N_ROW];
  int checks = 0, failures = 0;
  imac_bank dut (.*);
  task automatic chk(input bit ok, input string s);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", s); end
  endtask
  initial begin
    #10000000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int r = 0; r < N_ROW; r++) begin
      for (int i = 0; i < N_COL / 32; i++) shadow[r][i*32 +: 32] = $urandom;
      @(negedge clk); row = ROW_W'(r); rw_en = 1; we = 1; wdata = shadow[r]; wmask = '1;
    end
    @(negedge clk); rw_en = 0; we = 0;
    for (int k = 0; k < 30; k++) begin
      int r;
      r = $urandom_range(N_ROW - 1);
      @(negedge clk); row = ROW_W'(r); rw_en = 1; #1;
      chk(rdata == shadow[r], "normal read");
    end
    @(negedge clk); rw_en = 0;
    for (int k = 0; k < 40; k++) begin
      int r, vin;
      r = $urandom_range(N_ROW - 1); vin = (k < 2) ? 15 * k : $urandom_range(15);
      row = ROW_W'(r); vin_mag = 4'(vin); cmp_en = 1;
      for (int t = 0; t < 10; t++) begin
        wl_pulse = t < 8;
        vpre = {t < 9, t >= 4 && t < 9, t >= 6 && t < 9, t >= 7 && t < 9};
        ch_sh = (t == 8);
        if (t == 0) begin
          #1;
          for (int g = 0; g < N_GROUP; g++) chk(w_sign[g] == shadow[r][g*BW], "weight sign");
        end
        if (t == 8) begin
          #1;
          for (int g = 0; g < N_GROUP; g++) begin
            real e;
            e = 1200000.0 - 106250.0 * (real'(vin) / 15.0) * real'(shadow[r][g*BW+1 +: 4]) / 4.0;
            chk(real'(v_chsh[g]) - e < 30.0 && e - real'(v_chsh[g]) < 30.0,
                $sformatf("v_chsh g%0d %0d exp %f", g, v_chsh[g], e));
          end
        end
        @(negedge clk);
      end
      cmp_en = 0; vpre = '0; ch_sh = 0; wl_pulse = 0;
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
