// tb_imac_column_periph: drives ten multiplies into the peripherals of one
// weight group with random V_ch-sh levels and signs, starts the ADCs, and
// checks both codes (from dV_acc = (V - 0.6 V)/16 and the 4-bit range
// between ten zero and ten full-scale products), the partial sum
// code_neg - code_pos with and without clear, and the ReLU output.
module tb_imac_column_periph;
  import imac_pkg::*;
  logic clk = 0; always #5 clk = ~clk;
  logic rst_n = 0, wl = 0, in_sign = 0, w_sign = 0, en_sample = 0, en_acc = 0;
  logic acc_clr = 0, adc_start = 0, psum_valid = 0, psum_clear = 0, adc_done, prod_sign, acc_sat;
  uv_t v_chsh = V_DD;
  logic [3:0] code_pos, code_neg;
  logic signed [PSUM_W-1:0] psum; logic [PSUM_W-1:0] relu;
  int checks = 0, failures = 0, n_neg_sum = 0;
  imac_column_periph dut (.*);

  localparam real VZ = 0.375e6, VF = 10.0 * (1.2e6 - 398437.5 - 0.6e6) / 16.0;
  function automatic int code_of(input real v);
    int c;
    c = int'($floor(16.0 * (v - VF) / (VZ - VF)));
    return c > 15 ? 15 : (c < 0 ? 0 : c);
  endfunction
  task automatic chk(input bit ok, input string s);
    checks++; if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask
  initial begin
    #1000000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    int e;
    e = 0;
    acc_clr = 1;
    @(negedge clk); rst_n = 1; @(negedge clk); acc_clr = 0;
    for (int op = 0; op < 40; op++) begin
      real vp, vn;
      int cp, cn;
      vp = 0; vn = 0;
      for (int i = 0; i < R_ACC; i++) begin
        in_sign = 1'($urandom); w_sign = (op % 4 == 3) ? ~in_sign : 1'($urandom);
        v_chsh = V_DD - int'($urandom_range(398437));
        wl = 1; @(negedge clk); wl = 0;
        chk(prod_sign == (in_sign ^ w_sign), "product sign");
        en_sample = 1; @(negedge clk); en_sample = 0;
        en_acc = 1; @(negedge clk); en_acc = 0;
        if (in_sign ^ w_sign) begin vn += real'(v_chsh - 600000) / 16.0; vp += 37500.0; end
        else                  begin vp += real'(v_chsh - 600000) / 16.0; vn += 37500.0; end
      end
      adc_start = 1; @(negedge clk); adc_start = 0;
      while (!adc_done) @(negedge clk);
      cp = code_of(vp); cn = code_of(vn);
      chk(code_pos >= 4'(cp - 1) && code_pos <= 4'(cp) && (code_pos == 4'(cp) || (16.0 * (vp - VF) / (VZ - VF)) - cp < 0.01),
          $sformatf("code_pos %0d exp %0d", code_pos, cp));
      chk(code_neg == 4'(cn) || (code_neg == 4'(cn - 1) && (16.0 * (vn - VF) / (VZ - VF)) - cn < 0.01),
          $sformatf("code_neg %0d exp %0d", code_neg, cn));
      psum_valid = 1; psum_clear = (op % 5 == 0);
      e = (psum_clear ? 0 : e) + int'(code_neg) - int'(code_pos);
      @(negedge clk); psum_valid = 0;
      acc_clr = 1; @(negedge clk); acc_clr = 0;
      chk(int'(psum) == e && int'(relu) == (e < 0 ? 0 : e), $sformatf("psum %0d exp %0d", psum, e));
      if (e < 0) n_neg_sum++;
      chk(!acc_sat, "no saturation");
    end
    chk(n_neg_sum > 0, "negative partial sum seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
