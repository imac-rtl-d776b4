// tb_imac_sub_reg_relu: random ADC code pairs accumulated into the partial
// sum (code_neg - code_pos), clears, hold without `valid`, ReLU, and
// saturation at both ends with a narrow 7-bit register.
module tb_imac_sub_reg_relu;
  localparam int W = 7;
  logic clk = 0; always #5 clk = ~clk;
  logic rst_n = 0, valid = 0, clear = 0; logic [3:0] code_pos, code_neg;
  logic signed [W-1:0] psum; logic [W-1:0] relu;
  int checks = 0, failures = 0, n_satp = 0, n_satn = 0;
  imac_sub_reg_relu #(.BITS(4), .PSUM_W(W)) dut (.*);
  initial begin
    #1000000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    int e;
    e = 0;
    @(negedge clk); rst_n = 1;
    for (int k = 0; k < 2000; k++) begin
      int bias;
      bias = (k / 200) % 2;   // alternate long positive and negative runs
      valid = ($urandom % 4) != 0; clear = ($urandom % 60) == 0;
      code_pos = 4'($urandom); code_neg = 4'($urandom);
      if (bias == 1 && code_pos < code_neg) {code_pos, code_neg} = {code_neg, code_pos};
      if (bias == 0 && code_neg < code_pos) {code_pos, code_neg} = {code_neg, code_pos};
      @(negedge clk);
      if (valid) begin
        e = (clear ? 0 : e) + int'(code_neg) - int'(code_pos);
        if (e > 63) begin e = 63; n_satp++; end
        if (e < -64) begin e = -64; n_satn++; end
      end
      checks++; if (int'(psum) != e) begin failures++; $display("FAIL psum %0d exp %0d", psum, e); end
      checks++; if (int'(relu) != (e < 0 ? 0 : e)) begin failures++; $display("FAIL relu"); end
    end
    checks++; if (n_satp == 0 || n_satn == 0) begin failures++; $display("FAIL saturation not reached"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
