// tb_imac_sign_steer: the product sign is the XOR of the two signs, taken
// while the wordline is on and held afterwards; the accumulator selects
// follow it.
module tb_imac_sign_steer;
  logic clk = 0; always #5 clk = ~clk;
  logic rst_n = 0, wl = 0, in_sign = 0, w_sign = 0, prod_sign, sel_pos, sel_neg;
  int checks = 0, failures = 0;
  imac_sign_steer dut (.*);
  task automatic chk(input bit ok, input string s);
    checks++; if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask
  initial begin
    #100000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    @(negedge clk); rst_n = 1;
    for (int k = 0; k < 200; k++) begin
      logic e;
      in_sign = 1'($urandom); w_sign = 1'($urandom); e = in_sign ^ w_sign;
      wl = 1; @(negedge clk);
      chk(prod_sign == e && sel_neg == e && sel_pos == !e, "captured");
      wl = 0; in_sign = !in_sign; @(negedge clk);
      chk(prod_sign == e, "held after wordline");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
