// tb_imac_row_decoder: exhaustive check of the row decoder: every address
// with enable gives exactly that one row; disabled gives no row.
module tb_imac_row_decoder;
  localparam int N = 256;
  logic en; logic [7:0] addr; logic [N-1:0] sel;
  int checks = 0, failures = 0;
  imac_row_decoder #(.N_ROW(N)) dut (.*);
  initial begin
    #100000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int a = 0; a < N; a++) begin
      logic [N-1:0] e;
      e = '0; e[a] = 1'b1;
      en = 1; addr = 8'(a); #1;
      checks++; if (sel !== e) begin failures++; $display("FAIL addr %0d", a); end
      en = 0; #1;
      checks++; if (sel !== '0) begin failures++; $display("FAIL disabled %0d", a); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
