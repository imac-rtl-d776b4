// tb_imac_sram_array: the 6T array at full size: full and masked row
// writes against a shadow copy, reads of random rows, no write without
// `we`, and no row selected gives an all-zero row_q.
module tb_imac_sram_array;
  localparam int NR = 256, NC = 256;
  logic clk = 0; always #5 clk = ~clk;
  logic [NR-1:0] wl = '0; logic we = 0;
  logic [NC-1:0] wdata = '0, wmask = '0, rdata, row_q;
  logic [NC-1:0] shadow [NR];
  int checks = 0, failures = 0;
  imac_sram_array #(.N_ROW(NR), .N_COL(NC)) dut (.*);

  function automatic logic [NC-1:0] rnd();
    logic [NC-1:0] v;
    for (int i = 0; i < NC/32; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction
  task automatic wr(input int r, input logic [NC-1:0] d, input logic [NC-1:0] m, input bit e);
    @(negedge clk); wl = '0; wl[r] = 1; we = e; wdata = d; wmask = m;
    @(negedge clk); we = 0; wl = '0;
    if (e) shadow[r] = (shadow[r] & ~m) | (d & m);
  endtask
  task automatic rd(input int r);
    @(negedge clk); wl = '0; wl[r] = 1; #1;
    checks++; if (rdata !== shadow[r] || row_q !== shadow[r]) begin failures++; $display("FAIL row %0d", r); end
    wl = '0;
  endtask
  initial begin
    #10000000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int r = 0; r < NR; r++) wr(r, rnd(), '1, 1);
    for (int r = 0; r < NR; r++) rd(r);
    for (int k = 0; k < 200; k++) wr($urandom_range(NR-1), rnd(), rnd(), 1);
    for (int k = 0; k < 50; k++)  wr($urandom_range(NR-1), rnd(), '1, 0);
    for (int r = 0; r < NR; r++) rd(r);
    @(negedge clk); wl = '0; #1;
    checks++; if (row_q !== '0) begin failures++; $display("FAIL idle row_q"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
