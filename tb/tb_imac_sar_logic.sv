// tb_imac_sar_logic: an ideal comparator (Comp Out = trial code above the
// target) closes the loop; every target 0..15 must be found, with `done`
// five cycles after `start` (one load cycle and four decisions), and a
// `start` while busy must be ignored. A last pass drives the ADC clock
// enable `ce` every third cycle and expects 15 cycles per conversion.
module tb_imac_sar_logic;
  logic clk = 0; always #5 clk = ~clk;
  logic rst_n = 0, start = 0, ce, comp_out, busy, done;
  logic [3:0] d, code;
  int target;
  int checks = 0, failures = 0;
  imac_sar_logic #(.BITS(4)) dut (.*);
  assign comp_out = int'(d) > target;
  // ADC clock enable: always on for passes 0-2, every third cycle in pass 3
  int pass = 0, phase = 0;
  always @(posedge clk) phase <= (phase + 1) % 3;
  always_comb ce = (pass != 3) || (phase == 2);
  initial begin
    #100000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    @(negedge clk); rst_n = 1;
    for (int rep = 0; rep < 4; rep++)
      for (int t = 0; t < 16; t++) begin
        int cyc;
        target = t; pass = rep;
        if (rep == 3) while (phase != 2) @(negedge clk);
        @(negedge clk); start = 1; @(negedge clk); start = (rep == 2);  // rep 2: start held while busy
        cyc = 1;
        while (!done) begin @(negedge clk); cyc++; end
        start = 0;
        checks++; if (code != 4'(t)) begin failures++; $display("FAIL target %0d got %0d", t, code); end
        checks++; if (cyc != (rep == 3 ? 15 : 5)) begin failures++; $display("FAIL latency %0d", cyc); end
        @(negedge clk);
        if (rep == 2) while (busy || done) @(negedge clk);
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
