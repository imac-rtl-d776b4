// tb_imac_timing_ctrl: checks every strobe of each multiply tick by tick
// against the timing diagram (WL 0-8, V_pre3/2/1/0 released at 0/4/6/7
// until 9, ch-sh and en_sample at 8, en_acc at 9), the row and input
// handed on, ten multiplies per operation, stalls of the step stream,
// the ADC handshake (a model ADC answers five cycles after its start),
// `psum_clear`, `done` and the cycle count of an operation.
module tb_imac_timing_ctrl;
  import imac_pkg::*;
  logic clk = 0; always #5 clk = ~clk;
  logic rst_n = 0, start = 0, clear = 0, array_sel = 0, busy, done;
  logic step_valid = 0, step_ready; logic [ROW_W-1:0] step_row = '0; smag_t step_in = '0;
  logic cur_array, computing, acc_clr, adc_start, adc_done, psum_valid, psum_clear;
  logic [ROW_W-1:0] cur_row; smag_t cur_in; mac_strobe_t strobe;
  int checks = 0, failures = 0, n_stall = 0;
  imac_timing_ctrl dut (.*);

  // model ADC: done five cycles after start
  logic [4:0] adc_pipe;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) adc_pipe <= '0; else adc_pipe <= {adc_pipe[3:0], adc_start};
  assign adc_done = adc_pipe[4];

  task automatic chk(input bit ok, input string s);
    checks++; if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask
  initial begin
    #1000000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // tick-by-tick strobe check, independent of the controller's counter
  int tick = -1;
  always @(negedge clk) begin
    if (computing) begin
      tick = (tick + 1) % 10;
      chk(strobe.wl == (tick < 8), $sformatf("wl t%0d", tick));
      chk(strobe.vpre == {1'b1 && tick < 9, tick >= 4 && tick < 9, tick >= 6 && tick < 9, tick >= 7 && tick < 9},
          $sformatf("vpre t%0d", tick));
      chk(strobe.ch_sh == (tick == 8) && strobe.en_sample == (tick == 8), $sformatf("ch_sh t%0d", tick));
      chk(strobe.en_acc == (tick == 9), $sformatf("en_acc t%0d", tick));
    end else begin
      tick = -1;
      chk(strobe == '0, "no strobes outside a multiply");
    end
  end

  initial begin
    @(negedge clk); rst_n = 1;
    for (int op = 0; op < 6; op++) begin
      int t0, nsteps;
      bit stall_op;
      stall_op = op >= 3;
      @(negedge clk); start = 1; clear = op[0]; array_sel = op[1];
      t0 = $time / 10;
      @(negedge clk); start = 0;
      chk(busy && cur_array == op[1], "busy and array latched");
      nsteps = 0;
      while (!done) begin
        if (stall_op && ($urandom % 3 == 0)) begin
          step_valid = 0;
          @(negedge clk);
          if (step_ready) n_stall++;
          continue;
        end
        step_valid = nsteps < R_ACC; step_row = ROW_W'($urandom); step_in = smag_t'($urandom);
        @(posedge clk);
        if (step_valid && step_ready) begin
          logic [ROW_W-1:0] r; smag_t i;
          r = step_row; i = step_in;
          nsteps++;
          @(negedge clk);
          step_valid = 0;
          chk(cur_row == r && cur_in == i && computing, "step handed on");
        end else @(negedge clk);
      end
      chk(nsteps == R_ACC, "ten multiplies");
      chk(psum_valid && psum_clear == op[0] && acc_clr, "update strobes");
      if (!stall_op) chk($time / 10 - t0 == 2 + R_ACC * T_MAC + 1 + 5 - 1, $sformatf("latency %0d", $time / 10 - t0));
      @(negedge clk);
      chk(!busy, "idle after done");
    end
    chk(n_stall > 0, "stalls seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
