// tb_imac_top: end-to-end test of the in-SRAM multiply-accumulate macro at its
// default size (two 256x256 arrays, 51 weight groups per row).
//
// Fills both arrays through the normal write port, checks normal reads and
// masked writes, then runs compute operations with random rows, random
// sign-magnitude inputs and random gaps in the input stream. Every ADC code,
// partial sum and ReLU output is compared with a reference worked out here
// from the circuit equations in real arithmetic:
//   V_ch-sh = 1.2 V - 0.10625 V * (Vin/15) * W / 4
//   dV_acc  = (V_sample - 0.6 V) * 2.5 fF / 40 fF
//   code    = floor(16 * (V_acc - V_full) / (V_zero - V_full)), clipped to 0..15
// A code within 1% of an LSB boundary may round either way. The latency of
// an operation with a steady stream is checked against 10 multiplies of 10
// ticks plus the 50-tick conversion. Each mechanism (stall, negative product, both arrays,
// partial-sum accumulation, ReLU clamp, ADC clipping, access blocked while
// busy, masked write) must occur at least once.
module tb_imac_top;
  import imac_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                     rw_en = 0, rw_we = 0, rw_array = 0;
  logic [ROW_W-1:0]         rw_row = '0;
  logic [N_COL-1:0]         wdata = '0, wmask = '0, rdata;
  logic                     rw_ready;
  logic                     start = 0, clear = 0, array_sel = 0, busy, done;
  logic                     step_valid = 0, step_ready;
  logic [ROW_W-1:0]         step_row = '0;
  smag_t                    step_in = '0;
  logic signed [PSUM_W-1:0] psum [N_GROUP];
  logic        [PSUM_W-1:0] relu [N_GROUP];
  logic [ADC_BITS-1:0]      code_pos [N_GROUP], code_neg [N_GROUP];
  logic [N_GROUP-1:0]       prod_sign, acc_sat;

  imac_top dut (.*);

  int checks = 0, failures = 0;
  int n_stall = 0, n_neg = 0, n_arr [2] = '{0, 0}, n_accum = 0, n_relu_clamp = 0,
      n_clip = 0, n_blocked = 0, n_masked = 0, n_read = 0, n_lat = 0;

  logic [N_COL-1:0] shadow [2][N_ROW];
  int               exp_psum [N_GROUP];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  function automatic logic [N_COL-1:0] rand_row();
    logic [N_COL-1:0] v;
    for (int i = 0; i < N_COL / 32; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  task automatic sram_write(input int arr, input int row, input logic [N_COL-1:0] d,
                            input logic [N_COL-1:0] m);
    @(negedge clk);
    rw_en = 1; rw_we = 1; rw_array = arr[0]; rw_row = ROW_W'(row); wdata = d; wmask = m;
    @(negedge clk);
    rw_en = 0; rw_we = 0;
    shadow[arr][row] = (shadow[arr][row] & ~m) | (d & m);
  endtask

  task automatic sram_read_check(input int arr, input int row);
    @(negedge clk);
    rw_en = 1; rw_we = 0; rw_array = arr[0]; rw_row = ROW_W'(row);
    #1 check(rdata == shadow[arr][row], $sformatf("read arr %0d row %0d", arr, row));
    n_read++;
    @(negedge clk);
    rw_en = 0;
  endtask

  // Reference: expected code from the accumulated voltage; returns -1 if the
  // value sits on an LSB boundary (either neighbour accepted).
  localparam real VZERO = 10.0 * (1.2 - 0.6) * 2.5 / 40.0;
  localparam real VFULL = 10.0 * (1.2 - 0.10625 * 15.0 / 4.0 - 0.6) * 2.5 / 40.0;

  function automatic int ref_code(input real v, output bit edge_case);
    real x;
    int  c;
    x = 16.0 * (v - VFULL) / (VZERO - VFULL);
    c = $rtoi($floor(x));
    edge_case = ((x - $floor(x)) < 0.01 || (x - $floor(x)) > 0.99) && x > 0.5 && x < 15.5;
    if (c > 15) c = 15;
    if (c < 0) c = 0;
    return c;
  endfunction

  task automatic run_op(input int arr, input bit clr, input int zero_inputs);
    int   rows [R_ACC];
    smag_t ins [R_ACC];
    real  vpos [N_GROUP], vneg [N_GROUP];
    int   t0, t1, gaps;
    bit   any_neg;

    for (int i = 0; i < R_ACC; i++) begin
      rows[i] = $urandom_range(N_ROW - 1);
      ins[i].sign = 1'($urandom);
      ins[i].mag  = zero_inputs ? 4'(0) : 4'($urandom);
    end
    for (int g = 0; g < N_GROUP; g++) begin
      vpos[g] = 0.0; vneg[g] = 0.0;
      for (int i = 0; i < R_ACC; i++) begin
        int  w;
        bit  s;
        real vch;
        w   = int'(shadow[arr][rows[i]][g*BW+1 +: MAG_BITS]);
        s   = ins[i].sign ^ shadow[arr][rows[i]][g*BW];
        vch = 1.2 - 0.10625 * (real'(ins[i].mag) / 15.0) * real'(w) / 4.0;
        if (!s) begin vpos[g] += (vch - 0.6) / 16.0; vneg[g] += 0.6 / 16.0; end
        else    begin vneg[g] += (vch - 0.6) / 16.0; vpos[g] += 0.6 / 16.0; end
      end
    end

    @(negedge clk);
    start = 1; clear = clr; array_sel = arr[0];
    t0 = $time / 10;
    @(negedge clk);
    start = 0;
    gaps = 0;
    any_neg = 0;
    for (int i = 0; i < R_ACC; i++) begin
      // random gap before some steps
      if (($urandom % 4) == 0 && !zero_inputs) begin
        step_valid = 0;
        repeat ($urandom_range(3, 1)) begin
          @(negedge clk);
          if (step_ready) begin n_stall++; gaps++; end
        end
      end
      step_valid = 1; step_row = ROW_W'(rows[i]); step_in = ins[i];
      do @(posedge clk); while (!step_ready);
      @(negedge clk);
      step_valid = 0;
      // product sign is captured while the wordline is on
      repeat (T_WL) @(negedge clk);
      for (int g = 0; g < N_GROUP; g++)
        if (prod_sign[g]) any_neg = 1;
      check(prod_sign[0] == (ins[i].sign ^ shadow[arr][rows[i]][0]), "product sign group 0");
      // normal access is refused while an operation runs
      check(rw_ready == 1'b0, "rw_ready low while busy");
      n_blocked++;
    end
    if (any_neg) n_neg++;
    while (!done) @(negedge clk);
    t1 = $time / 10;
    if (gaps == 0) begin
      // start cycle, one wait cycle, R multiplies, five ADC steps
      check(t1 - t0 == 2 + R_ACC * T_MAC + 5 * ADC_DIV,
            $sformatf("latency %0d", t1 - t0));
      n_lat++;
    end
    @(negedge clk);
    n_arr[arr]++;
    if (!clr) n_accum++;
    for (int g = 0; g < N_GROUP; g++) begin
      bit ep, en;
      int cp, cn;
      cp = ref_code(vpos[g], ep);
      cn = ref_code(vneg[g], en);
      check(ep ? (int'(code_pos[g]) - cp <= 1 && cp - int'(code_pos[g]) <= 1) : int'(code_pos[g]) == cp,
            $sformatf("code_pos g%0d got %0d exp %0d", g, code_pos[g], cp));
      check(en ? (int'(code_neg[g]) - cn <= 1 && cn - int'(code_neg[g]) <= 1) : int'(code_neg[g]) == cn,
            $sformatf("code_neg g%0d got %0d exp %0d", g, code_neg[g], cn));
      if (16.0 * (vpos[g] - VFULL) / (VZERO - VFULL) > 15.99 && code_pos[g] == 4'd15) n_clip++;
      // partial sum follows from the codes actually produced
      exp_psum[g] = (clr ? 0 : exp_psum[g]) + int'(code_neg[g]) - int'(code_pos[g]);
      check(int'(psum[g]) == exp_psum[g], $sformatf("psum g%0d", g));
      check(int'(relu[g]) == (exp_psum[g] < 0 ? 0 : exp_psum[g]), $sformatf("relu g%0d", g));
      if (exp_psum[g] < 0) n_relu_clamp++;
      check(acc_sat[g] == 1'b0, "accumulator stayed below V_th");
    end
  endtask

  initial begin
    repeat (1_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    // fill both arrays
    for (int a = 0; a < 2; a++)
      for (int r = 0; r < N_ROW; r++) begin
        shadow[a][r] = '0;
        sram_write(a, r, rand_row(), '1);
      end
    // masked writes
    for (int k = 0; k < 20; k++) begin
      sram_write(k % 2, $urandom_range(N_ROW - 1), rand_row(), rand_row());
      n_masked++;
    end
    for (int k = 0; k < 40; k++) sram_read_check(k % 2, $urandom_range(N_ROW - 1));

    for (int g = 0; g < N_GROUP; g++) exp_psum[g] = 0;
    run_op(0, 1, 0);
    run_op(1, 1, 0);
    run_op(0, 0, 0);
    run_op(1, 0, 1);   // zero inputs: empty sums, ADC at its top code
    for (int k = 0; k < 8; k++) run_op($urandom_range(1), k % 3 == 0, 0);

    // arrays untouched by computing
    for (int k = 0; k < 20; k++) sram_read_check(k % 2, $urandom_range(N_ROW - 1));

    check(n_stall > 0, "stall seen");
    check(n_neg > 0, "negative product seen");
    check(n_arr[0] > 0 && n_arr[1] > 0, "both arrays computed");
    check(n_accum > 0, "partial sum accumulated");
    check(n_relu_clamp > 0, "ReLU clamped a negative sum");
    check(n_clip > 0, "ADC clipped at full scale");
    check(n_blocked > 0, "normal access blocked while busy");
    check(n_masked > 0 && n_read > 0, "masked write and read");
    check(n_lat > 0, "latency measured");
    $display("mechanisms: stall=%0d neg=%0d arr0=%0d arr1=%0d accum=%0d relu_clamp=%0d clip=%0d blocked=%0d masked=%0d read=%0d",
             n_stall, n_neg, n_arr[0], n_arr[1], n_accum, n_relu_clamp, n_clip, n_blocked, n_masked, n_read);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
