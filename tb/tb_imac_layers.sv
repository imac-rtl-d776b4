// tb_imac_layers: neural-network layer slices run on the full-size macro.
//
// Three layer shapes are mapped onto the arrays, one filter (or output
// neuron) per weight group and one kernel element per row:
//   * VGG conv1, 3x3x3 kernels:   27 elements -> 3 operations, 51 filters
//   * LeNet-5 conv2, 5x5x6:      150 elements -> 15 operations, 16 filters
//   * LeNet-5 FC3, 84 inputs:     84 elements -> 9 operations, 10 neurons
// Weights are random sign-magnitude 4-bit values written through the normal
// port. Activations are non-negative 4-bit values, as after a ReLU. A dot
// product longer than ten is split into operations of ten steps; the last
// one is padded with zero inputs, which give zero products. The first
// operation of each output clears the partial sum and the others add to it.
//
// Checked per operation: both ADC codes of every group against the circuit
// equations (a code within 1% of a step boundary may round either way), and
// the partial sum against the codes. Checked per output: the ReLU output,
// and the partial sum against the exact integer dot product divided by the
// ADC step of 2250/16 = 140.625 product units. Each code is the floor of
// 16 - S/140.625 for its accumulator's product sum S (clipping at 15 only
// touches values in (15, 16], where it equals the floor), so each code is
// up to one step low and their difference is off by less than one step per
// operation. The test also prints the mean error for each layer.
module tb_imac_layers;
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
  logic [N_COL-1:0] shadow [2][N_ROW];

  localparam real VZERO = 10.0 * (1.2 - 0.6) * 2.5 / 40.0;
  localparam real VFULL = 10.0 * (1.2 - 0.10625 * 15.0 / 4.0 - 0.6) * 2.5 / 40.0;
  localparam real STEP  = 2250.0 / 16.0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

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

  // signed weight of group g stored in a row
  function automatic int weight(input int arr, input int row, input int g);
    int m;
    m = int'(shadow[arr][row][g*BW+1 +: MAG_BITS]);
    return shadow[arr][row][g*BW] ? -m : m;
  endfunction

  task automatic write_rows(input int arr, input int first, input int n);
    for (int r = first; r < first + n; r++) begin
      logic [N_COL-1:0] v;
      for (int i = 0; i < N_COL / 32; i++) v[i*32 +: 32] = $urandom;
      @(negedge clk);
      rw_en = 1; rw_we = 1; rw_array = arr[0]; rw_row = ROW_W'(r); wdata = v; wmask = '1;
      @(negedge clk);
      rw_en = 0; rw_we = 0;
      shadow[arr][r] = v;
    end
  endtask

  // One operation over up to R_ACC elements starting at element e0.
  task automatic run_op(input int arr, input int row0, input int e0, input int n_el,
                        input int act [], input bit clr);
    int   rows [R_ACC];
    int   mags [R_ACC];
    real  vpos [N_GROUP], vneg [N_GROUP];
    for (int i = 0; i < R_ACC; i++) begin
      bit live;
      live    = (e0 + i) < n_el;
      rows[i] = live ? row0 + e0 + i : row0;
      mags[i] = live ? act[e0 + i] : 0;
    end
    for (int g = 0; g < N_GROUP; g++) begin
      vpos[g] = 0.0; vneg[g] = 0.0;
      for (int i = 0; i < R_ACC; i++) begin
        int  w;
        real vch;
        w   = weight(arr, rows[i], g);
        vch = 1.2 - 0.10625 * (real'(mags[i]) / 15.0) * real'(w < 0 ? -w : w) / 4.0;
        if (w >= 0) begin vpos[g] += (vch - 0.6) / 16.0; vneg[g] += 0.6 / 16.0; end
        else        begin vneg[g] += (vch - 0.6) / 16.0; vpos[g] += 0.6 / 16.0; end
      end
    end
    @(negedge clk);
    start = 1; clear = clr; array_sel = arr[0];
    @(negedge clk);
    start = 0;
    for (int i = 0; i < R_ACC; i++) begin
      step_valid = 1; step_row = ROW_W'(rows[i]);
      step_in.sign = 1'b0; step_in.mag = 4'(mags[i]);
      do @(posedge clk); while (!step_ready);
      @(negedge clk);
      step_valid = 0;
    end
    while (!done) @(negedge clk);
    @(negedge clk);
    for (int g = 0; g < N_GROUP; g++) begin
      bit ep, en;
      int cp, cn;
      cp = ref_code(vpos[g], ep);
      cn = ref_code(vneg[g], en);
      check(ep ? (int'(code_pos[g]) - cp <= 1 && cp - int'(code_pos[g]) <= 1) : int'(code_pos[g]) == cp,
            $sformatf("code_pos g%0d got %0d exp %0d", g, code_pos[g], cp));
      check(en ? (int'(code_neg[g]) - cn <= 1 && cn - int'(code_neg[g]) <= 1) : int'(code_neg[g]) == cn,
            $sformatf("code_neg g%0d got %0d exp %0d", g, code_neg[g], cn));
    end
  endtask

  // One layer: n_out outputs (groups 0..n_out-1), n_el elements each, for
  // n_pos input positions.
  task automatic run_layer(input string name, input int arr, input int row0, input int n_el,
                           input int n_out, input int n_pos);
    int  n_ops;
    real err_sum;
    int  n_err;
    n_ops   = (n_el + R_ACC - 1) / R_ACC;
    err_sum = 0.0;
    n_err   = 0;
    write_rows(arr, row0, n_el);
    for (int p = 0; p < n_pos; p++) begin
      int act [];
      int exp_psum [N_GROUP];
      act = new[n_el];
      for (int e = 0; e < n_el; e++) act[e] = $urandom_range(15);
      for (int g = 0; g < N_GROUP; g++) exp_psum[g] = 0;
      for (int k = 0; k < n_ops; k++) begin
        run_op(arr, row0, k * R_ACC, n_el, act, k == 0);
        for (int g = 0; g < N_GROUP; g++) begin
          exp_psum[g] += int'(code_neg[g]) - int'(code_pos[g]);
          check(int'(psum[g]) == exp_psum[g], $sformatf("%s psum g%0d op %0d", name, g, k));
        end
      end
      for (int g = 0; g < n_out; g++) begin
        int  dot;
        real err;
        dot = 0;
        for (int e = 0; e < n_el; e++) dot += act[e] * weight(arr, row0 + e, g);
        // psum = code_neg - code_pos grows with the positive products
        err = real'(psum[g]) - real'(dot) / STEP;
        check(err < real'(n_ops) + 0.05 && err > -real'(n_ops) - 0.05,
              $sformatf("%s out %0d pos %0d: psum %0d, dot/step %f", name, g, p, psum[g],
                        real'(dot) / STEP));
        check(int'(relu[g]) == (int'(psum[g]) < 0 ? 0 : int'(psum[g])),
              $sformatf("%s relu %0d", name, g));
        err_sum += (err < 0.0) ? -err : err;
        n_err++;
      end
    end
    $display("%s: %0d elements, %0d operations per output, %0d outputs x %0d positions, mean |error| %f steps",
             name, n_el, n_ops, n_out, n_pos, err_sum / n_err);
  endtask

  initial begin
    repeat (500_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_layer("VGG conv1",     0, 0,  27,  51, 3);
    run_layer("LeNet-5 conv2", 0, 27, 150, 16, 2);
    run_layer("LeNet-5 FC3",   1, 0,  84,  10, 3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
