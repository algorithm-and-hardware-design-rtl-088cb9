// tb_neuron_array: drives a discontinuous (SNN-DC) and a continuous (SNN-CT)
// neuron array with the same random biases, weight words and time steps and
// compares their firing vectors with an integer reference of the neuron
// equations (restart or carry-over of the potential, strict v > theta,
// subtract theta on a spike in CT mode, saturation at POT_W bits). Long runs
// of large weights drive potentials into both saturation limits.
module tb_neuron_array;
  import snn_pkg::*;
  localparam int N = 8;
  localparam int THETA = THETA_DEFAULT;

  logic clk = 1'b0, rst_n = 1'b0;
  logic bias_we = 1'b0, start = 1'b0, first = 1'b0, acc_en = 1'b0, fire = 1'b0;
  logic [N*WEIGHT_W-1:0] bias_wdata = '0, weights = '0;
  logic [N-1:0] spikes_dc, spikes_ct;
  int checks = 0, failures = 0;
  int b [N];
  int v_dc [N], v_ct [N];
  int n_sat = 0;

  neuron_array #(.N(N), .MODE(NEURON_DC)) dut_dc (
    .clk, .rst_n, .bias_we, .bias_wdata, .start, .first, .acc_en, .weights, .fire,
    .spikes (spikes_dc));
  neuron_array #(.N(N), .MODE(NEURON_CT)) dut_ct (
    .clk, .rst_n, .bias_we, .bias_wdata, .start, .first, .acc_en, .weights, .fire,
    .spikes (spikes_ct));

  always #5 clk = ~clk;

  function automatic int sat(int x);
    int hi = (1 << (POT_W - 1)) - 1;
    int lo = -(1 << (POT_W - 1));
    if (x > hi) begin n_sat++; return hi; end
    if (x < lo) begin n_sat++; return lo; end
    return x;
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic do_step(bit f, int n_acc, int bias_lo, int bias_hi);
    int w;
    @(negedge clk);
    start = 1'b1; first = f;
    for (int k = 0; k < N; k++) begin
      v_dc[k] = sat(b[k]);
      v_ct[k] = sat((f ? 0 : v_ct[k]) + b[k]);
    end
    @(negedge clk); start = 1'b0;
    for (int a = 0; a < n_acc; a++) begin
      for (int k = 0; k < N; k++) begin
        w = $urandom_range(bias_hi - bias_lo) + bias_lo;
        weights[k*WEIGHT_W +: WEIGHT_W] = WEIGHT_W'(w);
        v_dc[k] = sat(v_dc[k] + w);
        v_ct[k] = sat(v_ct[k] + w);
      end
      acc_en = 1'b1;
      @(negedge clk);
      acc_en = 1'b0;
    end
    fire = 1'b1;
    @(negedge clk); fire = 1'b0;
    for (int k = 0; k < N; k++) begin
      checks += 2;
      if (spikes_dc[k] !== (v_dc[k] > THETA)) begin
        failures++; $display("FAIL DC neuron %0d v=%0d spike=%b", k, v_dc[k], spikes_dc[k]);
      end
      if (spikes_ct[k] !== (v_ct[k] > THETA)) begin
        failures++; $display("FAIL CT neuron %0d v=%0d spike=%b", k, v_ct[k], spikes_ct[k]);
      end
      if (v_ct[k] > THETA) v_ct[k] -= THETA;
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < N; k++) begin
      b[k] = $urandom_range(127) - 64;
      bias_wdata[k*WEIGHT_W +: WEIGHT_W] = WEIGHT_W'(b[k]);
    end
    @(negedge clk); bias_we = 1'b1;
    @(negedge clk); bias_we = 1'b0;
    for (int k = 0; k < N; k++) begin v_dc[k] = 0; v_ct[k] = 0; end
    // Random samples of 1..8 time steps with small weight sums.
    for (int s = 0; s < 40; s++) begin
      int steps = $urandom_range(8) + 1;
      for (int t = 0; t < steps; t++)
        do_step(t == 0, $urandom_range(6), -40, 40);
    end
    // Exactly at the threshold: no spike (strict comparison).
    for (int k = 0; k < N; k++) begin b[k] = 0; bias_wdata[k*WEIGHT_W +: WEIGHT_W] = '0; end
    @(negedge clk); bias_we = 1'b1;
    @(negedge clk); bias_we = 1'b0;
    do_step(1'b1, 2, THETA / 2, THETA / 2);       // v = theta
    do_step(1'b1, 5, 13, 13);                     // v = 65 = theta + 1
    // Saturation: long runs of large positive, then negative weights.
    do_step(1'b1, 600, 60, 63);
    do_step(1'b0, 5, -64, 63);
    do_step(1'b1, 600, -64, -60);
    do_step(1'b0, 5, -64, 63);
    checks++;
    if (n_sat == 0) begin failures++; $display("FAIL: saturation never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
