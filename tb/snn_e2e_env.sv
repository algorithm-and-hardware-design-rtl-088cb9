// snn_e2e_env: stimulus and checking environment for the whole SNN processor.
// It is connected to an snn_top instance by its ports (plus a few probes of
// the pipeline controller), so the same checks serve every configuration.
//
// What it does: loads random weights and biases through the loading port into
// both the processor and a bit-exact reference model (snn_ref_pkg), then feeds
// N_SAMPLES samples of random length (1..MAX_STEPS time steps, or exactly
// MAX_STEPS if FIXED_STEPS; the first one STEPS0 long if set) with random
// input spike densities, including empty time steps (always the second step
// of a sample), under random output back-pressure. It checks:
//   - every output firing vector, its step index and last-step flag;
//   - per layer and step, that the number of scheduler pops equals the number
//     of input spikes of that layer, and that the step took pops + 3 cycles;
//   - that each mechanism happened: empty layer steps, layers working in
//     parallel, a layer waiting for data_fetched, output back-pressure and,
//     for continuous integration, potentials carried across steps and the
//     subtract-theta rule.
// It reports through 'finished', 'checks' and 'failures'.
module snn_e2e_env
  import snn_pkg::*;
  import snn_ref_pkg::*;
#(
  parameter int unsigned  N_IN        = 784,
  parameter int unsigned  N_HID       = 256,
  parameter int unsigned  N_OUT       = 10,
  parameter bit           CT          = 1'b0,
  parameter int           N_SAMPLES   = 2,
  parameter int           MAX_STEPS   = 16,
  parameter bit           FIXED_STEPS = 1'b0,
  parameter int           STEPS0      = 0,      // if > 0: length of the first sample
  parameter int           DENSITY_PCT = 15,     // mean input spike probability, percent
  parameter int           W_LO        = -20,
  parameter int           W_HI        = 30,
  parameter int           STEP_W      = 9,
  parameter string        NAME        = "snn",
  localparam int unsigned AIN_W       = (N_IN > 1) ? $clog2(N_IN) : 1
) (
  output logic                      clk,
  output logic                      rst_n,
  output logic [STEP_W-1:0]         num_steps,
  output logic [N_IN-1:0]           in_spikes,
  output logic                      in_valid,
  input  logic                      in_ready,
  input  logic [N_OUT-1:0]          out_spikes,
  input  logic                      out_valid,
  output logic                      out_ready,
  input  logic                      out_last,
  input  logic [STEP_W-1:0]         out_step,
  output logic                      wr_en,
  output logic [1:0]                wr_layer,
  output logic                      wr_bias,
  output logic [AIN_W-1:0]          wr_addr,
  output logic [N_HID*WEIGHT_W-1:0] wr_data,
  input  logic                      busy,
  // probes of the pipeline controller
  input  logic [2:0]                p_load,
  input  logic [2:0]                p_pop,
  input  logic [2:0]                p_fire,
  input  logic [2:0]                p_done,
  input  logic [2:0]                p_active,   // layer state not idle
  output logic                      finished,
  output int                        checks,
  output int                        failures
);

  snn_model model;

  typedef struct {
    bit out[];
    int step;
    bit last;
    int nact[3];
  } exp_t;
  exp_t exp_q[$];
  int nact_q[3][$];

  int cyc = 0;
  int n_empty = 0, n_overlap = 0, n_wait_fetch = 0, n_backpressure = 0;
  int n_outputs = 0, n_spikes_out = 0;
  int sent = 0;
  int load_cyc[3], pops[3], nexp[3];
  int lat_start;
  int latency[$];

  initial clk = 1'b0;
  always #5 clk = ~clk;

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("%s FAIL @%0t: %s", NAME, $time, msg);
    end
  endtask

  function automatic int rnd(int lo, int hi);
    return lo + int'($urandom_range(hi - lo));
  endfunction

  // ---- per-layer monitors -------------------------------------------------
  always @(posedge clk) if (rst_n) begin
    int nbusy;
    cyc++;
    nbusy = 0;
    for (int l = 0; l < 3; l++) begin
      if (p_load[l]) begin
        load_cyc[l] = cyc;
        pops[l] = 0;
        nexp[l] = (nact_q[l].size() > 0) ? nact_q[l].pop_front() : -1;
        if (nexp[l] == 0) n_empty++;
      end
      if (p_pop[l]) pops[l]++;
      if (p_fire[l]) begin
        check(pops[l] == nexp[l], $sformatf("layer %0d: %0d pops for %0d spikes", l, pops[l], nexp[l]));
        check(cyc - load_cyc[l] == pops[l] + 2,
              $sformatf("layer %0d: step took %0d cycles for %0d spikes", l, cyc - load_cyc[l] + 1, pops[l]));
      end
      if (p_active[l]) nbusy++;
      // waiting for data_fetched: input ready, idle, own vector not yet taken
      if (!p_active[l] && p_done[l] && (l == 0 ? in_valid : p_done[l-1]) && !p_load[l])
        n_wait_fetch++;
    end
    if (nbusy > 1) n_overlap++;
    if (out_valid && !out_ready) n_backpressure++;
  end

  // ---- output monitor -----------------------------------------------------
  // Random back-pressure, plus a guaranteed 2-cycle stall on every third output.
  int valid_age = 0;
  always @(negedge clk) begin
    out_ready = ($urandom_range(4) != 0) && !(n_outputs % 3 == 0 && valid_age < 2);
    valid_age = (out_valid && !out_ready) ? valid_age + 1 : 0;
  end

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    exp_t e;
    if (exp_q.size() == 0) begin
      check(1'b0, "unexpected output");
    end else begin
      e = exp_q.pop_front();
      for (int k = 0; k < int'(N_OUT); k++) begin
        check(out_spikes[k] == e.out[k],
              $sformatf("step %0d output neuron %0d: got %b expected %b", e.step, k, out_spikes[k], e.out[k]));
        n_spikes_out += e.out[k];
      end
      check(int'(out_step) == e.step, $sformatf("out_step %0d expected %0d", out_step, e.step));
      check(out_last == e.last, "out_last");
      if (e.last) latency.push_back(cyc - lat_start + 1);
    end
    n_outputs++;
  end

  // ---- weight loading -----------------------------------------------------
  task automatic write_row(int layer, bit bias, int addr, input int vals[]);
    @(negedge clk);
    wr_en = 1'b1; wr_layer = 2'(layer); wr_bias = bias; wr_addr = AIN_W'(addr);
    wr_data = '0;
    foreach (vals[k]) wr_data[k*WEIGHT_W +: WEIGHT_W] = WEIGHT_W'(vals[k]);
  endtask

  task automatic load_weights();
    int sizes[4];
    sizes = '{int'(N_IN), int'(N_HID), int'(N_HID), int'(N_OUT)};
    for (int l = 0; l < 3; l++) begin
      for (int i = 0; i < sizes[l]; i++) begin
        foreach (model.w[l][i][k]) model.w[l][i][k] = rnd(W_LO, W_HI);
        write_row(l, 1'b0, i, model.w[l][i]);
      end
      foreach (model.b[l][k]) model.b[l][k] = rnd(-40, 40);
      write_row(l, 1'b1, 0, model.b[l]);
    end
    @(negedge clk);
    wr_en = 1'b0;
  endtask

  // ---- stimulus -----------------------------------------------------------
  initial begin
    bit in_s[], out_s[];
    int nact[3];
    int steps, density;
    model = new(N_IN, N_HID, N_OUT, CT, THETA_DEFAULT, POT_W);
    finished = 1'b0; checks = 0; failures = 0;
    rst_n = 1'b0; in_valid = 1'b0; in_spikes = '0; num_steps = '0;
    wr_en = 1'b0; wr_layer = '0; wr_bias = 1'b0; wr_addr = '0; wr_data = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    load_weights();
    in_s = new[N_IN];
    for (int s = 0; s < N_SAMPLES; s++) begin
      steps = (s == 0 && STEPS0 > 0) ? STEPS0 : FIXED_STEPS ? MAX_STEPS : rnd(1, MAX_STEPS);
      // num_steps may only change between samples: wait for the pipeline to drain
      while (busy || exp_q.size() > 0) @(negedge clk);
      num_steps = STEP_W'(steps);
      lat_start = cyc;
      for (int t = 0; t < steps; t++) begin
        density = (t == 1 || rnd(0, 9) == 0) ? 0 : rnd(DENSITY_PCT / 2, DENSITY_PCT * 3 / 2);
        foreach (in_s[i]) in_s[i] = (rnd(0, 99) < density);
        foreach (in_s[i]) in_spikes[i] = in_s[i];
        model.step(t == 0, in_s, out_s, nact);
        begin
          exp_t e;
          e.out = out_s; e.step = t; e.last = (t == steps - 1); e.nact = nact;
          exp_q.push_back(e);
        end
        for (int l = 0; l < 3; l++) nact_q[l].push_back(nact[l]);
        in_valid = 1'b1;
        #1;
        while (!in_ready) begin @(negedge clk); #1; end
        @(negedge clk);
        sent++;
        in_valid = 1'b0;
        if (rnd(0, 2) == 0) repeat (rnd(1, 4)) @(negedge clk);
      end
    end
    while (busy || exp_q.size() > 0) @(negedge clk);
    repeat (3) @(negedge clk);
    check(n_outputs == sent, $sformatf("%0d outputs for %0d inputs", n_outputs, sent));
    check(n_empty > 0, "no layer step without input spikes");
    check(n_overlap > 0, "layers never worked in parallel");
    check(n_wait_fetch > 0, "no layer ever waited for data_fetched");
    check(n_backpressure > 0, "no output back-pressure");
    check(n_spikes_out > 0 && n_spikes_out < n_outputs * int'(N_OUT), "output layer never or always fired");
    if (CT) begin
      check(model.n_carry > 0, "no potential carried across time steps");
      check(model.n_subtract > 0, "subtract-theta never happened");
    end
    $display("%s: steps=%0d output spikes=%0d empty=%0d overlap=%0d wait_fetch=%0d backpressure=%0d carry=%0d subtract=%0d",
             NAME, sent, n_spikes_out, n_empty, n_overlap, n_wait_fetch, n_backpressure,
             model.n_carry, model.n_subtract);
    foreach (latency[i]) $display("%s: sample %0d latency %0d cycles", NAME, i, latency[i]);
    finished = 1'b1;
  end

endmodule
