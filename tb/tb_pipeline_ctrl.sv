// tb_pipeline_ctrl: runs the pipeline controller against behavioural stand-ins
// for the three layer datapaths (a spike counter per layer that is loaded with
// a random number of spikes and counts down on every pop). It checks the
// handshake rules (a layer loads only when the layer before is done and its own
// vector is fetched; pops only while spikes are pending), the K + 3 cycle layer
// step, the 'first' tag of every layer, the in-order arrival of every time step
// at the output with its index and last flag, under random back-pressure from
// the output. It also counts that layers overlapped and that stalls occurred.
module tb_pipeline_ctrl;
  import snn_pkg::*;
  localparam int NL = 3, STEP_W = 9;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [STEP_W-1:0] num_steps = '0;
  logic in_valid = 1'b0, in_ready;
  logic [NL-1:0] sched_valid, load, first, pop, fire;
  logic out_valid, out_ready = 1'b0, out_last, busy;
  logic [STEP_W-1:0] out_step;
  int checks = 0, failures = 0;

  pipeline_ctrl #(.N_LAYERS(NL), .STEP_W(STEP_W)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  // Layer stand-ins.
  int cnt [NL];
  int k_of [NL];
  int load_cyc [NL];
  int step_of [NL];        // global step number being processed per layer
  bit outfull [NL];
  int cyc = 0;
  int in_step_no = 0;      // global number of the next input step
  int out_step_no = 0;
  int steps_per_sample [$];
  int n_overlap = 0, n_stall = 0, n_backpressure = 0;

  always_comb for (int l = 0; l < NL; l++) sched_valid[l] = (cnt[l] > 0);

  // Expected 'first' for a global step number.
  int sample_start [$];
  function automatic bit is_first(int g);
    foreach (sample_start[i]) if (sample_start[i] == g) return 1'b1;
    return 1'b0;
  endfunction

  always @(posedge clk) if (rst_n) begin
    int busy_layers;
    cyc++;
    busy_layers = 0;
    if (out_valid && out_ready) begin
      check(out_step_no == step_of[NL-1], "output order");
      outfull[NL-1] = 1'b0;
      out_step_no++;
    end
    // from the output layer backwards, so that a layer copies the step
    // number of the layer before it as it was before this edge
    for (int l = NL - 1; l >= 0; l--) begin
      if (load[l]) begin
        check(l == 0 ? in_valid : outfull[l-1], $sformatf("layer %0d loads without done", l));
        check(!outfull[l] || (l == NL-1 ? out_ready : load[l+1]), $sformatf("layer %0d overwrites", l));
        step_of[l] = (l == 0) ? in_step_no : step_of[l-1];
        check(first[l] == is_first(step_of[l]), $sformatf("layer %0d first tag step %0d", l, step_of[l]));
        if (l == 0) in_step_no++;
        if (l > 0) outfull[l-1] = 1'b0;
        k_of[l] = $urandom_range(6);
        cnt[l] = k_of[l];
        load_cyc[l] = cyc;
      end
      if (pop[l]) begin
        check(cnt[l] > 0, "pop without pending spike");
        cnt[l]--;
      end
      if (fire[l]) begin
        check(cyc - load_cyc[l] == k_of[l] + 2, $sformatf("layer %0d step took %0d cycles for %0d spikes",
              l, cyc - load_cyc[l] + 1, k_of[l]));
        outfull[l] = 1'b1;
      end
      if (cnt[l] > 0 || fire[l]) busy_layers++;
      if (l > 0 && outfull[l-1] && !load[l] && !pop[l] && !fire[l] && cnt[l] == 0 && outfull[l])
        n_stall++;
    end
    if (busy_layers > 1) n_overlap++;
    if (out_valid && !out_ready) n_backpressure++;
  end

  // Output side: compare index and last flag, random back-pressure.
  int exp_idx = 0, exp_sample = 0;
  always @(negedge clk) begin
    out_ready = ($urandom_range(3) != 0);
    if (out_valid) begin
      check(int'(out_step) == exp_idx, $sformatf("out_step %0d expected %0d", out_step, exp_idx));
      check(out_last == (exp_idx == steps_per_sample[exp_sample] - 1), "out_last");
    end
  end
  always @(posedge clk) if (out_valid && out_ready) begin
    if (exp_idx == steps_per_sample[exp_sample] - 1) begin exp_idx = 0; exp_sample++; end
    else exp_idx++;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int total = 0;
    for (int l = 0; l < NL; l++) begin cnt[l] = 0; outfull[l] = 1'b0; end
    for (int s = 0; s < 12; s++) begin
      steps_per_sample.push_back($urandom_range(5) + 1);
      sample_start.push_back(total);
      total += steps_per_sample[s];
    end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int s = 0; s < 12; s++) begin
      @(negedge clk);
      num_steps = STEP_W'(steps_per_sample[s]);
      for (int t = 0; t < steps_per_sample[s]; t++) begin
        in_valid = 1'b1;
        #1;
        while (!in_ready) begin @(negedge clk); #1; end
        @(negedge clk);
        in_valid = ($urandom_range(1) == 0);   // sometimes back-to-back
        if (!in_valid) repeat ($urandom_range(3)) @(negedge clk);
      end
      in_valid = 1'b0;
      // wait until the sample has left before changing num_steps
      while (out_step_no < sample_start[s] + steps_per_sample[s]) @(negedge clk);
    end
    repeat (5) @(negedge clk);
    check(out_step_no == total, $sformatf("%0d of %0d steps out", out_step_no, total));
    check(!busy, "idle at the end");
    check(n_overlap > 0, "layers never overlapped");
    check(n_stall > 0, "no layer ever waited for data_fetched");
    check(n_backpressure > 0, "no output back-pressure");
    $display("overlap=%0d stall=%0d backpressure=%0d", n_overlap, n_stall, n_backpressure);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
