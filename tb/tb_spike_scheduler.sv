// tb_spike_scheduler: loads random spike vectors of varying density into the
// scheduler, pops every index it offers and checks that the indices come out
// in ascending order, exactly once each, one per cycle (K spikes take K
// cycles), and that a new load replaces what was still pending.
module tb_spike_scheduler;
  localparam int N = 45;
  localparam int IDX_W = $clog2(N);

  logic clk = 1'b0, rst_n = 1'b0;
  logic load = 1'b0, pop = 1'b0;
  logic [N-1:0] spikes_in = '0;
  logic valid;
  logic [IDX_W-1:0] idx;
  int checks = 0, failures = 0;

  spike_scheduler #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [N-1:0] vec;
    int expect_idx, cycles, k;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    check(!valid, "empty after reset");
    for (int trial = 0; trial < 60; trial++) begin
      for (int i = 0; i < N; i++)
        vec[i] = ($urandom_range(99) < (trial % 5) * 20);
      @(negedge clk); load = 1'b1; spikes_in = vec;
      @(negedge clk); load = 1'b0;
      k = $countones(vec);
      cycles = 0;
      expect_idx = 0;
      while (valid) begin
        while (expect_idx < N && !vec[expect_idx]) expect_idx++;
        check(int'(idx) == expect_idx, $sformatf("trial %0d: idx %0d expected %0d", trial, idx, expect_idx));
        expect_idx++;
        pop = 1'b1;
        @(negedge clk);
        pop = 1'b0;
        cycles++;
        if (cycles > N) break;
      end
      check(cycles == k, $sformatf("trial %0d: %0d pops for %0d spikes", trial, cycles, k));
    end
    // A load while spikes are still pending replaces them.
    @(negedge clk); load = 1'b1; spikes_in = '1;
    @(negedge clk); load = 1'b0; pop = 1'b1;
    @(negedge clk); pop = 1'b0;
    vec = '0; vec[N-1] = 1'b1; vec[7] = 1'b1;
    load = 1'b1; spikes_in = vec;
    @(negedge clk); load = 1'b0;
    check(valid && idx == 7, "reload: first index 7");
    pop = 1'b1; @(negedge clk);
    check(valid && idx == IDX_W'(N-1), "reload: second index N-1");
    @(negedge clk); pop = 1'b0;
    check(!valid, "reload: empty after two pops");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
