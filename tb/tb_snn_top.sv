// tb_snn_top: end-to-end test of the SNN processor at reduced size
// (40 inputs, two hidden layers of 16, 6 outputs), once with discontinuous
// (SNN-DC) and once with continuous (SNN-CT) integration. Each instance runs
// 25 random samples of 1 to 5 time steps through snn_e2e_env, which checks
// every output spike against a bit-exact reference model, the per-layer cycle
// counts and that every pipeline mechanism occurred.
module tb_snn_top;
  import snn_pkg::*;

  localparam int N_IN = 40, N_HID = 16, N_OUT = 6;

  int checks_dc, failures_dc, checks_ct, failures_ct;
  logic fin_dc, fin_ct;

  // ---------------- SNN-DC ----------------
  logic clk_a, rst_a, in_valid_a, in_ready_a, out_valid_a, out_ready_a, out_last_a;
  logic wr_en_a, wr_bias_a, busy_a;
  logic [1:0] wr_layer_a;
  logic [$clog2(N_IN)-1:0] wr_addr_a;
  logic [N_HID*WEIGHT_W-1:0] wr_data_a;
  logic [8:0] num_steps_a, out_step_a;
  logic [N_IN-1:0] in_spikes_a;
  logic [N_OUT-1:0] out_spikes_a;

  snn_top #(.N_IN(N_IN), .N_HID(N_HID), .N_OUT(N_OUT), .MODE(NEURON_DC)) dut_dc (
    .clk (clk_a), .rst_n (rst_a), .num_steps (num_steps_a),
    .in_spikes (in_spikes_a), .in_valid (in_valid_a), .in_ready (in_ready_a),
    .out_spikes (out_spikes_a), .out_valid (out_valid_a), .out_ready (out_ready_a),
    .out_last (out_last_a), .out_step (out_step_a),
    .wr_en (wr_en_a), .wr_layer (wr_layer_a), .wr_bias (wr_bias_a), .wr_addr (wr_addr_a),
    .wr_data (wr_data_a), .busy (busy_a));

  snn_e2e_env #(.N_IN(N_IN), .N_HID(N_HID), .N_OUT(N_OUT), .CT(1'b0), .N_SAMPLES(25),
                .MAX_STEPS(5), .DENSITY_PCT(30), .NAME("dc")) env_dc (
    .clk (clk_a), .rst_n (rst_a), .num_steps (num_steps_a),
    .in_spikes (in_spikes_a), .in_valid (in_valid_a), .in_ready (in_ready_a),
    .out_spikes (out_spikes_a), .out_valid (out_valid_a), .out_ready (out_ready_a),
    .out_last (out_last_a), .out_step (out_step_a),
    .wr_en (wr_en_a), .wr_layer (wr_layer_a), .wr_bias (wr_bias_a), .wr_addr (wr_addr_a),
    .wr_data (wr_data_a), .busy (busy_a),
    .p_load (dut_dc.u_ctrl.load), .p_pop (dut_dc.u_ctrl.pop), .p_fire (dut_dc.u_ctrl.fire),
    .p_done (dut_dc.u_ctrl.done),
    .p_active ({dut_dc.u_ctrl.state[2] != LS_IDLE, dut_dc.u_ctrl.state[1] != LS_IDLE,
                dut_dc.u_ctrl.state[0] != LS_IDLE}),
    .finished (fin_dc), .checks (checks_dc), .failures (failures_dc));

  // ---------------- SNN-CT ----------------
  logic clk_b, rst_b, in_valid_b, in_ready_b, out_valid_b, out_ready_b, out_last_b;
  logic wr_en_b, wr_bias_b, busy_b;
  logic [1:0] wr_layer_b;
  logic [$clog2(N_IN)-1:0] wr_addr_b;
  logic [N_HID*WEIGHT_W-1:0] wr_data_b;
  logic [8:0] num_steps_b, out_step_b;
  logic [N_IN-1:0] in_spikes_b;
  logic [N_OUT-1:0] out_spikes_b;

  snn_top #(.N_IN(N_IN), .N_HID(N_HID), .N_OUT(N_OUT), .MODE(NEURON_CT)) dut_ct (
    .clk (clk_b), .rst_n (rst_b), .num_steps (num_steps_b),
    .in_spikes (in_spikes_b), .in_valid (in_valid_b), .in_ready (in_ready_b),
    .out_spikes (out_spikes_b), .out_valid (out_valid_b), .out_ready (out_ready_b),
    .out_last (out_last_b), .out_step (out_step_b),
    .wr_en (wr_en_b), .wr_layer (wr_layer_b), .wr_bias (wr_bias_b), .wr_addr (wr_addr_b),
    .wr_data (wr_data_b), .busy (busy_b));

  snn_e2e_env #(.N_IN(N_IN), .N_HID(N_HID), .N_OUT(N_OUT), .CT(1'b1), .N_SAMPLES(25),
                .MAX_STEPS(5), .DENSITY_PCT(30), .NAME("ct")) env_ct (
    .clk (clk_b), .rst_n (rst_b), .num_steps (num_steps_b),
    .in_spikes (in_spikes_b), .in_valid (in_valid_b), .in_ready (in_ready_b),
    .out_spikes (out_spikes_b), .out_valid (out_valid_b), .out_ready (out_ready_b),
    .out_last (out_last_b), .out_step (out_step_b),
    .wr_en (wr_en_b), .wr_layer (wr_layer_b), .wr_bias (wr_bias_b), .wr_addr (wr_addr_b),
    .wr_data (wr_data_b), .busy (busy_b),
    .p_load (dut_ct.u_ctrl.load), .p_pop (dut_ct.u_ctrl.pop), .p_fire (dut_ct.u_ctrl.fire),
    .p_done (dut_ct.u_ctrl.done),
    .p_active ({dut_ct.u_ctrl.state[2] != LS_IDLE, dut_ct.u_ctrl.state[1] != LS_IDLE,
                dut_ct.u_ctrl.state[0] != LS_IDLE}),
    .finished (fin_ct), .checks (checks_ct), .failures (failures_ct));

  initial begin
    #2_000_000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks_dc + checks_ct, failures_dc + failures_ct + 1);
    $finish;
  end

  initial begin
    #1;  // let the environments clear their flags first
    wait (fin_dc === 1'b1 && fin_ct === 1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks_dc + checks_ct, failures_dc + failures_ct);
    $finish;
  end
endmodule
