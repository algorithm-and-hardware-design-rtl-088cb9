// tb_snn_nmnist: the N-MNIST configuration of the processor (1156 inputs,
// 256-256 hidden neurons, 12 outputs for 10 digits and 2 motion directions,
// continuous integration). Two samples of 16 time steps each are run with
// random weights and about 4.8 % of the inputs active per step (the activity
// quoted for this workload); snn_e2e_env checks every output spike against a
// bit-exact model and prints the latency of each sample in cycles.
module tb_snn_nmnist;
  import snn_pkg::*;

  localparam int N_IN = 1156, N_HID = 256, N_OUT = 12;

  int checks, failures;
  logic fin;
  logic clk, rst_n, in_valid, in_ready, out_valid, out_ready, out_last;
  logic wr_en, wr_bias, busy;
  logic [1:0] wr_layer;
  logic [$clog2(N_IN)-1:0] wr_addr;
  logic [N_HID*WEIGHT_W-1:0] wr_data;
  logic [8:0] num_steps, out_step;
  logic [N_IN-1:0] in_spikes;
  logic [N_OUT-1:0] out_spikes;

  snn_top #(.N_IN(N_IN), .N_HID(N_HID), .N_OUT(N_OUT), .MODE(NEURON_CT)) u_dut (
    .clk, .rst_n, .num_steps, .in_spikes, .in_valid, .in_ready,
    .out_spikes, .out_valid, .out_ready, .out_last, .out_step,
    .wr_en, .wr_layer, .wr_bias, .wr_addr, .wr_data, .busy);

  snn_e2e_env #(.N_IN(N_IN), .N_HID(N_HID), .N_OUT(N_OUT), .CT(1'b1), .N_SAMPLES(2), .MAX_STEPS(16), .FIXED_STEPS(1'b1), .DENSITY_PCT(5), .W_LO(-10), .W_HI(11), .NAME("nmnist_ct")) env (
    .clk, .rst_n, .num_steps, .in_spikes, .in_valid, .in_ready,
    .out_spikes, .out_valid, .out_ready, .out_last, .out_step,
    .wr_en, .wr_layer, .wr_bias, .wr_addr, .wr_data, .busy,
    .p_load (u_dut.u_ctrl.load), .p_pop (u_dut.u_ctrl.pop), .p_fire (u_dut.u_ctrl.fire),
    .p_done (u_dut.u_ctrl.done),
    .p_active ({u_dut.u_ctrl.state[2] != LS_IDLE, u_dut.u_ctrl.state[1] != LS_IDLE,
                u_dut.u_ctrl.state[0] != LS_IDLE}),
    .finished (fin), .checks, .failures);

  initial begin
    #5_000_000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    #1;  // let the environments clear their flags first
    wait (fin === 1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
