// snn_top: event-driven processor for a discrete-time spiking multilayer
// perceptron: N_IN inputs, two hidden layers of N_HID neurons, N_OUT outputs.
//
// Structure (the processor's block diagram): input spikes -> spike
// scheduler -> weight memory 1 -> hidden layer 1 -> firing vector -> spike
// scheduler -> weight memory 2 -> hidden layer 2 -> firing vector -> spike
// scheduler -> weight memory 3 -> output layer -> output spikes, with one
// pipeline and time-step controller sequencing all three layers. The neurons
// of a layer work in parallel; the spikes into a layer are handled one per
// cycle, and only those that are active cost a cycle.
//
// Defaults are the MNIST configuration: 784-256-256-10, discontinuous
// integration (SNN-DC). The N-MNIST configuration is N_IN = 1156,
// N_OUT = 12, MODE = NEURON_CT.
//
// Interface:
//   num_steps            : time steps per sample (hold stable during a sample).
//   in_spikes/in_valid/in_ready : one input spike vector per time step; the
//                          vector must be held until in_ready.
//   out_spikes/out_valid/out_ready/out_last/out_step : output layer firing
//                          vector per time step, its step index and the last-
//                          step flag of the sample.
//   wr_en/wr_layer/wr_bias/wr_addr/wr_data : weight loading. wr_layer 0..2
//                          selects the layer. With wr_bias = 0, row wr_addr
//                          (weights from presynaptic neuron wr_addr to every
//                          neuron of the layer, neuron k at bits 7k+6..7k) is
//                          written; with wr_bias = 1 the layer's biases are.
//                          The output layer uses the low N_OUT*7 bits.
//   busy                 : any layer working or holding an unfetched vector.
// Latency: a layer step with K input spikes takes K + 3 cycles; layers
// overlap on successive time steps. The loading port, the handshakes to the
// host and the bit formats are own choices.
module snn_top
  import snn_pkg::*;
#(
  parameter int unsigned  N_IN   = 784,
  parameter int unsigned  N_HID  = 256,
  parameter int unsigned  N_OUT  = 10,
  parameter neuron_mode_e MODE   = NEURON_DC,
  parameter int signed    THETA  = THETA_DEFAULT,
  parameter int unsigned  STEP_W = 9,
  localparam int unsigned AIN_W  = (N_IN  > 1) ? $clog2(N_IN)  : 1,
  localparam int unsigned AHID_W = (N_HID > 1) ? $clog2(N_HID) : 1
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [STEP_W-1:0]         num_steps,
  input  logic [N_IN-1:0]           in_spikes,
  input  logic                      in_valid,
  output logic                      in_ready,
  output logic [N_OUT-1:0]          out_spikes,
  output logic                      out_valid,
  input  logic                      out_ready,
  output logic                      out_last,
  output logic [STEP_W-1:0]         out_step,
  input  logic                      wr_en,
  input  logic [1:0]                wr_layer,
  input  logic                      wr_bias,
  input  logic [AIN_W-1:0]          wr_addr,
  input  logic [N_HID*WEIGHT_W-1:0] wr_data,
  output logic                      busy
);

  localparam int unsigned NL = 3;

  logic [NL-1:0] load, first, pop, fire, sched_valid;
  logic [NL-1:0] w_we, b_we;
  logic [N_HID-1:0] h1_spikes, h2_spikes;

  always_comb begin
    for (int l = 0; l < NL; l++) begin
      w_we[l] = wr_en && !wr_bias && (wr_layer == 2'(l));
      b_we[l] = wr_en &&  wr_bias && (wr_layer == 2'(l));
    end
  end

  pipeline_ctrl #(.N_LAYERS(NL), .STEP_W(STEP_W)) u_ctrl (
    .clk, .rst_n,
    .num_steps,
    .in_valid, .in_ready,
    .sched_valid, .load, .first, .pop, .fire,
    .out_valid, .out_ready, .out_last, .out_step,
    .busy
  );

  snn_layer #(.N_IN(N_IN), .N_POST(N_HID), .MODE(MODE), .THETA(THETA)) u_hidden1 (
    .clk, .rst_n,
    .load (load[0]), .first (first[0]), .pop (pop[0]), .fire (fire[0]),
    .sched_valid (sched_valid[0]),
    .spikes_in (in_spikes), .spikes_out (h1_spikes),
    .w_we (w_we[0]), .w_addr (wr_addr), .w_data (wr_data), .bias_we (b_we[0])
  );

  snn_layer #(.N_IN(N_HID), .N_POST(N_HID), .MODE(MODE), .THETA(THETA)) u_hidden2 (
    .clk, .rst_n,
    .load (load[1]), .first (first[1]), .pop (pop[1]), .fire (fire[1]),
    .sched_valid (sched_valid[1]),
    .spikes_in (h1_spikes), .spikes_out (h2_spikes),
    .w_we (w_we[1]), .w_addr (wr_addr[AHID_W-1:0]), .w_data (wr_data), .bias_we (b_we[1])
  );

  snn_layer #(.N_IN(N_HID), .N_POST(N_OUT), .MODE(MODE), .THETA(THETA)) u_output (
    .clk, .rst_n,
    .load (load[2]), .first (first[2]), .pop (pop[2]), .fire (fire[2]),
    .sched_valid (sched_valid[2]),
    .spikes_in (h2_spikes), .spikes_out (out_spikes),
    .w_we (w_we[2]), .w_addr (wr_addr[AHID_W-1:0]), .w_data (wr_data[N_OUT*WEIGHT_W-1:0]),
    .bias_we (b_we[2])
  );

endmodule
