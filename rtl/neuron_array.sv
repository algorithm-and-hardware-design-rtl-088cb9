// neuron_array: N parallel discrete-time integrate-and-fire neurons with
// binary (spike) outputs: one hidden layer or the output layer.
//
// Each neuron k keeps a membrane potential v_k in a register and a bias b_k.
// One time step of a layer is a sequence of three operations:
//   start : v_k <= base + b_k, where base is 0 for discontinuous integration
//           (SNN-DC: v restarts every time step) and for the first time step
//           of a sample, and v_k itself for continuous integration (SNN-CT).
//   acc   : v_k <= v_k + w_{i,k} for one active presynaptic neuron i; the
//           weight word of i (all N weights) comes from the weight memory.
//   fire  : s_k <= (v_k > theta); in SNN-CT mode also v_k <= v_k - theta*s_k.
// The neuron equations, the strict '>' comparison and the subtract-theta
// rule follow the paper. Storing the bias in registers, saturating the
// potential at POT_W bits and the fixed-point theta are own choices.
//
// Interface / timing (all operations take effect at the next clock edge):
//   bias_we/bias_wdata : load the N biases (WEIGHT_W bits each, packed, neuron 0 at LSBs).
//   start, first       : begin a time step; 'first' marks the first step of a sample.
//   acc_en, weights    : integrate one weight word.
//   fire               : firing check; 'spikes' holds the result until the next fire.
module neuron_array
  import snn_pkg::*;
#(
  parameter int unsigned  N     = 256,
  parameter neuron_mode_e MODE  = NEURON_DC,
  parameter int signed    THETA = THETA_DEFAULT
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    bias_we,
  input  logic [N*WEIGHT_W-1:0]   bias_wdata,
  input  logic                    start,
  input  logic                    first,
  input  logic                    acc_en,
  input  logic [N*WEIGHT_W-1:0]   weights,
  input  logic                    fire,
  output logic [N-1:0]            spikes
);

  localparam logic signed [POT_W-1:0] THETA_P = POT_W'(THETA);

  logic signed [POT_W-1:0]    v    [N];
  logic signed [WEIGHT_W-1:0] bias [N];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < N; k++) bias[k] <= '0;
    end else if (bias_we) begin
      for (int k = 0; k < N; k++) bias[k] <= bias_wdata[k*WEIGHT_W +: WEIGHT_W];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < N; k++) v[k] <= '0;
      spikes <= '0;
    end else if (start) begin
      for (int k = 0; k < N; k++)
        v[k] <= sat_add((MODE == NEURON_CT && !first) ? v[k] : '0, bias[k]);
    end else if (acc_en) begin
      for (int k = 0; k < N; k++)
        v[k] <= sat_add(v[k], weights[k*WEIGHT_W +: WEIGHT_W]);
    end else if (fire) begin
      for (int k = 0; k < N; k++) begin
        spikes[k] <= (v[k] > THETA_P);
        if (MODE == NEURON_CT && v[k] > THETA_P)
          v[k] <= v[k] - THETA_P;
      end
    end
  end

  a_one_op : assert property (@(posedge clk) disable iff (!rst_n) $onehot0({start, acc_en, fire}))
    else $error("neuron_array: more than one operation in a cycle");

endmodule
