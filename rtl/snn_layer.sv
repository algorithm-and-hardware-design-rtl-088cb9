// snn_layer: datapath of one SNN layer: a spike scheduler, the layer's
// weight memory and its array of parallel neurons, wired as in the layer
// columns of the processor's block diagram. All sequencing comes from the
// pipeline controller.
//
// One time step, as driven by the controller:
//   load : the scheduler copies the incoming firing vector; the neurons
//          apply their bias (and restart their potential if required).
//   pop  : each cycle the scheduler's current index addresses the weight
//          memory; the word arrives one cycle later and is added to all
//          neurons at once (acc = registered pop).
//   fire : the neurons compare with theta; 'spikes_out' is the layer's
//          firing vector for the next layer.
// The controller fires one cycle after the scheduler runs empty, which is
// exactly when the last weight word has been added.
//
// Weight loading: w_we writes row w_addr (the weights of presynaptic neuron
// w_addr); bias_we writes all biases of the layer. Both are own choices.
module snn_layer
  import snn_pkg::*;
#(
  parameter int unsigned  N_IN   = 784,
  parameter int unsigned  N_POST = 256,
  parameter neuron_mode_e MODE   = NEURON_DC,
  parameter int signed    THETA  = THETA_DEFAULT,
  localparam int unsigned IDX_W  = (N_IN > 1) ? $clog2(N_IN) : 1,
  localparam int unsigned WORD_W = N_POST * WEIGHT_W
) (
  input  logic              clk,
  input  logic              rst_n,
  // control from the pipeline controller
  input  logic              load,
  input  logic              first,
  input  logic              pop,
  input  logic              fire,
  output logic              sched_valid,
  // spikes
  input  logic [N_IN-1:0]   spikes_in,
  output logic [N_POST-1:0] spikes_out,
  // weight and bias loading
  input  logic              w_we,
  input  logic [IDX_W-1:0]  w_addr,
  input  logic [WORD_W-1:0] w_data,
  input  logic              bias_we
);

  logic [IDX_W-1:0]  ani;       // active neuron index
  logic [WORD_W-1:0] rd_word;
  logic              acc_en;

  spike_scheduler #(.N(N_IN)) u_sched (
    .clk, .rst_n,
    .load, .spikes_in, .pop,
    .valid (sched_valid),
    .idx   (ani)
  );

  weight_memory #(.DEPTH(N_IN), .N_POST(N_POST)) u_wmem (
    .clk,
    .rd_en   (pop),
    .rd_addr (ani),
    .rd_data (rd_word),
    .wr_en   (w_we),
    .wr_addr (w_addr),
    .wr_data (w_data)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) acc_en <= 1'b0;
    else        acc_en <= pop;
  end

  neuron_array #(.N(N_POST), .MODE(MODE), .THETA(THETA)) u_neurons (
    .clk, .rst_n,
    .bias_we, .bias_wdata (w_data),
    .start (load), .first,
    .acc_en, .weights (rd_word),
    .fire,
    .spikes (spikes_out)
  );

endmodule
