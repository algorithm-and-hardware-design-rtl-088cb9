// pipeline_ctrl: pipeline and time-step controller of the SNN processor.
//
// The layers form a pipeline: while layer l integrates time step t, layer
// l-1 can already work on step t+1. Because the number of spikes, and so the
// number of cycles, differs per layer and per step, neighbouring layers
// synchronise with two signals:
//   done[l]        : layer l has a firing vector ready (kept in its neurons'
//                    spike register until fetched);
//   data_fetched   : the next layer has copied that vector into its scheduler.
// A layer starts a new time step when the layer before it is done and its own
// previous firing vector has been fetched by the next layer (or is being
// fetched in this very cycle). This rule is the paper's; the state machine
// below and the zero-bubble reading of 'fetched' are own choices.
//
// Per layer: IDLE -> (load) -> INTEG: pop one spike index per cycle while the
// scheduler has any -> FIRE: firing check, done[l] set -> IDLE.
// A layer step with K input spikes takes K + 3 cycles from load to done.
//
// Time steps: the host offers one input spike vector per time step
// (in_valid/in_ready, in_ready being layer 0's data_fetched). The controller
// counts the steps of a sample, 1..num_steps, and tags each vector with
// 'first'/'last'; the tag travels with the data so that every layer knows
// when a new sample starts (SNN-CT potentials restart from zero there).
// The output layer's vector is offered with out_valid/out_ready together
// with its time step index out_step.
module pipeline_ctrl
  import snn_pkg::*;
#(
  parameter int unsigned N_LAYERS = 3,
  parameter int unsigned STEP_W   = 9
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [STEP_W-1:0]   num_steps,    // time steps per sample (0 counts as 1)
  // host input handshake
  input  logic                in_valid,
  output logic                in_ready,
  // layer datapaths
  input  logic [N_LAYERS-1:0] sched_valid,
  output logic [N_LAYERS-1:0] load,
  output logic [N_LAYERS-1:0] first,
  output logic [N_LAYERS-1:0] pop,
  output logic [N_LAYERS-1:0] fire,
  // output handshake
  output logic                out_valid,
  input  logic                out_ready,
  output logic                out_last,
  output logic [STEP_W-1:0]   out_step,
  output logic                busy
);

  layer_state_e state [N_LAYERS];
  logic      [N_LAYERS-1:0] done;
  step_tag_t                tag  [N_LAYERS];
  logic      [STEP_W-1:0]   in_step;
  step_tag_t                in_tag;
  logic      [N_LAYERS-1:0] fetched;      // data_fetched seen by layer l from layer l+1

  // Tag of the host's current input vector.
  always_comb begin
    in_tag.first = (in_step == '0);
    in_tag.last  = ((in_step + 1'b1) >= num_steps);
  end

  // Start condition per layer. It is combinational, so 'load' of layer l+1
  // is the data_fetched seen by layer l in the same cycle. Each layer gets a
  // signal of its own so that the chain from the output layer back to the
  // first is visibly acyclic.
  for (genvar l = 0; l < N_LAYERS; l++) begin : g_layer
    logic ld;
    logic prev_done;
    if (l == 0) begin : g_first
      assign prev_done = in_valid;
      assign first[l]  = in_tag.first;
    end else begin : g_next
      assign prev_done = done[l-1];
      assign first[l]  = tag[l-1].first;
    end
    if (l == N_LAYERS - 1) begin : g_last
      assign fetched[l] = out_ready && done[l];
    end else begin : g_mid
      assign fetched[l] = g_layer[l+1].ld;
    end
    assign ld      = (state[l] == LS_IDLE) && prev_done && (!done[l] || fetched[l]);
    assign load[l] = ld;
    assign pop[l]  = (state[l] == LS_INTEG) && sched_valid[l];
    assign fire[l] = (state[l] == LS_FIRE);
  end

  assign in_ready  = load[0];
  assign out_valid = done[N_LAYERS-1];
  assign out_last  = tag[N_LAYERS-1].last;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int l = 0; l < N_LAYERS; l++) begin
        state[l] <= LS_IDLE;
        tag[l]   <= '0;
      end
      done     <= '0;
      in_step  <= '0;
      out_step <= '0;
    end else begin
      for (int l = 0; l < N_LAYERS; l++) begin
        unique case (state[l])
          LS_IDLE:  if (load[l]) begin
                      state[l] <= LS_INTEG;
                      tag[l]   <= (l == 0) ? in_tag : tag[l-1];
                    end
          LS_INTEG: if (!sched_valid[l]) state[l] <= LS_FIRE;
          LS_FIRE:  state[l] <= LS_IDLE;
          default:  state[l] <= LS_IDLE;
        endcase
        if (fire[l])         done[l] <= 1'b1;
        else if (fetched[l]) done[l] <= 1'b0;
      end
      if (load[0])
        in_step <= in_tag.last ? '0 : in_step + 1'b1;
      if (out_valid && out_ready)
        out_step <= out_last ? '0 : out_step + 1'b1;
    end
  end

  always_comb begin
    busy = |done;
    for (int l = 0; l < N_LAYERS; l++)
      if (state[l] != LS_IDLE) busy = 1'b1;
  end

  // Handshake rules: a layer only starts on a 'done' from the layer before,
  // and never overwrites a firing vector that has not been fetched.
  for (genvar l = 0; l < N_LAYERS; l++) begin : g_chk
    if (l > 0) begin : g_mid
      a_load_needs_done : assert property (@(posedge clk) disable iff (!rst_n)
        load[l] |-> done[l-1]);
    end
    a_fire_needs_free : assert property (@(posedge clk) disable iff (!rst_n)
      fire[l] |-> !done[l]);
  end

endmodule
