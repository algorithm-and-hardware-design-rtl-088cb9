// spike_scheduler: turns a binary spike vector into a stream of active
// presynaptic neuron indices, one per clock cycle, so that a layer only
// spends cycles on neurons that actually spiked (event-driven operation).
//
// How it works: 'load' copies the firing vector of the layer before into a
// pending register. A priority encoder finds the lowest-numbered set bit;
// its index is presented on 'idx' with 'valid' high. 'pop' consumes it: the
// bit is cleared on the next edge and the encoder moves on to the next spike.
// An N-input vector with K set bits therefore produces K indices in K cycles.
// The priority encoder and the index-per-cycle behaviour follow the paper;
// the lowest-index-first order and the load/pop interface are own choices.
//
// Interface / timing:
//   load      : 1 cycle; pending <= spikes_in (overrides pop in that cycle).
//   idx/valid : combinational from the pending register.
//   pop       : clears bit idx at the next edge; must only be asserted with valid.
//   count     : number of pending spikes (for observation).
module spike_scheduler #(
  parameter int unsigned N     = 784,
  localparam int unsigned IDX_W = (N > 1) ? $clog2(N) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             load,
  input  logic [N-1:0]     spikes_in,
  input  logic             pop,
  output logic             valid,
  output logic [IDX_W-1:0] idx
);

  logic [N-1:0] pending;

  // Priority encoder: lowest set bit wins.
  always_comb begin
    valid = 1'b0;
    idx   = '0;
    for (int i = N - 1; i >= 0; i--) begin
      if (pending[i]) begin
        valid = 1'b1;
        idx   = IDX_W'(i);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pending <= '0;
    end else if (load) begin
      pending <= spikes_in;
    end else if (pop && valid) begin
      pending[idx] <= 1'b0;
    end
  end

  // A pop with nothing pending is a controller error.
  a_pop_valid : assert property (@(posedge clk) disable iff (!rst_n) (pop && !load) |-> valid)
    else $error("spike_scheduler: pop with no pending spike");

endmodule
