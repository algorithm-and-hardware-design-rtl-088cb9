// weight_memory: synaptic weight store of one layer.
//
// One word per presynaptic neuron index; each word holds the 7-bit signed
// weights of that presynaptic neuron to every parallel postsynaptic neuron
// of the layer (word width = N_POST * WEIGHT_W). An index from the spike
// scheduler therefore fetches, in one access, everything the whole neuron
// array needs for that spike. In silicon this is a compiler-generated
// single-port SRAM macro; here it is a plain array with one synchronous read
// port and one write port, which synthesis tools map to a memory cell.
// The word organisation follows the paper (and reproduces its quoted memory
// sizes when the depth is rounded up to a multiple of 256 rows); the separate
// write port used to load weights from outside is this design's own choice.
//
// Interface / timing:
//   rd_en, rd_addr : read request; rd_data is valid in the next cycle and
//                    holds its value until the next read.
//   wr_en, wr_addr, wr_data : synchronous write, used to load the weights.
//   Reads and writes to the same address in one cycle are not expected.
module weight_memory
  import snn_pkg::*;
#(
  parameter int unsigned DEPTH  = 784,
  parameter int unsigned N_POST = 256,
  localparam int unsigned ADDR_W = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned WORD_W = N_POST * WEIGHT_W
) (
  input  logic              clk,
  input  logic              rd_en,
  input  logic [ADDR_W-1:0] rd_addr,
  output logic [WORD_W-1:0] rd_data,
  input  logic              wr_en,
  input  logic [ADDR_W-1:0] wr_addr,
  input  logic [WORD_W-1:0] wr_data
);

  logic [WORD_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en)
      mem[wr_addr] <= wr_data;
    if (rd_en)
      rd_data <= mem[rd_addr];
  end

endmodule
