// tb_weight_memory: writes random weight words to every row, then reads them
// back in random order and checks the one-cycle read latency and that the
// read data holds while rd_en is low.
module tb_weight_memory;
  import snn_pkg::*;
  localparam int DEPTH = 37, N_POST = 9;
  localparam int ADDR_W = $clog2(DEPTH), WORD_W = N_POST * WEIGHT_W;

  logic clk = 1'b0;
  logic rd_en = 1'b0, wr_en = 1'b0;
  logic [ADDR_W-1:0] rd_addr = '0, wr_addr = '0;
  logic [WORD_W-1:0] rd_data, wr_data = '0;
  logic [WORD_W-1:0] model [DEPTH];
  int checks = 0, failures = 0;

  weight_memory #(.DEPTH(DEPTH), .N_POST(N_POST)) dut (.*);

  always #5 clk = ~clk;

  function automatic logic [WORD_W-1:0] rand_word();
    logic [WORD_W-1:0] w;
    for (int i = 0; i < WORD_W; i += 32) w[i +: 32] = $urandom;
    return w;
  endfunction

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [WORD_W-1:0] held;
    int a;
    for (int r = 0; r < DEPTH; r++) begin
      @(negedge clk);
      model[r] = rand_word();
      wr_en = 1'b1; wr_addr = ADDR_W'(r); wr_data = model[r];
    end
    @(negedge clk); wr_en = 1'b0;
    for (int t = 0; t < 200; t++) begin
      a = $urandom_range(DEPTH - 1);
      rd_en = 1'b1; rd_addr = ADDR_W'(a);
      @(negedge clk);
      rd_en = 1'b0;
      checks++;
      if (rd_data !== model[a]) begin failures++; $display("FAIL: row %0d", a); end
      held = rd_data;
      rd_addr = ADDR_W'($urandom_range(DEPTH - 1));
      @(negedge clk);
      checks++;
      if (rd_data !== held) begin failures++; $display("FAIL: read data not held"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
