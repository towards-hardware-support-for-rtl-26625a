// rst_sync -- global reset of the shell.
//
// The DMA core's asynchronous, active-low reset is buffered into an
// active-high reset that asserts immediately (asynchronously) and is released
// on the second rising clock edge after the input is released, so every
// flip-flop leaves reset in the same cycle. The paper only says that the
// global reset buffers the DMA core's reset; the two-flop release is this
// design's choice.
module rst_sync (
  input  logic clk,
  input  logic arst_ni,
  output logic rst_o
);
  logic [1:0] sr;
  always_ff @(posedge clk or negedge arst_ni) begin
    if (!arst_ni) sr <= 2'b11;
    else          sr <= {sr[0], 1'b0};
  end
  assign rst_o = sr[1];
endmodule
