// lzc -- leading-zero counter.
//
// Counts the zeros above the most significant set bit of `in_i`; `zero_o` is
// high when no bit is set (then `cnt_o` is 0). The WRR arbiter feeds it a
// bit-reversed request vector so that the count is the index of the first
// requester. Purely combinational. Using a leading-zero counter for the
// arbiter follows the paper; this particular loop form is this design's.
module lzc #(
  parameter int unsigned W = 4
) (
  input  logic [W-1:0]         in_i,
  output logic [$clog2(W)-1:0] cnt_o,
  output logic                 zero_o
);
  always_comb begin
    cnt_o  = '0;
    zero_o = 1'b1;
    for (int i = 0; i < W; i++) begin
      if (zero_o && in_i[W-1-i]) begin
        cnt_o  = ($clog2(W))'(i);
        zero_o = 1'b0;
      end
    end
  end
endmodule
