// tb_axis_fifo -- pushes random beats through a small FIFO with random valid
// and ready, and checks order, TLAST, no loss, and that s_tready falls only
// when DEPTH beats are held.
module tb_axis_fifo;
  `include "tb/tb_check.svh"
  localparam int D = 8;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic [31:0] sd, md;
  logic sl, sv, sr, ml, mv, mr;
  axis_fifo #(.DW(32), .DEPTH(D)) dut (.clk, .rst, .s_tdata(sd), .s_tlast(sl), .s_tvalid(sv), .s_tready(sr),
                                       .m_tdata(md), .m_tlast(ml), .m_tvalid(mv), .m_tready(mr));
  logic [32:0] q [$];
  int held = 0, n_out = 0;
  always @(posedge clk) if (!rst) begin
    if (sv && sr) q.push_back({sl, sd});
    if (mv && mr) begin
      logic [32:0] e;
      e = q.pop_front();
      `CHECK({ml, md} == e, "data and TLAST in order")
      n_out++;
    end
    held = held + int'(sv && sr) - int'(mv && mr);
  end
  always @(negedge clk) if (!rst) `CHECK(sr == (held < D), "ready only when not full")
  initial begin
    sv = 0; mr = 0; sd = 0; sl = 0;
    repeat (3) @(negedge clk); rst = 0;
    for (int i = 0; i < 600; i++) begin
      @(negedge clk);
      sv = ($urandom_range(0, 3) != 0); sd = $urandom; sl = $urandom_range(0, 1);
      mr = (i < 100) ? 1'b0 : (i > 500) ? 1'b1 : ($urandom_range(0, 2) == 0);
    end
    sv = 0; mr = 1;
    repeat (20) @(negedge clk);
    `CHECK(q.size() == 0 && !mv, "drained")
    `CHECK(n_out > 100, "traffic passed")
    `TB_END
  end
  initial begin repeat (5000) @(posedge clk); failures++; `TB_END end
endmodule
