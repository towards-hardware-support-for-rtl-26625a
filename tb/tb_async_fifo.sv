// tb_async_fifo -- writes at 250 MHz and reads at 125 MHz with random valid
// and ready; checks order and no loss across the clock crossing, that the
// FIFO fills up (w_ready low) when the reader is slow, and that it empties.
module tb_async_fifo;
  `include "tb/tb_check.svh"
  logic wclk = 0, rclk = 0, wrst = 1, rrst = 1;
  always #2 wclk = ~wclk;
  always #4 rclk = ~rclk;
  logic [31:0] wd, rd;
  logic wv, wr, rv, rr;
  async_fifo #(.DW(32), .DEPTH(8)) dut (.wclk, .wrst, .w_data(wd), .w_valid(wv), .w_ready(wr),
                                        .rclk, .rrst, .r_data(rd), .r_valid(rv), .r_ready(rr));
  logic [31:0] q [$];
  int n_out = 0, full_seen = 0;
  always @(posedge wclk) if (!wrst) begin
    if (wv && wr) q.push_back(wd);
    if (wv && !wr) full_seen++;
  end
  always @(posedge rclk) if (!rrst && rv && rr) begin
    `CHECK(q.size() > 0 && rd == q[0], "word order across clocks")
    void'(q.pop_front());
    n_out++;
  end
  initial begin
    wv = 0; rr = 0; wd = 0;
    repeat (4) @(negedge rclk); wrst = 0; rrst = 0;
    for (int i = 0; i < 800; i++) begin
      @(negedge wclk);
      if (!(wv && !wr)) begin wv = ($urandom_range(0, 1) == 1); wd = $urandom; end
    end
    wv = 0;
    repeat (100) @(negedge wclk);
    `CHECK(q.size() == 0 && !rv, "emptied")
    `CHECK(n_out > 100, "traffic passed")
    `CHECK(full_seen > 0, "became full with a slow reader")
    `TB_END
  end
  always @(negedge rclk) rr = ($urandom_range(0, 3) != 0);
  initial begin repeat (10000) @(posedge wclk); failures++; `TB_END end
endmodule
