// tb_wrr_arbiter -- checks the weighted round-robin arbiter: grant one cycle
// after a request, round-robin order among persistent requesters, the grant
// withdrawn after exactly `limit` packages (per-master limits differ), the
// grant kept until the outstanding ACK is back, release when the request
// drops, and masters with limit 0 never granted.
module tb_wrr_arbiter;
  `include "tb/tb_check.svh"
  localparam int N = 4;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic [N-1:0]       req, gnt;
  logic [N-1:0][7:0]  limit;
  logic               beat, ack, busy;
  logic [1:0]         idx;

  wrr_arbiter #(.N(N), .PKGW(8)) dut (
    .clk, .rst, .req_i(req), .limit_i(limit), .beat_i(beat), .ack_i(ack),
    .gnt_o(gnt), .busy_o(busy), .idx_o(idx)
  );

  // every usable grant produces a beat; ACK one cycle later
  assign beat = |gnt;
  always_ff @(posedge clk) ack <= beat;

  int beats [N];
  int order [$];
  int turn_len [$];
  int turn_who [$];
  int run;
  logic [N-1:0] gnt_d;
  always @(posedge clk) begin
    for (int i = 0; i < N; i++) if (gnt[i]) beats[i]++;
    gnt_d <= gnt;
    for (int i = 0; i < N; i++) if (gnt[i] && !gnt_d[i]) order.push_back(i);
    if (gnt != 0) run <= (gnt_d == gnt) ? run + 1 : 1;
    if (gnt_d != 0 && gnt != gnt_d && req == 4'b1111) begin
      turn_len.push_back(run);
      for (int i = 0; i < N; i++) if (gnt_d[i]) turn_who.push_back(i);
    end
  end

  initial begin
    req = 0; limit = '0;
    limit[0] = 8'd2; limit[1] = 8'd3; limit[2] = 8'd0; limit[3] = 8'd5;
    repeat (3) @(negedge clk); rst = 0;

    // single request: granted one cycle later
    @(negedge clk); req = 4'b0010;
    #1 `CHECK(gnt == 0, "no grant in the request cycle")
    @(negedge clk);
    `CHECK(gnt == 4'b0010, "grant one cycle after request")
    req = 0;
    @(negedge clk); @(negedge clk);
    `CHECK(!busy, "released when request drops")

    // all request for a while: weighted shares and order
    for (int i = 0; i < N; i++) beats[i] = 0;
    order.delete();
    @(negedge clk); req = 4'b1111;
    repeat (3 * (2 + 3 + 5 + 2 * 3) + 2) @(negedge clk);
    req = 0;
    repeat (4) @(negedge clk);
    `CHECK(beats[2] == 0, "limit 0 never granted")
    `CHECK(turn_len.size() >= 6, "several complete turns")
    for (int i = 0; i < turn_len.size(); i++)
      `CHECK(turn_len[i] == int'(limit[turn_who[i]]), "turn length equals the master's package limit")
    `CHECK(order.size() >= 8, "several grants")
    for (int i = 0; i + 1 < order.size(); i++)
      `CHECK(order[i+1] == (order[i] == 0 ? 1 : order[i] == 1 ? 3 : 0), "round-robin order 0,1,3")
    `TB_END
  end
  initial begin repeat (2000) @(posedge clk); failures++; `TB_END end
endmodule
