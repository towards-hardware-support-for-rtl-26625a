// wrr_arbiter -- weighted round-robin arbiter of one crossbar slave port.
//
// Bandwidth is shared by counting packages (accepted data words), not time:
// a master keeps the grant until it has sent the number of packages its limit
// register allows, or until it drops its request, and then the grant moves on
// to the next requester in round-robin order. The next requester is found with
// a leading-zero counter on the bit-reversed request vector, first among the
// requesters above the last granted index, else among all of them.
//
// Timing: the grant is a register. A request seen while idle is granted at the
// next edge; after a release the arbiter spends one idle cycle before the next
// grant. With a master that drops CYC one cycle after its last ACK this gives
// the 12-cycle slot per 8-word transfer used in the paper's worst-case figure.
// gnt_o is the usable grant: it falls combinationally as soon as the package
// count reaches the limit, so a word offered after that is stalled, while the
// grant register itself is held until the outstanding ACKs have returned and
// then for one more cycle (the same release time as a master dropping CYC).
//
// From the paper: WRR on package counts, LZC-based selection, switching on the
// limit. Own choices: a limit of 0 excludes the master, the idle cycle between
// grants, the outstanding-ACK counter.
module wrr_arbiter #(
  parameter int unsigned N    = 4,
  parameter int unsigned PKGW = 8
) (
  input  logic                       clk,
  input  logic                       rst,
  input  logic [N-1:0]               req_i,    // masters requesting this slave
  input  logic [N-1:0][PKGW-1:0]     limit_i,  // packages allowed per master
  input  logic                       beat_i,   // granted master's word accepted
  input  logic                       ack_i,    // slave acknowledged a word
  output logic [N-1:0]               gnt_o,    // usable grant (one-hot)
  output logic                       busy_o,   // a grant is held
  output logic [$clog2(N)-1:0]       idx_o     // index of the held grant
);
  localparam int unsigned IW = $clog2(N);

  logic            granted;
  logic [IW-1:0]   gidx, last;
  logic [PKGW-1:0] cnt;
  logic [PKGW:0]   outst, outst_nxt;

  logic [N-1:0] reqm, above, rev_all, rev_above;
  logic [IW-1:0] cnt_all, cnt_above;
  logic          zero_all, zero_above;
  logic [IW-1:0] pick;
  logic          quota, release_now;

  always_comb begin
    for (int i = 0; i < N; i++) begin
      reqm[i]  = req_i[i] && (limit_i[i] != '0);
      above[i] = reqm[i] && (i > int'(last));
    end
    for (int i = 0; i < N; i++) begin
      rev_all[N-1-i]   = reqm[i];
      rev_above[N-1-i] = above[i];
    end
  end

  lzc #(.W(N)) u_lzc_all   (.in_i(rev_all),   .cnt_o(cnt_all),   .zero_o(zero_all));
  lzc #(.W(N)) u_lzc_above (.in_i(rev_above), .cnt_o(cnt_above), .zero_o(zero_above));

  assign pick        = zero_above ? cnt_all : cnt_above;
  assign quota       = (cnt >= limit_i[gidx]);
  assign outst_nxt   = outst + (PKGW+1)'(beat_i) - (PKGW+1)'(ack_i && outst != '0);
  assign release_now = !req_i[gidx] || (quota && outst == '0);

  always_ff @(posedge clk) begin
    if (rst) begin
      granted <= 1'b0;
      gidx    <= '0;
      last    <= IW'(N-1);
      cnt     <= '0;
      outst   <= '0;
    end else if (!granted) begin
      cnt   <= '0;
      outst <= '0;
      if (!zero_all) begin
        granted <= 1'b1;
        gidx    <= pick;
      end
    end else begin
      cnt   <= cnt + PKGW'(beat_i);
      outst <= outst_nxt;
      if (release_now) begin
        granted <= 1'b0;
        last    <= gidx;
      end
    end
  end

  always_comb begin
    gnt_o = '0;
    if (granted && !quota) gnt_o[gidx] = 1'b1;
  end
  assign busy_o = granted;
  assign idx_o  = gidx;

  a_onehot: assert property (@(posedge clk) disable iff (rst) $onehot0(gnt_o));
  a_beat_granted: assert property (@(posedge clk) disable iff (rst) beat_i |-> (gnt_o != '0));
endmodule
