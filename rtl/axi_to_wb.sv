// axi_to_wb -- host-to-card bridge from the AXI-stream FIFOs to the crossbar.
//
// Serves the NCH host-to-card FIFOs in round-robin order, one packet per turn.
// A packet is PKT_WORDS 32-bit words; word 0 carries the application ID in
// bits [1:0]. Words are read one per cycle into a packet buffer. As soon as
// REQ_AT words are in (half the packet by default) the destination of that
// application ID is taken from the register file and a request is issued
// through the bridge's WB master interface; the interface only strobes words
// that have already arrived, so filling the second half overlaps with
// arbitration. The result of each transfer is reported per application ID.
// Application IDs whose destination is not allowed for crossbar port 0 are
// refused by the master port, which keeps an application away from regions it
// does not own.
//
// Timing (FIFO full enough, slave free): first FIFO read in cycle 0, request
// in cycle 4, first word on the bus in cycle 8, last in cycle 15; with
// REQ_AT = PKT_WORDS the last word goes out in cycle 19. These match the 15 and
// 19 cycles given in the paper. Packet framing (fixed length, no TLAST) and
// the ID position are this design's choices.
module axi_to_wb
  import wb_pkg::*;
#(
  parameter int unsigned NCH     = 3,
  parameter int unsigned REQ_AT  = PKT_WORDS / 2,
  parameter int unsigned TIMEOUT = 64
) (
  input  logic                   clk,
  input  logic                   rst,
  input  logic [NCH-1:0][DW-1:0] s_tdata,
  input  logic [NCH-1:0]         s_tvalid,
  output logic [NCH-1:0]         s_tready,
  input  port_mask_t [NPORTS-1:0] app_dest_i,
  output logic                   app_err_valid_o,
  output logic [1:0]             app_err_id_o,
  output wb_status_e             app_err_o,
  output wb_m2s_t                m_o,
  input  wb_s2m_t                m_i
);
  localparam int unsigned CW = $clog2(PKT_WORDS) + 1;
  localparam int unsigned HW = (NCH > 1) ? $clog2(NCH) : 1;
  typedef enum logic [1:0] {A_IDLE, A_LOAD, A_DRAIN} astate_e;

  astate_e       state;
  logic [HW-1:0] ch, last_ch;
  packet_t       pkt;
  logic [CW-1:0] cnt;
  logic          req, done_seen, done_w, busy_w;
  wb_status_e    st_q, status_w;
  logic          beat;
  logic [HW-1:0] pick;
  logic          any;

  // round-robin choice of the next non-empty channel after last_ch
  always_comb begin
    pick = last_ch;
    any  = 1'b0;
    for (int k = NCH; k >= 1; k--) begin
      int unsigned c;
      c = (int'(last_ch) + k) % NCH;
      if (s_tvalid[c]) begin
        pick = HW'(c);
        any  = 1'b1;
      end
    end
  end

  always_comb begin
    s_tready = '0;
    if (state == A_LOAD && cnt < CW'(PKT_WORDS)) s_tready[ch] = 1'b1;
  end
  assign beat = (state == A_LOAD) && (cnt < CW'(PKT_WORDS)) && s_tvalid[ch];

  wb_master_if #(.TIMEOUT(TIMEOUT)) u_mst (
    .clk, .rst, .req_i(req), .dest_i(app_dest_i[pkt[0][1:0]]), .words_i(pkt),
    .avail_i(cnt), .busy_o(busy_w), .done_o(done_w), .status_o(status_w), .m_o, .m_i
  );

  always_ff @(posedge clk) begin
    if (rst) begin
      state           <= A_IDLE;
      ch              <= '0;
      last_ch         <= HW'(NCH - 1);
      pkt             <= '0;
      cnt             <= '0;
      req             <= 1'b0;
      done_seen       <= 1'b0;
      st_q            <= ST_OK;
      app_err_valid_o <= 1'b0;
      app_err_id_o    <= '0;
      app_err_o       <= ST_OK;
    end else begin
      req             <= 1'b0;
      app_err_valid_o <= 1'b0;
      if (done_w) begin
        done_seen <= 1'b1;
        st_q      <= status_w;
      end
      unique case (state)
        A_IDLE: if (any) begin
          ch        <= pick;
          cnt       <= '0;
          done_seen <= 1'b0;
          state     <= A_LOAD;
        end
        A_LOAD: begin
          if (beat) begin
            pkt[cnt[CW-2:0]] <= s_tdata[ch];
            cnt              <= cnt + 1'b1;
            if (cnt + 1'b1 == CW'(REQ_AT)) req <= 1'b1;
            if (cnt + 1'b1 == CW'(PKT_WORDS)) state <= A_DRAIN;
          end
        end
        A_DRAIN: if (done_seen || done_w) begin
          app_err_valid_o <= 1'b1;
          app_err_id_o    <= pkt[0][1:0];
          app_err_o       <= done_w ? status_w : st_q;
          last_ch         <= ch;
          state           <= A_IDLE;
        end
        default: state <= A_IDLE;
      endcase
    end
  end
endmodule
