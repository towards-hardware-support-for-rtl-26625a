// wb_slave_if -- WB slave interface of a computation module (or of the
// WB-to-AXI bridge).
//
// Holds PKT_WORDS 32-bit data registers, each with an "unread" flag. A write
// strobe stores DAT into the register addressed by SEL if that register holds
// no unread data and acknowledges it one cycle later; if it does, STALL is
// raised (and no ACK follows) until the module has read the buffer. When all
// registers hold unread data, full_o tells the module; the module answers with
// a one-cycle rd_done_i pulse, which clears every flag so new data can be
// taken (a write in the same cycle is kept). A read strobe (WE low) returns the
// addressed register on DAT_O one cycle later, without consuming it.
//
// The register buffer, stall-when-full and the module handshake follow the
// paper; the per-register flags, the registered ACK and read support are this
// design's choices.
module wb_slave_if
  import wb_pkg::*;
(
  input  logic     clk,
  input  logic     rst,
  input  wb_x2s_t  s_i,
  output wb_s2x_t  s_o,
  output packet_t  buf_o,
  output logic     full_o,
  input  logic     rd_done_i
);
  logic [PKT_WORDS-1:0] unread;
  logic                 strobe, accept;

  assign strobe    = s_i.cyc && s_i.stb;
  assign s_o.stall = strobe && s_i.we && unread[s_i.sel];
  assign accept    = strobe && !s_o.stall;
  assign full_o    = &unread;

  always_ff @(posedge clk) begin
    if (rst) begin
      unread  <= '0;
      buf_o   <= '0;
      s_o.ack <= 1'b0;
      s_o.dat <= '0;
    end else begin
      s_o.ack <= accept;
      if (rd_done_i) unread <= '0;
      if (accept && s_i.we) begin
        buf_o[s_i.sel]  <= s_i.dat;
        unread[s_i.sel] <= 1'b1;
      end
      if (accept && !s_i.we) s_o.dat <= buf_o[s_i.sel];
    end
  end

  a_no_ack_without_cycle: assert property (@(posedge clk) disable iff (rst) s_o.ack |-> $past(s_i.cyc));
endmodule
