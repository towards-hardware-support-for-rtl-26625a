// axis_fifo -- synchronous AXI-stream FIFO.
//
// Buffers DEPTH entries of {TLAST, TDATA}. A beat is written when
// s_tvalid && s_tready and read when m_tvalid && m_tready; s_tready is low
// only when full, m_tvalid high whenever not empty. The head entry is read
// straight from the array (first-word fall-through), so a beat written in one
// cycle can leave in the next. The FIFOs of the host channels are named in the
// paper; depth, fall-through behaviour and the TLAST bit are this design's.
module axis_fifo #(
  parameter int unsigned DW    = 32,
  parameter int unsigned DEPTH = 512
) (
  input  logic          clk,
  input  logic          rst,
  input  logic [DW-1:0] s_tdata,
  input  logic          s_tlast,
  input  logic          s_tvalid,
  output logic          s_tready,
  output logic [DW-1:0] m_tdata,
  output logic          m_tlast,
  output logic          m_tvalid,
  input  logic          m_tready
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [DW:0]   mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic [AW:0]   cnt;
  logic          wr, rd;

  assign s_tready = (cnt != (AW+1)'(DEPTH));
  assign m_tvalid = (cnt != '0);
  assign wr       = s_tvalid && s_tready;
  assign rd       = m_tvalid && m_tready;
  assign {m_tlast, m_tdata} = mem[rp];

  always_ff @(posedge clk) begin
    if (wr) mem[wp] <= {s_tlast, s_tdata};
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wp  <= '0;
      rp  <= '0;
      cnt <= '0;
    end else begin
      if (wr) wp <= (wp == AW'(DEPTH-1)) ? '0 : wp + 1'b1;
      if (rd) rp <= (rp == AW'(DEPTH-1)) ? '0 : rp + 1'b1;
      cnt <= cnt + (AW+1)'(wr) - (AW+1)'(rd);
    end
  end
endmodule
