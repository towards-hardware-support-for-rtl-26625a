// async_fifo -- dual-clock FIFO placed in front of the ICAP.
//
// Partial bitstream words arrive at the system clock (250 MHz) and leave at
// the ICAP clock (125 MHz). Write and read pointers are kept in Gray code and
// each is passed to the other clock domain through two flip-flops; full and
// empty are computed from the synchronised pointers, so they are conservative
// (a slot freed or filled becomes visible two or three cycles later).
// DEPTH must be a power of two. w_ready is low when full, r_valid high when not
// empty; r_data is the head entry (fall-through). The need for a FIFO between
// the two clocks is from the paper; the Gray-pointer structure and depth are
// this design's choices.
module async_fifo #(
  parameter int unsigned DW    = 32,
  parameter int unsigned DEPTH = 16
) (
  input  logic          wclk,
  input  logic          wrst,
  input  logic [DW-1:0] w_data,
  input  logic          w_valid,
  output logic          w_ready,
  input  logic          rclk,
  input  logic          rrst,
  output logic [DW-1:0] r_data,
  output logic          r_valid,
  input  logic          r_ready
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [DW-1:0] mem [DEPTH];
  logic [AW:0] wbin, wgray, rbin, rgray;
  logic [AW:0] rgray_w1, rgray_w2, wgray_r1, wgray_r2;
  logic [AW:0] wbin_n, rbin_n;
  logic        wr, rd;

  function automatic logic [AW:0] bin2gray(input logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  assign w_ready = (wgray != {~rgray_w2[AW:AW-1], rgray_w2[AW-2:0]});
  assign r_valid = (rgray != wgray_r2);
  assign wr      = w_valid && w_ready;
  assign rd      = r_valid && r_ready;
  assign wbin_n  = wbin + (AW+1)'(wr);
  assign rbin_n  = rbin + (AW+1)'(rd);
  assign r_data  = mem[rbin[AW-1:0]];

  always_ff @(posedge wclk) begin
    if (wr) mem[wbin[AW-1:0]] <= w_data;
  end

  always_ff @(posedge wclk) begin
    if (wrst) begin
      wbin <= '0; wgray <= '0; rgray_w1 <= '0; rgray_w2 <= '0;
    end else begin
      wbin     <= wbin_n;
      wgray    <= bin2gray(wbin_n);
      rgray_w1 <= rgray;
      rgray_w2 <= rgray_w1;
    end
  end

  always_ff @(posedge rclk) begin
    if (rrst) begin
      rbin <= '0; rgray <= '0; wgray_r1 <= '0; wgray_r2 <= '0;
    end else begin
      rbin     <= rbin_n;
      rgray    <= bin2gray(rbin_n);
      wgray_r1 <= wgray;
      wgray_r2 <= wgray_r1;
    end
  end
endmodule
