// reg_file -- configuration and status registers of the shell (AXI-Lite).
//
// Twenty 32-bit registers at byte addresses 0x00..0x4C, reached by the host
// over an AXI4-Lite slave that is separate from the data streams:
//   0x00 device ID (read only)
//   0x04/08/0C destination (one-hot, [3:0]) of PR region 1/2/3
//   0x10 reset of PR regions and crossbar ports [3:0] (1 = held in reset)
//   0x14..0x20 allowed slaves [3:0] of master port 0..3
//   0x24..0x30 packages allowed in slave port 0..3: master m in bits [8m+7:8m]
//   0x34..0x40 destination (one-hot, [3:0]) of application ID 0..3
//   0x44 last transaction status of PR region r (1..3) in bits [8r+1:8r]
//   0x48 last transaction status of application ID a (0..3) in bits [8a+1:8a]
//   0x4C ICAP status: bit 0 PR done, bit 1 PR error (read only)
// Status registers are written by hardware and are read only to the host.
// Writes take AW and W together and answer with B one cycle later; reads
// answer one cycle after AR. An address beyond 0x4C answers SLVERR.
// The register list and addresses follow the paper; field positions inside
// the registers and reset values (all configuration 0) are this design's.
module reg_file
  import wb_pkg::*;
#(
  parameter logic [31:0] DEVICE_ID = 32'hFE1A_0001
) (
  input  logic        clk,
  input  logic        rst,
  // AXI4-Lite slave
  input  logic [6:0]  awaddr,
  input  logic        awvalid,
  output logic        awready,
  input  logic [31:0] wdata,
  input  logic        wvalid,
  output logic        wready,
  output logic [1:0]  bresp,
  output logic        bvalid,
  input  logic        bready,
  input  logic [6:0]  araddr,
  input  logic        arvalid,
  output logic        arready,
  output logic [31:0] rdata,
  output logic [1:0]  rresp,
  output logic        rvalid,
  input  logic        rready,
  // configuration outputs
  output port_mask_t [NPORTS-1:0]               pr_dest_o,   // [0] unused
  output logic       [NPORTS-1:0]               port_rst_o,
  output port_mask_t [NPORTS-1:0]               allowed_o,
  output pkg_cnt_t   [NPORTS-1:0][NPORTS-1:0]   pkg_limit_o, // [slave][master]
  output port_mask_t [NPORTS-1:0]               app_dest_o,
  // status inputs
  input  logic       [NPORTS-1:0]               pr_err_valid_i, // [0] unused
  input  wb_status_e [NPORTS-1:0]               pr_err_i,
  input  logic                                  app_err_valid_i,
  input  logic [1:0]                            app_err_id_i,
  input  wb_status_e                            app_err_i,
  input  logic                                  icap_done_i,
  input  logic                                  icap_err_i
);
  localparam int unsigned NREGS = 20;

  logic [31:0] regs [NREGS];
  logic        wr_go, wr_ok, rd_go;
  logic [4:0]  widx, ridx;

  assign widx    = awaddr[6:2];
  assign ridx    = araddr[6:2];
  assign wr_go   = awvalid && wvalid && !bvalid;
  assign awready = wr_go;
  assign wready  = wr_go;
  assign wr_ok   = (widx < 5'(NREGS));
  assign rd_go   = arvalid && !rvalid;
  assign arready = rd_go;

  // host-writable registers: 1..16
  function automatic logic host_writable(input logic [4:0] i);
    return (i >= 5'd1) && (i <= 5'd16);
  endfunction

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < NREGS; i++) regs[i] <= '0;
      bvalid <= 1'b0;
      bresp  <= 2'b00;
      rvalid <= 1'b0;
      rresp  <= 2'b00;
      rdata  <= '0;
    end else begin
      regs[0] <= DEVICE_ID;
      if (wr_go) begin
        bvalid <= 1'b1;
        bresp  <= wr_ok ? 2'b00 : 2'b10;
        if (wr_ok && host_writable(widx)) regs[widx] <= wdata;
      end else if (bready) begin
        bvalid <= 1'b0;
      end
      if (rd_go) begin
        rvalid <= 1'b1;
        rresp  <= (ridx < 5'(NREGS)) ? 2'b00 : 2'b10;
        rdata  <= (ridx < 5'(NREGS)) ? regs[ridx] : '0;
      end else if (rready) begin
        rvalid <= 1'b0;
      end
      for (int r = 1; r < NPORTS; r++)
        if (pr_err_valid_i[r]) regs[17][8*r +: 8] <= {6'd0, pr_err_i[r]};
      if (app_err_valid_i) regs[18][8*app_err_id_i +: 8] <= {6'd0, app_err_i};
      regs[19] <= {30'd0, icap_err_i, icap_done_i};
    end
  end

  always_comb begin
    pr_dest_o[0] = '0;
    for (int r = 1; r < NPORTS; r++) pr_dest_o[r] = regs[r][NPORTS-1:0];
    port_rst_o = regs[4][NPORTS-1:0];
    for (int p = 0; p < NPORTS; p++) begin
      allowed_o[p]  = regs[5 + p][NPORTS-1:0];
      app_dest_o[p] = regs[13 + p][NPORTS-1:0];
      for (int m = 0; m < NPORTS; m++) pkg_limit_o[p][m] = regs[9 + p][8*m +: 8];
    end
  end

  a_bvalid_hold: assert property (@(posedge clk) disable iff (rst) (bvalid && !bready) |=> bvalid);
  a_rvalid_hold: assert property (@(posedge clk) disable iff (rst) (rvalid && !rready) |=> (rvalid && $stable(rdata)));
endmodule
