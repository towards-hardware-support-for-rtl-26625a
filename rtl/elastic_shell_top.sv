// elastic_shell_top -- FPGA shell for elastic, multi-region accelerators.
//
// An application is split into small computation modules, each placed in its
// own reconfigurable (PR) region; the regions talk to each other and to the
// host over a 4x4 WISHBONE crossbar, so an application can grow or shrink by
// a region at a time. The shell holds:
//   * the register file (AXI-Lite from the host): destinations, isolation
//     masks, per-master package limits, per-port resets, status;
//   * the crossbar: port 0 is the host port, ports 1..3 are PR regions;
//   * on port 0, the AXI-to-WB bridge (master) fed by the three host-to-card
//     stream FIFOs and the WB-to-AXI bridge (slave) feeding the three
//     card-to-host stream FIFOs;
//   * PR regions 1..3: constant multiplier, Hamming(31,26) encoder and
//     decoder, each with its WB master and slave interface;
//   * the bitstream path: a host-to-card stream through a dual-clock FIFO to
//     the ICAP clock domain;
//   * the global reset, and per-region/port resets from the register file.
// The DMA core, the ICAP primitive and the host software are outside; their
// signals are the ports of this module. Everything runs on clk (250 MHz in the
// paper) except the ICAP side of the bitstream FIFO (icap_clk, 125 MHz).
// Block structure and port numbering follow the paper; FIFO depths, the
// watchdog period and the multiplier constant are this design's defaults.
module elastic_shell_top
  import wb_pkg::*;
#(
  parameter int unsigned NCH        = 3,
  parameter int unsigned FIFO_DEPTH = 512,
  parameter int unsigned ICAP_DEPTH = 16,
  parameter int unsigned TIMEOUT    = 64,
  parameter logic [31:0] MULT_CONST = 32'd3
) (
  input  logic                   clk,
  input  logic                   xdma_rst_ni,    // asynchronous reset of the DMA core
  // AXI-Lite bypass to the register file
  input  logic [6:0]             s_axil_awaddr,
  input  logic                   s_axil_awvalid,
  output logic                   s_axil_awready,
  input  logic [31:0]            s_axil_wdata,
  input  logic                   s_axil_wvalid,
  output logic                   s_axil_wready,
  output logic [1:0]             s_axil_bresp,
  output logic                   s_axil_bvalid,
  input  logic                   s_axil_bready,
  input  logic [6:0]             s_axil_araddr,
  input  logic                   s_axil_arvalid,
  output logic                   s_axil_arready,
  output logic [31:0]            s_axil_rdata,
  output logic [1:0]             s_axil_rresp,
  output logic                   s_axil_rvalid,
  input  logic                   s_axil_rready,
  // host-to-card user data streams H2C-0..2
  input  logic [NCH-1:0][DW-1:0] h2c_tdata,
  input  logic [NCH-1:0]         h2c_tvalid,
  output logic [NCH-1:0]         h2c_tready,
  // card-to-host result streams C2H-0..2
  output logic [NCH-1:0][DW-1:0] c2h_tdata,
  output logic [NCH-1:0]         c2h_tlast,
  output logic [NCH-1:0]         c2h_tvalid,
  input  logic [NCH-1:0]         c2h_tready,
  // bitstream stream H2C-3 and ICAP side
  input  logic [DW-1:0]          bit_tdata,
  input  logic                   bit_tvalid,
  output logic                   bit_tready,
  input  logic                   icap_clk,
  output logic [DW-1:0]          icap_data_o,
  output logic                   icap_valid_o,
  input  logic                   icap_ready_i,
  input  logic                   icap_done_i,    // PR done
  input  logic                   icap_err_i      // PR error
);
  // ---------------- reset system ----------------
  logic rst, icap_rst;
  rst_sync u_rst      (.clk(clk),      .arst_ni(xdma_rst_ni), .rst_o(rst));
  rst_sync u_rst_icap (.clk(icap_clk), .arst_ni(xdma_rst_ni), .rst_o(icap_rst));

  // ---------------- register file ----------------
  port_mask_t [NPORTS-1:0]             pr_dest, allowed, app_dest;
  logic       [NPORTS-1:0]             port_rst, pr_err_valid;
  pkg_cnt_t   [NPORTS-1:0][NPORTS-1:0] pkg_limit;
  wb_status_e [NPORTS-1:0]             pr_err;
  logic                                app_err_valid;
  logic [1:0]                          app_err_id;
  wb_status_e                          app_err;
  logic [1:0]                          icap_done_s, icap_err_s;

  reg_file u_regs (
    .clk, .rst,
    .awaddr(s_axil_awaddr), .awvalid(s_axil_awvalid), .awready(s_axil_awready),
    .wdata(s_axil_wdata), .wvalid(s_axil_wvalid), .wready(s_axil_wready),
    .bresp(s_axil_bresp), .bvalid(s_axil_bvalid), .bready(s_axil_bready),
    .araddr(s_axil_araddr), .arvalid(s_axil_arvalid), .arready(s_axil_arready),
    .rdata(s_axil_rdata), .rresp(s_axil_rresp), .rvalid(s_axil_rvalid), .rready(s_axil_rready),
    .pr_dest_o(pr_dest), .port_rst_o(port_rst), .allowed_o(allowed),
    .pkg_limit_o(pkg_limit), .app_dest_o(app_dest),
    .pr_err_valid_i(pr_err_valid), .pr_err_i(pr_err),
    .app_err_valid_i(app_err_valid), .app_err_id_i(app_err_id), .app_err_i(app_err),
    .icap_done_i(icap_done_s[1]), .icap_err_i(icap_err_s[1])
  );

  // ICAP status crosses from the ICAP clock domain (level signals)
  always_ff @(posedge clk) begin
    if (rst) begin
      icap_done_s <= '0;
      icap_err_s  <= '0;
    end else begin
      icap_done_s <= {icap_done_s[0], icap_done_i};
      icap_err_s  <= {icap_err_s[0],  icap_err_i};
    end
  end

  // ---------------- crossbar ----------------
  wb_m2s_t [NPORTS-1:0] xm_i;
  wb_s2m_t [NPORTS-1:0] xm_o;
  wb_x2s_t [NPORTS-1:0] xs_o;
  wb_s2x_t [NPORTS-1:0] xs_i;
  logic    [NPORTS-1:0] prst;

  always_comb
    for (int p = 0; p < NPORTS; p++) prst[p] = rst || port_rst[p];

  wb_crossbar u_xbar (
    .clk, .rst, .port_rst_i(port_rst), .allowed_i(allowed), .pkg_limit_i(pkg_limit),
    .m_i(xm_i), .m_o(xm_o), .s_o(xs_o), .s_i(xs_i)
  );

  // ---------------- port 0: host side ----------------
  logic [NCH-1:0][DW-1:0] h2f_tdata;
  logic [NCH-1:0]         h2f_tvalid, h2f_tready, h2f_tlast;
  logic [NCH-1:0][DW-1:0] f2c_tdata;
  logic [NCH-1:0]         f2c_tvalid, f2c_tready, f2c_tlast;

  for (genvar c = 0; c < NCH; c++) begin : g_ch
    axis_fifo #(.DW(DW), .DEPTH(FIFO_DEPTH)) u_h2c_fifo (
      .clk, .rst,
      .s_tdata(h2c_tdata[c]), .s_tlast(1'b0), .s_tvalid(h2c_tvalid[c]), .s_tready(h2c_tready[c]),
      .m_tdata(h2f_tdata[c]), .m_tlast(h2f_tlast[c]), .m_tvalid(h2f_tvalid[c]), .m_tready(h2f_tready[c])
    );
    axis_fifo #(.DW(DW), .DEPTH(FIFO_DEPTH)) u_c2h_fifo (
      .clk, .rst,
      .s_tdata(f2c_tdata[c]), .s_tlast(f2c_tlast[c]), .s_tvalid(f2c_tvalid[c]), .s_tready(f2c_tready[c]),
      .m_tdata(c2h_tdata[c]), .m_tlast(c2h_tlast[c]), .m_tvalid(c2h_tvalid[c]), .m_tready(c2h_tready[c])
    );
  end

  axi_to_wb #(.NCH(NCH), .TIMEOUT(TIMEOUT)) u_axi2wb (
    .clk, .rst(prst[0]),
    .s_tdata(h2f_tdata), .s_tvalid(h2f_tvalid), .s_tready(h2f_tready),
    .app_dest_i(app_dest),
    .app_err_valid_o(app_err_valid), .app_err_id_o(app_err_id), .app_err_o(app_err),
    .m_o(xm_i[0]), .m_i(xm_o[0])
  );

  wb_to_axi #(.NCH(NCH)) u_wb2axi (
    .clk, .rst(prst[0]), .s_i(xs_o[0]), .s_o(xs_i[0]),
    .m_tdata(f2c_tdata), .m_tlast(f2c_tlast), .m_tvalid(f2c_tvalid), .m_tready(f2c_tready)
  );

  // ---------------- ports 1..3: PR regions ----------------
  localparam comp_fn_e REGION_FN [1:3] = '{FN_MULT, FN_HAM_ENC, FN_HAM_DEC};

  assign pr_err[0]       = ST_OK;
  assign pr_err_valid[0] = 1'b0;

  for (genvar r = 1; r < NPORTS; r++) begin : g_region
    pr_region #(.FUNC(REGION_FN[r]), .MULT_CONST(MULT_CONST), .TIMEOUT(TIMEOUT)) u_region (
      .clk, .rst(prst[r]), .dest_i(pr_dest[r]),
      .err_o(pr_err[r]), .err_valid_o(pr_err_valid[r]),
      .m_o(xm_i[r]), .m_i(xm_o[r]), .s_i(xs_o[r]), .s_o(xs_i[r])
    );
  end

  // ---------------- bitstream path to the ICAP ----------------
  async_fifo #(.DW(DW), .DEPTH(ICAP_DEPTH)) u_icap_fifo (
    .wclk(clk), .wrst(rst), .w_data(bit_tdata), .w_valid(bit_tvalid), .w_ready(bit_tready),
    .rclk(icap_clk), .rrst(icap_rst), .r_data(icap_data_o), .r_valid(icap_valid_o), .r_ready(icap_ready_i)
  );
endmodule
