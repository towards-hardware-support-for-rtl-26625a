// wb_pkg -- types and constants shared by the elastic FPGA shell.
//
// The shell connects small computation modules, each placed in its own
// reconfigurable region, through a 4x4 WISHBONE crossbar. Every crossbar port
// has a master side (a WB master interface issuing requests) and a slave side
// (a WB slave interface receiving data). Destinations are one-hot slave masks
// (4 bits), data words are 32 bits and every word carries a 3-bit register
// address on SEL, so a packet holds up to 8 words. The port count, data
// width, one-hot addressing and 8-word packets follow the paper; the struct
// grouping, error encoding and field widths marked "own" are this design's.
package wb_pkg;

  localparam int unsigned NPORTS    = 4;   // crossbar ports
  localparam int unsigned DW        = 32;  // data width
  localparam int unsigned SELW      = 3;   // register address carried on SEL
  localparam int unsigned PKT_WORDS = 8;   // words per packet
  localparam int unsigned PKGW      = 8;   // width of a package limit (own)

  typedef logic [NPORTS-1:0] port_mask_t;  // one-hot destination / allowed mask
  typedef logic [PKGW-1:0]   pkg_cnt_t;
  typedef logic [DW-1:0]     word_t;
  typedef word_t [PKT_WORDS-1:0] packet_t;

  // Transaction result reported by a WB master interface (encoding own).
  typedef enum logic [1:0] {
    ST_OK          = 2'd0,  // all words acknowledged
    ST_BAD_ADDR    = 2'd1,  // master port refused the destination
    ST_GNT_TIMEOUT = 2'd2,  // no grant within the watchdog period
    ST_SLV_TIMEOUT = 2'd3   // slave stalled / did not acknowledge in time
  } wb_status_e;

  // Function of a computation module.
  typedef enum logic [1:0] {
    FN_MULT    = 2'd0,  // constant multiplier
    FN_HAM_ENC = 2'd1,  // Hamming(31,26) encoder
    FN_HAM_DEC = 2'd2   // Hamming(31,26) decoder
  } comp_fn_e;

  // WB master interface -> master port (Fig. 5: CYC_O, STB_O, WE_O, ADR_O, SEL_O, DAT_O)
  typedef struct packed {
    logic              cyc;
    logic              stb;
    logic              we;
    port_mask_t        adr;
    logic [SELW-1:0]   sel;
    word_t             dat;
  } wb_m2s_t;

  // Master port -> WB master interface (Fig. 5: GNT_I, ACK_I, ERR_I, STALL_I, DAT_I)
  typedef struct packed {
    logic  gnt;
    logic  ack;
    logic  err;
    logic  stall;
    word_t dat;
  } wb_s2m_t;

  // Slave port -> WB slave interface (Fig. 5: CYC_I, STB_I, WE_I, SEL_I, DAT_I)
  typedef struct packed {
    logic            cyc;
    logic            stb;
    logic            we;
    logic [SELW-1:0] sel;
    word_t           dat;
  } wb_x2s_t;

  // WB slave interface -> crossbar (Fig. 5: ACK_O, STALL_O, DAT_O)
  typedef struct packed {
    logic  ack;
    logic  stall;
    word_t dat;
  } wb_s2x_t;

endpackage
