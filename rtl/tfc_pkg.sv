// tfc_pkg: types and constants shared by the Timing and Fast Control (TFC) cores.
//
// A link word is what one transceiver lane carries per 120 MHz cycle: a 32-bit
// payload plus a control flag (k). Control words have 8'hBC / 8'hFB in the low
// byte, in the manner of 8b/10b comma and frame characters. The transceiver's
// receive side adds a valid flag and a decode-error flag (gth_rx_t).
// The 120 MHz / 40 MHz ratio (three subcycles per system period) follows the
// paper; the word codes, frame format and Wishbone structs are this design's own.
package tfc_pkg;

  // Transport clock f_tr = 120 MHz, system clock f_sys = 40 MHz.
  // Three subcycles per system period; SUB_W bits hold a subcycle number.
  localparam int unsigned SUB_W     = 2;

  typedef struct packed {
    logic        k;   // 1: control word
    logic [31:0] d;
  } link_word_t;

  typedef struct packed {
    logic       valid;     // receiver aligned and delivering words
    logic       code_err;  // decode / disparity error on this word
    link_word_t word;
  } gth_rx_t;

  // Control words used by the Link Access Unit.
  localparam logic [31:0] K_IDLE = 32'h0000_00BC;
  localparam logic [31:0] K_INIT = 32'h0000_01BC;
  localparam logic [31:0] K_ACK  = 32'h0000_02BC;
  // Start of timestamp frame: bits 9:8 carry the sender's subcycle, the other
  // upper bits are reserved and must be zero.
  localparam logic [7:0]  K_SOF_CODE = 8'hFB;

  localparam link_word_t W_IDLE = '{k: 1'b1, d: K_IDLE};
  localparam link_word_t W_INIT = '{k: 1'b1, d: K_INIT};
  localparam link_word_t W_ACK  = '{k: 1'b1, d: K_ACK};

  function automatic link_word_t sof_word(input logic [SUB_W-1:0] sub);
    return '{k: 1'b1, d: {22'd0, sub, K_SOF_CODE}};
  endfunction

  function automatic logic is_sof(input link_word_t w);
    return w.k && (w.d[7:0] == K_SOF_CODE) && (w.d[31:10] == 22'd0);
  endfunction

  // Wishbone (classic, 32-bit data, word addresses).
  localparam int unsigned WB_AW = 6;

  typedef struct packed {
    logic             cyc;
    logic             stb;
    logic             we;
    logic [WB_AW-1:0] adr;
    logic [31:0]      dat;
    logic [3:0]       sel;
  } wb_req_t;

  typedef struct packed {
    logic        ack;
    logic [31:0] dat;
  } wb_rsp_t;

  // Register map shared by the three core variants (word addresses).
  localparam int unsigned REG_ID       = 0;  // RO  core identifier
  localparam int unsigned REG_CTRL     = 1;  // RW  bit0: synchronisation enable
  localparam int unsigned REG_STATUS   = 2;  // RO  bit0 selected link up, bit1 synced, [31:16] links up
  localparam int unsigned REG_TS_LO    = 3;  // RO  timestamp[31:0]; reading it snapshots [63:32]
  localparam int unsigned REG_TS_HI    = 4;  // RO  timestamp[63:32] snapshot
  localparam int unsigned REG_SUB      = 5;  // RO  current subcycle
  localparam int unsigned REG_PERIOD   = 6;  // RW  timestamp frame period, 40 MHz ticks
  localparam int unsigned REG_TSSET_LO = 7;  // RW  timestamp preset [31:0]
  localparam int unsigned REG_TSSET_HI = 8;  // RW  timestamp preset [63:32]; writing loads the timestamper
  localparam int unsigned REG_FRAMES   = 9;  // RO  frames sent (master side) / received (endpoint side)
  localparam int unsigned REG_TS_CORR  = 10; // RO  timestamp corrections applied
  localparam int unsigned REG_PH_CORR  = 11; // RO  subcycle (phase) corrections applied
  localparam int unsigned REG_ARR_SUB  = 12; // RO  subcycle at which the last frame arrived
  localparam int unsigned REG_LINK_ERR = 13; // RO  protocol error count of the selected link
  localparam int unsigned REG_FIFO_CNT = 14; // RO  {rx FIFO count, tx FIFO count} of the selected link
  localparam int unsigned REG_LINK_SEL = 15; // RW  link index for the per-link registers
  localparam int unsigned REG_LAT_COMP = 16; // RW  latency compensation, 120 MHz cycles (upstream side)
  localparam int unsigned N_REGS       = 17;

  localparam logic [31:0] ID_MASTER    = 32'h5446_434D; // "TFCM"
  localparam logic [31:0] ID_SUBMASTER = 32'h5446_4353; // "TFCS"
  localparam logic [31:0] ID_ENDPOINT  = 32'h5446_4345; // "TFCE"

endpackage
