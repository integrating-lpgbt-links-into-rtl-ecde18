// lpgbt_ttc_pkg -- constants and types shared by the lpGBT clock and trigger
// distribution of the CRU.
//
// The clock ratios (240 MHz PON clock divided by six gives the 40 MHz LHC
// clock; the 320 MHz lpGBT transmit clock runs eight times the LHC clock) and
// the downlink payload (32 data bits plus 4 control bits per LHC clock cycle)
// are the numbers of the design. The split of the 4 control bits into two IC
// and two EC bits follows the usual lpGBT frame layout and is a choice of this
// implementation. State encodings of the two alignment machines are also
// defined here.
package lpgbt_ttc_pkg;

  // 240 MHz PON receive clock cycles per LHC (40 MHz) clock cycle.
  localparam int unsigned PON_RATIO  = 6;
  // 320 MHz lpGBT transmit clock cycles per LHC clock cycle.
  localparam int unsigned DWE_PERIOD = 8;
  // Downlink payload per LHC clock cycle.
  localparam int unsigned DL_DATA_W  = 32;
  localparam int unsigned DL_CTRL_W  = 4;
  localparam int unsigned DL_FRAME_W = DL_DATA_W + DL_CTRL_W;
  // Links served by one CRU.
  localparam int unsigned MAX_LINKS  = 24;

  // One downlink frame as handed to the lpGBT-FPGA downlink user interface.
  typedef struct packed {
    logic [1:0]           ic;    // internal-control (slow control) bits
    logic [1:0]           ec;    // external-control (slow control) bits
    logic [DL_DATA_W-1:0] data;  // trigger / user data bits
  } dl_frame_t;

  // Downlink payload source, per link.
  typedef enum logic [1:0] {
    SRC_TTC  = 2'd0,  // trigger word from the PON receiver
    SRC_DDG  = 2'd1,  // downlink data generator
    SRC_SC   = 2'd2,  // slow control supplies the full frame
    SRC_IDLE = 2'd3   // all-zero frame
  } dl_src_e;

  // 40 MHz clock alignment machine (runs on the 240 MHz clock).
  typedef enum logic [2:0] {
    CA_PLL_RST = 3'd0,  // hold the IOPLL in reset
    CA_WAIT_LK = 3'd1,  // wait for the IOPLL to lock
    CA_SETTLE  = 3'd2,  // let the valid-bit sample pass the synchroniser
    CA_CHECK   = 3'd3,  // compare the sample
    CA_ALIGNED = 3'd4   // aligned; keep watching
  } ca_state_e;

  // lpGBT Write Enable Control machine (runs on the 40 MHz clock).
  typedef enum logic [1:0] {
    WE_SETTLE  = 2'd0,  // wait for the shifted write enable to show
    WE_SAMPLE  = 2'd1,  // compare the sampled write enable
    WE_ALIGNED = 2'd2,  // aligned; keep watching
    WE_FAIL    = 2'd3   // no phase found within DWE_PERIOD shifts
  } we_state_e;

endpackage
