// lpgbt_dl_link -- downlink user interface of one lpGBT link: writes one frame
// per LHC clock cycle from the 40 MHz internal clock domain into the link's
// 320 MHz transmit parallel clock domain with a deterministic phase.
//
// The link's transceiver produces its own 320 MHz parallel clock (txclk) from
// the reference clock that the IOPLL's 320 MHz output feeds through the
// external jitter cleaner, so txclk is frequency-locked to clk40 at 8:1 but its
// phase, and the phase of the Data Write Enable counted in it, are unknown.
// dwe_gen makes the one-in-eight Data Write Enable; we_align_ctrl shifts it
// until the 40 MHz clock samples it as 1, which pins the write edge to a fixed
// place inside the LHC clock period. On the txclk edge that ends the dwe cycle
// the frame register takes frame40; tx_clk_en is dwe delayed to match, so the
// lpGBT-FPGA downlink sees frame and clock enable together.
//
// Interface: clk40/rst40 side (frame40, aligned, fail, steps), txclk/txrst
// side (tx_frame, tx_clk_en). Frame layout is lpgbt_ttc_pkg::dl_frame_t
// (2 IC + 2 EC + 32 data bits, the paper's 32-bit data and 4 control bits).
// Timing: a new frame appears on tx_frame once every eight txclk cycles,
// together with its one-cycle tx_clk_en pulse.
//
// The alignment procedure follows the paper; the frame register and the use
// of tx_clk_en as the lpGBT-FPGA downlink clock enable are this design's.
module lpgbt_dl_link
  import lpgbt_ttc_pkg::*;
#(
  parameter int unsigned PERIOD        = DWE_PERIOD,
  parameter int unsigned SETTLE_CYCLES = 4
) (
  input  logic       clk40,
  input  logic       rst40,
  input  dl_frame_t  frame40,
  input  logic       txclk,
  input  logic       txrst,
  output dl_frame_t  tx_frame,
  output logic       tx_clk_en,
  output logic       aligned,
  output logic       fail,
  output logic [3:0] steps
);
  logic shift_tgl;
  logic dwe;

  dwe_gen #(.PERIOD(PERIOD)) u_dwe (
    .txclk    (txclk),
    .rst      (txrst),
    .shift_tgl(shift_tgl),
    .dwe      (dwe)
  );

  we_align_ctrl #(.PERIOD(PERIOD), .SETTLE_CYCLES(SETTLE_CYCLES)) u_ctrl (
    .clk40    (clk40),
    .rst      (rst40),
    .dwe      (dwe),
    .shift_tgl(shift_tgl),
    .aligned  (aligned),
    .fail     (fail),
    .steps    (steps)
  );

  always_ff @(posedge txclk) begin
    if (txrst) begin
      tx_frame  <= '0;
      tx_clk_en <= 1'b0;
    end else begin
      tx_clk_en <= dwe;
      if (dwe) tx_frame <= frame40;
    end
  end
endmodule
