// cru_lpgbt_ttc -- lpGBT clock and trigger distribution of the ALICE Common
// Readout Unit: from the 10G PON trigger receiver to the downlink user
// interfaces of up to N_LINKS lpGBT links, with a latency that is the same
// after every power-up and every PLL relock.
//
// The PON receiver delivers a 240 MHz clock, trigger bits and a valid bit
// marking the LHC (40 MHz) clock edges. lpGBT transmitters need a 320 MHz
// reference (4:3 to the PON clock), so:
//   1. the IOPLL divides the 240 MHz clock by six into clk40 and also makes a
//      320 MHz clock locked 8:1 to clk40 (clk320_out, to the external jitter
//      cleaner that feeds the transceiver banks);
//   2. clk40_align_ctrl samples the valid bit with clk40 and resets the PLL
//      until clk40 rises on the LHC edge (one of six positions);
//   3. trg_cdc moves each trigger word from the 240 MHz domain into clk40 and
//      dl_mux picks, per link, TTC trigger, generator data or slow control;
//   4. every link (lpgbt_dl_link) aligns its 320 MHz Data Write Enable to clk40
//      (one of eight positions, at most eight steps) and writes one frame per
//      LHC clock into its transmit clock domain.
// Steps 1, 2 and 4 are the paper's procedure. The reset sequencing (clk40
// logic held in reset until clk40 is aligned, synchronised with two flip-
// flops) and the status outputs are this design's own.
//
// Interface: 240 MHz PON side (clk240, rst240 synchronous active high,
// pon_valid, pon_trg); per-link transmit clocks and resets from the
// transceivers (txclk, txrst); source selects, generator data and slow-control
// frames for the multiplexer; per-link tx_frame / tx_clk_en to the lpGBT-FPGA
// downlink; clk40_out and clk320_out clocks; status (clk40_aligned,
// pll_retries, link_aligned, link_fail, link_steps).
// Latency (aligned): a trigger word with its valid bit reaches tx_frame a fixed
// number of 240 MHz periods later, see the README.
module cru_lpgbt_ttc
  import lpgbt_ttc_pkg::*;
#(
  parameter int unsigned N_LINKS = MAX_LINKS
) (
  input  logic                 clk240,
  input  logic                 rst240,
  input  logic                 pon_valid,
  input  logic [DL_DATA_W-1:0] pon_trg,
  output logic                 clk40_out,
  output logic                 clk320_out,
  input  logic                 txclk         [N_LINKS],
  input  logic                 txrst         [N_LINKS],
  input  dl_src_e              src_sel       [N_LINKS],
  input  logic [DL_DATA_W-1:0] ddg_data      [N_LINKS],
  input  dl_frame_t            sc_frame      [N_LINKS],
  output dl_frame_t            tx_frame      [N_LINKS],
  output logic                 tx_clk_en     [N_LINKS],
  output logic                 clk40_aligned,
  output logic [7:0]           pll_retries,
  output logic                 link_aligned  [N_LINKS],
  output logic                 link_fail     [N_LINKS],
  output logic [3:0]           link_steps    [N_LINKS]
);
  logic clk40, pll_rst, pll_locked;

  iopll_model #(.PON_RATIO(PON_RATIO), .HS_RATIO(DWE_PERIOD)) u_iopll (
    .refclk(clk240),
    .rst   (pll_rst),
    .clk40 (clk40),
    .clk320(clk320_out),
    .locked(pll_locked)
  );

  clk40_align_ctrl u_align (
    .clk240    (clk240),
    .rst240    (rst240),
    .pon_valid (pon_valid),
    .clk40     (clk40),
    .pll_locked(pll_locked),
    .pll_rst   (pll_rst),
    .aligned   (clk40_aligned),
    .retries   (pll_retries)
  );

  assign clk40_out = clk40;

  // clk40 logic stays in reset until the 40 MHz clock is aligned: the reset
  // follows a loss of alignment at once (clk40 may then be stopped by a PLL
  // reset) and is released through a two-stage synchroniser, on the second
  // clk40 edge after alignment.
  logic [1:0] aligned_sync;
  logic       rst40;
  always_ff @(posedge clk40 or negedge clk40_aligned) begin
    if (!clk40_aligned) aligned_sync <= '0;
    else                aligned_sync <= {aligned_sync[0], 1'b1};
  end
  assign rst40 = !aligned_sync[1] || !clk40_aligned;

  logic [DL_DATA_W-1:0] trg40;
  trg_cdc #(.TRG_W(DL_DATA_W)) u_trg (
    .clk240   (clk240),
    .pon_valid(pon_valid),
    .pon_trg  (pon_trg),
    .clk40    (clk40),
    .trg40    (trg40)
  );

  dl_frame_t frame40 [N_LINKS];
  dl_mux #(.N_LINKS(N_LINKS)) u_mux (
    .clk40(clk40),
    .rst  (rst40),
    .sel  (src_sel),
    .ttc  (trg40),
    .ddg  (ddg_data),
    .sc   (sc_frame),
    .frame(frame40)
  );

  for (genvar i = 0; i < N_LINKS; i++) begin : g_link
    lpgbt_dl_link u_link (
      .clk40    (clk40),
      .rst40    (rst40),
      .frame40  (frame40[i]),
      .txclk    (txclk[i]),
      .txrst    (txrst[i]),
      .tx_frame (tx_frame[i]),
      .tx_clk_en(tx_clk_en[i]),
      .aligned  (link_aligned[i]),
      .fail     (link_fail[i]),
      .steps    (link_steps[i])
    );
  end
endmodule
