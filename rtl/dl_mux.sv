// dl_mux -- downlink source multiplexer: chooses, link by link, what each
// lpGBT downlink carries in the next LHC clock cycle.
//
// Three sources feed the downlinks of the CRU: the trigger word received from
// the PON link (TTC, common to all links), a downlink data generator (DDG, one
// 32-bit word per link) and slow control (a complete 36-bit frame per link).
// For SRC_TTC and SRC_DDG the 32 data bits come from that source and the four
// IC/EC control bits from slow control; SRC_SC passes the slow-control frame
// whole; SRC_IDLE sends zeros. The result is registered on clk40.
//
// Interface: clk40, rst (synchronous, active high), per-link sel
// (lpgbt_ttc_pkg::dl_src_e), ttc[32], ddg[N_LINKS][32], sc[N_LINKS] frames;
// frame[N_LINKS] out. Latency: one clk40 cycle.
//
// The three sources and the multiplexer come from the CRU block diagram; the
// encoding of the select and the split of control and data bits are this
// design's choices.
module dl_mux
  import lpgbt_ttc_pkg::*;
#(
  parameter int unsigned N_LINKS = MAX_LINKS
) (
  input  logic                 clk40,
  input  logic                 rst,
  input  dl_src_e              sel   [N_LINKS],
  input  logic [DL_DATA_W-1:0] ttc,
  input  logic [DL_DATA_W-1:0] ddg   [N_LINKS],
  input  dl_frame_t            sc    [N_LINKS],
  output dl_frame_t            frame [N_LINKS]
);
  for (genvar i = 0; i < N_LINKS; i++) begin : g_link
    dl_frame_t nxt;
    always_comb begin
      nxt = '0;
      unique case (sel[i])
        SRC_TTC:  nxt = '{ic: sc[i].ic, ec: sc[i].ec, data: ttc};
        SRC_DDG:  nxt = '{ic: sc[i].ic, ec: sc[i].ec, data: ddg[i]};
        SRC_SC:   nxt = sc[i];
        default:  nxt = '0;
      endcase
    end
    always_ff @(posedge clk40) begin
      if (rst) frame[i] <= '0;
      else     frame[i] <= nxt;
    end
  end
endmodule
