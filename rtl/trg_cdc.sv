// trg_cdc -- carries the trigger word of every LHC clock cycle from the 240 MHz
// PON receive domain into the aligned 40 MHz internal clock domain.
//
// The PON receiver presents a trigger word together with its valid bit, once
// every six 240 MHz cycles. The word is held in a 240 MHz register loaded on the
// valid bit, so it stays stable for six 240 MHz cycles. The 40 MHz clock, once
// clk40_align_ctrl has aligned it, rises on the 240 MHz edge that ends the
// valid cycle, i.e. on the same edge that loads the holding register; the 40 MHz
// register therefore takes the previous word on that edge and every word six
// 240 MHz cycles (one LHC clock) after it was loaded. Both clocks come from one
// PLL with fixed edges, so the transfer is a timed synchronous path and its
// latency is the same after every power-up: that deterministic latency is the
// point of the paper's design. The holding register scheme is this design's own.
//
// Interface: clk240, pon_valid, pon_trg[TRG_W] in; clk40 in; trg40[TRG_W] out.
// Latency: from the 240 MHz edge after the valid cycle to trg40 changing is one
// LHC clock period (six 240 MHz cycles).
module trg_cdc #(
  parameter int unsigned TRG_W = 32
) (
  input  logic             clk240,
  input  logic             pon_valid,
  input  logic [TRG_W-1:0] pon_trg,
  input  logic             clk40,
  output logic [TRG_W-1:0] trg40
);
  logic [TRG_W-1:0] trg240;

  always_ff @(posedge clk240) begin
    if (pon_valid) trg240 <= pon_trg;
  end

  always_ff @(posedge clk40) begin
    trg40 <= trg240;
  end
endmodule
