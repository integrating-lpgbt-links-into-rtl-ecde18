// dwe_gen -- Data Write Enable generator of one lpGBT link, in the link's
// 320 MHz transmit parallel clock domain.
//
// New trigger data arrive once per LHC clock, but the lpGBT-FPGA downlink is
// clocked at 320 MHz, so one edge in eight must be marked as the one that
// writes a new frame into the link. A modulo-PERIOD counter makes that
// periodic one-in-eight Data Write Enable (dwe). Its phase relative to the
// LHC clock is arbitrary after reset (one of eight positions). Each request
// from the Write Enable Control machine in the 40 MHz domain holds the counter
// for one cycle, which delays dwe by exactly one 320 MHz period.
//
// Requests arrive as a level toggle (shift_tgl), brought into txclk with two
// flip-flops and edge-detected here, so one toggle is one shift whatever the
// phase between the two clocks. The toggle handshake and the registered dwe
// output are choices of this design; the one-period shift is the paper's.
//
// Interface: txclk, rst (synchronous, active high), shift_tgl in; dwe out,
// registered, high for one txclk cycle in every PERIOD.
// Timing: a toggle shifts dwe 3 to 4 txclk cycles after it reaches txclk.
module dwe_gen #(
  parameter int unsigned PERIOD = 8
) (
  input  logic txclk,
  input  logic rst,
  input  logic shift_tgl,
  output logic dwe
);
  localparam int unsigned CW = (PERIOD > 1) ? $clog2(PERIOD) : 1;

  logic [2:0]    tgl_sync;
  logic [CW-1:0] cnt, cnt_nxt;
  logic          shift;

  always_ff @(posedge txclk) begin
    if (rst) tgl_sync <= {3{shift_tgl}};
    else     tgl_sync <= {tgl_sync[1:0], shift_tgl};
  end
  assign shift = tgl_sync[2] ^ tgl_sync[1];

  always_comb begin
    if (shift)                           cnt_nxt = cnt;
    else if (cnt == CW'(PERIOD - 1))     cnt_nxt = '0;
    else                                 cnt_nxt = cnt + 1'b1;
  end

  always_ff @(posedge txclk) begin
    if (rst) begin
      cnt <= '0;
      dwe <= 1'b0;
    end else begin
      cnt <= cnt_nxt;
      dwe <= (cnt_nxt == '0) && !shift;
    end
  end
endmodule
