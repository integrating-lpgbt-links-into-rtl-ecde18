// we_align_ctrl -- lpGBT Write Enable Control state machine of one link, in the
// aligned 40 MHz internal clock domain.
//
// The Data Write Enable (dwe) of a link's 320 MHz domain has one of eight
// phase positions relative to the 40 MHz clock. This machine samples dwe with
// the 40 MHz clock: because dwe repeats with exactly the 40 MHz period, every
// sample of a given phase reads the same value, so the two-flip-flop
// synchroniser in front of the machine does not change what is seen. If the
// sample is 1 the write enable is aligned. If it is 0 the machine asks the
// dwe generator to shift dwe by one 320 MHz period (by flipping shift_tgl),
// waits SETTLE_CYCLES 40 MHz cycles for the shifted dwe to come back through
// the synchroniser, and compares again. One of the eight positions reads 1,
// so alignment is found after at most PERIOD comparisons (PERIOD-1 shifts).
// If PERIOD shifts pass without a match the machine signals fail for one
// cycle and starts over; once aligned it keeps watching and starts over if
// the sample ever reads 0.
//
// Interface: clk40, rst (synchronous, active high), dwe in (from txclk);
// shift_tgl out (to dwe_gen), aligned (level), fail (one-cycle pulse),
// steps (shifts used by the last alignment).
// Timing: each comparison takes SETTLE_CYCLES + 1 cycles of clk40.
//
// Sampling dwe, shifting by one period and the eight-step bound follow the
// paper; the toggle handshake, the settle time and the behaviour on failure
// and after alignment are this design's choices.
module we_align_ctrl
  import lpgbt_ttc_pkg::*;
#(
  parameter int unsigned PERIOD        = 8,
  parameter int unsigned SETTLE_CYCLES = 4
) (
  input  logic       clk40,
  input  logic       rst,
  input  logic       dwe,
  output logic       shift_tgl,
  output logic       aligned,
  output logic       fail,
  output logic [3:0] steps
);
  localparam int unsigned SW = $clog2(SETTLE_CYCLES + 1);

  logic [1:0]    dwe_sync;
  we_state_e     state;
  logic [SW-1:0] cnt;
  logic [3:0]    nshift;

  always_ff @(posedge clk40) begin
    if (rst) dwe_sync <= '0;
    else     dwe_sync <= {dwe_sync[0], dwe};
  end

  always_ff @(posedge clk40) begin
    if (rst) begin
      state     <= WE_SETTLE;
      cnt       <= '0;
      nshift    <= '0;
      shift_tgl <= 1'b0;
      steps     <= '0;
      fail      <= 1'b0;
    end else begin
      fail <= 1'b0;
      unique case (state)
        WE_SETTLE: begin
          if (cnt == SW'(SETTLE_CYCLES - 1)) begin
            cnt   <= '0;
            state <= WE_SAMPLE;
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        WE_SAMPLE: begin
          if (dwe_sync[1]) begin
            state <= WE_ALIGNED;
            steps <= nshift;
          end else if (nshift == 4'(PERIOD)) begin
            state <= WE_FAIL;
          end else begin
            shift_tgl <= ~shift_tgl;
            nshift    <= nshift + 1'b1;
            state     <= WE_SETTLE;
          end
        end
        WE_ALIGNED: begin
          if (!dwe_sync[1]) begin
            nshift <= '0;
            state  <= WE_SETTLE;
          end
        end
        WE_FAIL: begin
          fail   <= 1'b1;
          nshift <= '0;
          state  <= WE_SETTLE;
        end
        default: state <= WE_SETTLE;
      endcase
    end
  end

  assign aligned = (state == WE_ALIGNED);

  // A shift is only ever requested after a 0 was seen.
  a_shift_on_zero: assert property (@(posedge clk40) disable iff (rst)
      (state == WE_SAMPLE && !dwe_sync[1] && nshift != 4'(PERIOD)) |=> (shift_tgl != $past(shift_tgl)));
  a_bound: assert property (@(posedge clk40) disable iff (rst) nshift <= 4'(PERIOD));
endmodule
