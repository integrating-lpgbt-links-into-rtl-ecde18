// clk40_align_ctrl -- aligns the IOPLL's 40 MHz internal clock to the LHC clock
// edge that the PON valid bit marks in the 240 MHz PON receive domain.
//
// The 40 MHz clock made by dividing 240 MHz by six can come up on any of six
// phase positions. This block samples the PON valid bit (high for one 240 MHz
// cycle in every six) with the 40 MHz clock itself. When the 40 MHz rising edge
// falls on the 240 MHz edge that ends the valid cycle, every sample reads 1;
// in each of the other five positions every sample reads 0. A control state
// machine on the always-running 240 MHz clock resets the IOPLL, waits for lock,
// lets the sample settle, and compares it; with no match it resets the PLL again
// and the procedure restarts, until the match is found. Once aligned it keeps
// watching and restarts if lock or the match is lost.
//
// Interface: 240 MHz side (clk240, synchronous active-high rst240, pon_valid),
// the IOPLL's clk40 and pll_locked, outputs pll_rst (to the IOPLL), aligned
// (240 MHz domain level) and retries (number of PLL resets issued, saturating).
// pll_rst and aligned come from flip-flops, one cycle after the state.
// Timing: each attempt takes RST_CYCLES + lock time + SETTLE_CYCLES 240 MHz
// cycles; on average six attempts are needed.
//
// The sampling of the valid bit with the generated clock and the PLL reset on
// mismatch follow the paper; the reset and settle lengths, the lock
// synchroniser and the monitoring after alignment are choices of this design.
module clk40_align_ctrl
  import lpgbt_ttc_pkg::*;
#(
  parameter int unsigned RST_CYCLES    = 16,
  parameter int unsigned SETTLE_CYCLES = 32
) (
  input  logic       clk240,
  input  logic       rst240,
  input  logic       pon_valid,
  input  logic       clk40,
  input  logic       pll_locked,
  output logic       pll_rst,
  output logic       aligned,
  output logic [7:0] retries
);

  // ---- 40 MHz side: sample the valid bit with the generated clock --------
  // No reset: the clock only runs once the PLL is locked, and the settle time
  // below flushes any stale value.
  logic valid_smp40;
  always_ff @(posedge clk40) valid_smp40 <= pon_valid;

  // ---- back into the 240 MHz domain ---------------------------------------
  logic [1:0] smp_sync, lock_sync;
  always_ff @(posedge clk240) begin
    if (rst240) begin
      smp_sync  <= '0;
      lock_sync <= '0;
    end else begin
      smp_sync  <= {smp_sync[0], valid_smp40};
      lock_sync <= {lock_sync[0], pll_locked};
    end
  end
  wire match  = smp_sync[1];
  wire locked = lock_sync[1];

  localparam int unsigned CW = $clog2((RST_CYCLES > SETTLE_CYCLES ? RST_CYCLES : SETTLE_CYCLES) + 1);

  ca_state_e       state;
  logic [CW-1:0]   cnt;

  always_ff @(posedge clk240) begin
    if (rst240) begin
      state   <= CA_PLL_RST;
      cnt     <= '0;
      retries <= '0;
    end else begin
      unique case (state)
        CA_PLL_RST: begin
          if (cnt == CW'(RST_CYCLES - 1)) begin
            cnt   <= '0;
            state <= CA_WAIT_LK;
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        CA_WAIT_LK: begin
          if (locked) state <= CA_SETTLE;
        end
        CA_SETTLE: begin
          if (!locked) begin
            state <= CA_WAIT_LK;
            cnt   <= '0;
          end else if (cnt == CW'(SETTLE_CYCLES - 1)) begin
            cnt   <= '0;
            state <= CA_CHECK;
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        CA_CHECK: begin
          if (match) begin
            state <= CA_ALIGNED;
          end else begin
            state   <= CA_PLL_RST;
            retries <= (retries == 8'hFF) ? retries : retries + 1'b1;
          end
        end
        CA_ALIGNED: begin
          if (!match || !locked) begin
            state   <= CA_PLL_RST;
            retries <= (retries == 8'hFF) ? retries : retries + 1'b1;
          end
        end
        default: state <= CA_PLL_RST;
      endcase
    end
  end

  // Registered copies of the state decode: pll_rst resets the PLL
  // asynchronously and aligned resets the 40 MHz logic, so both come straight
  // from flip-flops, one 240 MHz cycle after the state.
  always_ff @(posedge clk240) begin
    if (rst240) begin
      pll_rst <= 1'b1;
      aligned <= 1'b0;
    end else begin
      pll_rst <= (state == CA_PLL_RST);
      aligned <= (state == CA_ALIGNED);
    end
  end

endmodule
