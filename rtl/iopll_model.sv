// iopll_model -- behavioural model of the FPGA-internal I/O PLL (IOPLL) of the
// lpGBT clock path. Not synthesizable: it stands for a hard PLL of the FPGA.
//
// From the jitter-cleaned 240 MHz PON receive clock the PLL makes a 40 MHz
// internal clock (divide by PON_RATIO = 6) and a 320 MHz clock that is locked
// to the 40 MHz clock with ratio HS_RATIO:1 = 8:1; the 320 MHz clock leaves the
// FPGA towards the external jitter cleaner of the lpGBT transceiver banks.
// Because of the frequency division, after every reset the 40 MHz clock comes
// up on one of PON_RATIO possible phase positions relative to the 240 MHz
// edges; the model draws that position at random with $urandom, which is what
// the alignment state machine downstream has to cope with.
//
// How it works: the model measures the reference period from the last two
// 240 MHz edges, counts reference edges modulo PON_RATIO from a random start,
// drives clk40 high for the first half of each count cycle (so its rising edge
// coincides with a reference edge, as in a PLL with compensated feedback) and
// schedules the HS_RATIO 320 MHz rising edges of each 40 MHz period with
// delays of j * PON_RATIO / HS_RATIO reference periods. Outputs stay low and
// locked stays 0 while rst is high and for LOCK_CYCLES reference cycles after
// it (the lock time is an arbitrary model value).
//
// Interface: refclk (240 MHz), rst (active high, asynchronous), clk40,
// clk320, locked.
module iopll_model #(
  parameter int unsigned PON_RATIO   = 6,
  parameter int unsigned HS_RATIO    = 8,
  parameter int unsigned LOCK_CYCLES = 64
) (
  input  logic refclk,
  input  logic rst,
  output logic clk40,
  output logic clk320,
  output logic locked
);

  realtime     t_last;      // time of the previous reference edge
  realtime     t_ref;       // measured reference period
  int unsigned k;           // reference edge index inside one 40 MHz period
  int unsigned lock_cnt;
  logic        running;

  initial begin
    clk40    = 1'b0;
    clk320   = 1'b0;
    locked   = 1'b0;
    running  = 1'b0;
    lock_cnt = 0;
    k        = 0;
    t_last   = 0.0;
    t_ref    = 0.0;
  end

  always @(posedge refclk or posedge rst) begin
    if (rst) begin
      running  = 1'b0;
      locked   = 1'b0;
      clk40    = 1'b0;
      clk320   = 1'b0;
      lock_cnt = 0;
      // Random phase position of the divided clock after this reset.
      k        = $urandom_range(PON_RATIO - 1, 0);
    end else begin
      t_ref  = $realtime - t_last;
      t_last = $realtime;
      if (!running) begin
        lock_cnt = lock_cnt + 1;
        if (lock_cnt >= LOCK_CYCLES) begin
          running = 1'b1;
        end
        k = (k + 1) % PON_RATIO;
      end else begin
        k = (k + 1) % PON_RATIO;
        clk40  = (k < PON_RATIO / 2);
        locked = 1'b1;
        // 320 MHz rising edges falling inside this reference period.
        for (int unsigned j = 0; j < HS_RATIO; j++) begin
          if (j * PON_RATIO >= k * HS_RATIO && j * PON_RATIO < (k + 1) * HS_RATIO) begin
            automatic realtime d  = real'(j * PON_RATIO - k * HS_RATIO) * t_ref / real'(HS_RATIO);
            automatic realtime hp = t_ref * real'(PON_RATIO) / real'(2 * HS_RATIO);
            fork
              begin
                #(d);
                if (running) clk320 = 1'b1;
                #(hp);
                clk320 = 1'b0;
              end
            join_none
          end
        end
      end
    end
  end

endmodule
