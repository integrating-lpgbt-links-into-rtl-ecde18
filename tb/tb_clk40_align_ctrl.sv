// tb_clk40_align_ctrl -- self-checking test of the 40 MHz clock alignment
// state machine, closed around the IOPLL behavioural model.
//
// A 240 MHz reference with a PON valid bit high one cycle in six drives the
// machine and the PLL model (which comes up on a random one of six phases
// after each PLL reset). The testbench, independently of the machine, checks
// that whenever aligned is high every clk40 rising edge sees the valid bit
// high (the edge that ends the valid cycle), that the machine reaches
// alignment, that the reported retry count equals the number of PLL reset
// pulses seen after the machine left its own reset, and that a PLL relock (forced by shifting the valid
// bit by one cycle) is detected and corrected. Repeated for several resets of
// the machine to cover different random start phases.
module tb_clk40_align_ctrl;
  localparam realtime T = 4.168;
  int checks = 0, failures = 0;

  logic clk240 = 1'b0, rst240 = 1'b1, pon_valid = 1'b0;
  logic clk40, clk320, pll_locked, pll_rst, aligned;
  logic [7:0] retries;
  int unsigned vcnt = 0;
  int unsigned voff = 0;

  always #(T / 2) clk240 = ~clk240;
  always @(posedge clk240) begin
    vcnt      <= (vcnt + 1) % 6;
    pon_valid <= (((vcnt + 1) % 6) == voff);
  end

  iopll_model u_pll (.refclk(clk240), .rst(pll_rst), .clk40(clk40), .clk320(clk320), .locked(pll_locked));

  clk40_align_ctrl dut (
    .clk240(clk240), .rst240(rst240), .pon_valid(pon_valid), .clk40(clk40),
    .pll_locked(pll_locked), .pll_rst(pll_rst), .aligned(aligned), .retries(retries));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %t", what, $realtime);
    end
  endtask

  int n_rst_pulses = 0;
  int n_bad_aligned = 0;
  int n_good_aligned = 0;
  always @(posedge pll_rst) n_rst_pulses++;
  // Aligned must mean: clk40 rises right after the valid cycle.
  always @(posedge clk40) begin
    if (aligned && !rst240) begin
      if (pon_valid) n_good_aligned++;
      else n_bad_aligned++;
    end
  end

  initial begin : watchdog
    #(2000000.0);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int total_retries = 0;
    for (int r = 0; r < 8; r++) begin
      rst240 = 1'b1;
      repeat (4) @(posedge clk240);
      n_rst_pulses = 0;
      n_bad_aligned = 0;
      n_good_aligned = 0;
      rst240 = 1'b0;
      fork
        wait (aligned == 1'b1);
        repeat (20000) @(posedge clk240);
      join_any
      disable fork;
      check(aligned == 1'b1, "alignment reached");
      repeat (200) @(posedge clk240);
      check(aligned == 1'b1, "alignment holds");
      check(n_bad_aligned == 0, $sformatf("no misaligned clk40 edge while aligned (%0d bad)", n_bad_aligned));
      check(n_good_aligned > 20, "clk40 edges seen while aligned");
      check(int'(retries) == n_rst_pulses, $sformatf("retries %0d vs resets %0d", retries, n_rst_pulses));
      total_retries += int'(retries);
      // Move the LHC marker by one 240 MHz cycle: alignment must be lost and found again.
      if (r % 2 == 1) begin
        @(posedge clk240);
        voff = (voff + 1) % 6;
        repeat (40) @(posedge clk240);
        check(aligned == 1'b0, "loss of alignment detected");
        fork
          wait (aligned == 1'b1);
          repeat (20000) @(posedge clk240);
        join_any
        disable fork;
        n_bad_aligned = 0;
        repeat (200) @(posedge clk240);
        check(aligned == 1'b1 && n_bad_aligned == 0, "realigned after the marker moved");
      end
    end
    check(total_retries > 0, "at least one PLL reset for a wrong phase");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
