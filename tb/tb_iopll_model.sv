// tb_iopll_model -- self-checking test of the IOPLL behavioural model.
//
// Drives a 240 MHz reference (period 4.168 ns), resets the model many times
// and checks after every lock: clk40 period is six reference periods, every
// clk40 rising edge falls on a reference rising edge, clk320 has eight rising
// edges per clk40 period with one on each clk40 rising edge, locked is low in
// reset. It also records on which of the six reference edges (counted by the
// testbench) clk40 rises, and requires that more than one position shows up
// over the resets, since the model must reproduce the random phase of a
// divided clock.
module tb_iopll_model;
  localparam realtime T = 4.168;
  int checks = 0, failures = 0;

  logic refclk = 1'b0, rst = 1'b1;
  logic clk40, clk320, locked;
  int unsigned refcnt = 0;

  iopll_model dut (.refclk(refclk), .rst(rst), .clk40(clk40), .clk320(clk320), .locked(locked));

  always #(T / 2) refclk = ~refclk;
  always @(posedge refclk) refcnt <= refcnt + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %t", what, $realtime);
    end
  endtask

  realtime t_ref_rise = 0, t40 = 0, t40_prev = 0;
  int      n320 = 0;
  bit      seen_phase [6];
  bit      measuring = 0;

  always @(posedge refclk) t_ref_rise = $realtime;
  always @(posedge clk320) if (measuring) n320++;
  always @(posedge clk40) begin
    t40_prev = t40;
    t40      = $realtime;
  end

  initial begin : watchdog
    #(200000.0);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int nphase;
    for (int r = 0; r < 24; r++) begin
      rst = 1'b1;
      repeat (3) @(posedge refclk);
      #1.0;
      check(locked == 1'b0 && clk40 == 1'b0, "outputs quiet in reset");
      rst = 1'b0;
      wait (locked == 1'b1);
      repeat (2) @(posedge clk40);
      // One full clk40 period: edge alignment, period, number of 320 MHz edges.
      @(posedge clk40);
      #0.001;
      check(($realtime - t_ref_rise) < 0.01, "clk40 rises on a reference edge");
      check(clk320 == 1'b1, "clk320 rises with clk40");
      seen_phase[refcnt % 6] = 1'b1;
      n320 = 0;
      measuring = 1;
      @(posedge clk40);
      #0.001;
      measuring = 0;
      check(n320 == 8, $sformatf("8 clk320 edges per clk40 period (got %0d)", n320));
      check((t40 - t40_prev) > 6.0 * T - 0.01 && (t40 - t40_prev) < 6.0 * T + 0.01, "clk40 period = 6 T");
    end
    nphase = 0;
    foreach (seen_phase[i]) nphase += seen_phase[i];
    check(nphase > 1, $sformatf("random phase positions seen: %0d", nphase));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
