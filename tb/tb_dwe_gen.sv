// tb_dwe_gen -- self-checking test of the Data Write Enable generator.
//
// Checks, on a free-running 320 MHz clock: after reset dwe is high for exactly
// one cycle in eight; each flip of shift_tgl makes exactly one gap of nine
// cycles between two dwe pulses, within a few cycles of the flip, after which
// the period is eight again. Flips are spaced by random numbers of cycles.
module tb_dwe_gen;
  int checks = 0, failures = 0;

  logic txclk = 1'b0, rst = 1'b1, shift_tgl = 1'b0, dwe;

  dwe_gen dut (.txclk(txclk), .rst(rst), .shift_tgl(shift_tgl), .dwe(dwe));

  always #1.5625 txclk = ~txclk;

  int cyc = 0, last = -1;
  int gaps [$];
  always @(posedge txclk) begin
    cyc <= cyc + 1;
    if (!rst && dwe) begin
      if (last >= 0) gaps.push_back(cyc - last);
      last <= cyc;
    end
  end

  initial begin : watchdog
    #(100000.0);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %t", what, $realtime);
    end
  endtask

  initial begin
    int n9, n8;
    repeat (5) @(posedge txclk);
    rst <= 1'b0;
    repeat (100) @(posedge txclk);
    foreach (gaps[i]) check(gaps[i] == 8, $sformatf("period 8 (gap %0d)", gaps[i]));
    for (int s = 0; s < 20; s++) begin
      gaps.delete();
      @(posedge txclk);
      shift_tgl <= ~shift_tgl;
      repeat (40 + $urandom_range(20, 0)) @(posedge txclk);
      n9 = 0;
      n8 = 0;
      foreach (gaps[i]) begin
        if (gaps[i] == 9) n9++;
        else if (gaps[i] == 8) n8++;
      end
      check(n9 == 1, $sformatf("one shifted gap per request (%0d)", n9));
      check(n8 + n9 == gaps.size(), "no other gap lengths");
      check(gaps.size() > 0 && gaps[0] inside {8, 9} && (gaps.size() < 2 || gaps[0] == 9 || gaps[1] == 9),
            "shift shows within two periods");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
