// tb_we_align_ctrl -- self-checking test of the lpGBT Write Enable Control
// state machine against a model of the 320 MHz Data Write Enable.
//
// The testbench has its own write-enable model: a modulo-8 counter on a
// 320 MHz clock (delayed by 0.9 ns from the 40 MHz clock, as after the
// external jitter cleaner) with a random start phase, which holds for one
// cycle whenever shift_tgl flips. For many random phases it checks that the
// machine declares alignment within eight comparisons, that the write enable
// is then high at every 40 MHz edge, that steps equals the number of shifts
// the model received, and that exactly the eight phases produce the eight
// possible step counts 0..7. A model with a stuck write enable must make the
// machine report fail after eight shifts; a write enable moved after alignment
// must be found again.
module tb_we_align_ctrl;
  localparam realtime T40 = 25.0;
  int checks = 0, failures = 0;

  logic clk40 = 1'b0, clk320 = 1'b0, txclk, rst = 1'b1;
  logic dwe = 1'b0, shift_tgl, aligned, fail;
  logic [3:0] steps;
  bit stuck = 1'b0;

  we_align_ctrl dut (.clk40(clk40), .rst(rst), .dwe(dwe), .shift_tgl(shift_tgl),
                     .aligned(aligned), .fail(fail), .steps(steps));

  always #(T40 / 2) clk40 = ~clk40;
  initial forever begin
    @(posedge clk40);
    for (int i = 0; i < 8; i++) begin
      clk320 = 1'b1;
      #(T40 / 16);
      clk320 = 1'b0;
      if (i < 7) #(T40 / 16);
    end
  end
  always @(clk320) txclk <= #0.9 clk320;

  // Write-enable model.
  int unsigned cnt = 0;
  logic        tgl_q = 1'b0;
  int          n_shift = 0;
  always @(posedge txclk) begin
    tgl_q <= shift_tgl;
    if (tgl_q != shift_tgl) n_shift++;
    else cnt = (cnt + 1) % 8;
    dwe <= !stuck && (cnt == 0);
  end

  int n_bad = 0;
  always @(posedge clk40) if (aligned && !rst && !dwe) n_bad++;

  initial begin : watchdog
    #(2000000.0);
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

  task automatic wait_aligned(input int max_cycles);
    fork
      wait (aligned == 1'b1);
      repeat (max_cycles) @(posedge clk40);
    join_any
    disable fork;
  endtask

  initial begin
    bit seen_steps [8];
    int nseen;
    for (int r = 0; r < 40; r++) begin
      rst = 1'b1;
      repeat (3) @(posedge clk40);
      @(posedge txclk);
      cnt = (r < 8) ? r : $urandom_range(7, 0);
      repeat (3) @(posedge clk40);
      n_shift = 0;
      n_bad = 0;
      rst = 1'b0;
      // 8 comparisons of (4 settle + 1) cycles plus slack.
      wait_aligned(8 * 5 + 4);
      check(aligned == 1'b1, "aligned within eight comparisons");
      repeat (30) @(posedge clk40);
      check(n_bad == 0, "write enable high at every 40 MHz edge while aligned");
      check(int'(steps) == n_shift, $sformatf("steps %0d = shifts %0d", steps, n_shift));
      check(n_shift <= 7, "at most seven shifts");
      if (steps < 8) seen_steps[steps[2:0]] = 1'b1;
    end
    nseen = 0;
    foreach (seen_steps[i]) nseen += seen_steps[i];
    check(nseen == 8, $sformatf("all eight phase positions exercised (%0d)", nseen));

    // Move the write enable by one period after alignment: must realign.
    @(posedge txclk);
    cnt = (cnt + 1) % 8;
    repeat (5) @(posedge clk40);
    check(aligned == 1'b0, "loss of alignment detected");
    wait_aligned(8 * 5 + 4);
    repeat (3) @(posedge clk40);
    n_bad = 0;
    repeat (20) @(posedge clk40);
    check(aligned == 1'b1 && n_bad == 0, "realigned");

    // Stuck write enable: fail after eight shifts.
    begin
      int nfail = 0;
      stuck = 1'b1;
      rst = 1'b1;
      repeat (3) @(posedge clk40);
      n_shift = 0;
      rst = 1'b0;
      repeat (60) begin
        @(posedge clk40);
        if (fail) break;
      end
      check(fail == 1'b1, "fail reported");
      check(n_shift == 8, $sformatf("eight shifts before fail (%0d)", n_shift));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
