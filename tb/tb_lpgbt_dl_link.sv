// tb_lpgbt_dl_link -- self-checking test of one lpGBT downlink user interface
// (write-enable generator, its alignment machine and the frame register).
//
// The 40 MHz clock and a 320 MHz clock locked 8:1 to it are made here; the
// link's transmit clock is the 320 MHz clock delayed by 0.9 ns, standing for
// the external jitter cleaner and the transceiver. A new random frame is
// launched on every 40 MHz edge. The link reset is released on a random
// 320 MHz cycle (a random one of eight write-enable phases) in each of twelve
// runs. After alignment the testbench checks that every tx_clk_en pulse comes
// with the frame launched on the latest 40 MHz edge, that the transmit edge
// writing it is exactly 0.9 ns after that 40 MHz edge in every run (the
// deterministic phase), and that there is exactly one write per eight
// transmit cycles.
module tb_lpgbt_dl_link;
  import lpgbt_ttc_pkg::*;
  localparam realtime T40 = 25.0;
  localparam realtime D   = 0.9;
  int checks = 0, failures = 0;

  logic clk40 = 1'b0, clk320 = 1'b0, txclk, rst40 = 1'b1, txrst = 1'b1;
  dl_frame_t frame40 = '0, tx_frame;
  logic tx_clk_en, aligned, fail;
  logic [3:0] steps;

  lpgbt_dl_link dut (.clk40(clk40), .rst40(rst40), .frame40(frame40), .txclk(txclk), .txrst(txrst),
                     .tx_frame(tx_frame), .tx_clk_en(tx_clk_en), .aligned(aligned), .fail(fail), .steps(steps));

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
  always @(clk320) txclk <= #(D) clk320;

  realtime t40 = 0, t_tx_prev = 0;
  always @(posedge clk40) begin
    t40 = $realtime;
    frame40 <= {4'($urandom), 32'($urandom)};
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %t", what, $realtime);
    end
  endtask

  bit monitor = 0;
  int n_en = 0, n_tx = 0;
  always @(posedge txclk) begin
    if (monitor) begin
      n_tx++;
      if (tx_clk_en) begin
        n_en++;
        check(tx_frame == frame40, "frame of the latest 40 MHz edge");
        check((t_tx_prev - t40) > D - 0.002 && (t_tx_prev - t40) < D + 0.002,
              $sformatf("write edge %0t after the 40 MHz edge", t_tx_prev - t40));
      end
    end
    t_tx_prev = $realtime;
  end

  initial begin : watchdog
    #(1000000.0);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int nshift_runs = 0;
    for (int r = 0; r < 12; r++) begin
      monitor = 0;
      rst40 = 1'b1;
      txrst = 1'b1;
      repeat (2) @(posedge clk40);
      repeat ($urandom_range(7, 0) + (r % 8)) @(posedge txclk);
      txrst = 1'b0;
      @(posedge clk40);
      rst40 = 1'b0;
      fork
        wait (aligned == 1'b1);
        repeat (100) @(posedge clk40);
      join_any
      disable fork;
      check(aligned == 1'b1, "link aligned");
      if (steps != 0) nshift_runs++;
      repeat (2) @(posedge clk40);
      n_en = 0;
      n_tx = 0;
      monitor = 1;
      repeat (40) @(posedge clk40);
      #0.5;
      monitor = 0;
      check(n_en == 40 && n_tx == 320, $sformatf("one write per 8 cycles (%0d in %0d)", n_en, n_tx));
      check(fail == 1'b0, "no failure");
    end
    check(nshift_runs > 0, "some runs needed shifts");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
