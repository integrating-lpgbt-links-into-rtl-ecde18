// tb_trg_cdc -- self-checking test of the trigger-word transfer from the
// 240 MHz PON domain into the aligned 40 MHz domain.
//
// The testbench makes an aligned clock pair itself: clk40 rises on every sixth
// 240 MHz edge, the edge that ends the cycle in which the valid bit is high.
// Each LHC cycle carries a new random trigger word. After every clk40 edge the
// output must hold the word presented with the valid bit one LHC cycle
// earlier, which also checks the latency: seven 240 MHz periods from the edge
// that launched the word with its valid bit to the edge that shows it on trg40.
module tb_trg_cdc;
  localparam realtime T = 4.168;
  int checks = 0, failures = 0;

  logic        clk240 = 1'b0, clk40 = 1'b0, pon_valid = 1'b0;
  logic [31:0] pon_trg = '0, trg40;
  int unsigned cnt = 0;

  trg_cdc dut (.clk240(clk240), .pon_valid(pon_valid), .pon_trg(pon_trg), .clk40(clk40), .trg40(trg40));

  always #(T / 2) clk240 = ~clk240;

  // Word history and launch times, indexed by LHC cycle.
  logic [31:0] word [$];
  realtime     t_launch [$];

  always @(posedge clk240) begin
    cnt = (cnt + 1) % 6;
    clk40 = (cnt < 3);          // rises when cnt becomes 0
    if (cnt == 5) begin
      automatic logic [31:0] w = $urandom;
      pon_valid <= 1'b1;
      pon_trg   <= w;
      word.push_back(w);
      t_launch.push_back($realtime);
    end else begin
      pon_valid <= 1'b0;
      pon_trg   <= $urandom;     // garbage outside the valid cycle
    end
  end

  initial begin : watchdog
    #(100000.0);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n;
    repeat (4) @(posedge clk40);
    for (int i = 0; i < 200; i++) begin
      @(posedge clk40);
      #0.5;
      n = word.size();
      // The newest launched word was latched on this edge; trg40 shows the one before.
      checks++;
      if (trg40 !== word[n - 2]) begin
        failures++;
        $display("FAIL cycle %0d: trg40=%h expected %h", i, trg40, word[n - 2]);
      end
      checks++;
      if (($realtime - 0.5 - t_launch[n - 2]) < 7.0 * T - 0.01 || ($realtime - 0.5 - t_launch[n - 2]) > 7.0 * T + 0.01) begin
        failures++;
        $display("FAIL latency %t", $realtime - 0.5 - t_launch[n - 2]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
