// tb_cru_lpgbt_ttc -- end-to-end test of the lpGBT clock and trigger
// distribution at its default size (24 links), from the PON receive interface
// to the 24 lpGBT downlink user interfaces.
//
// Environment: a PON receiver model gives a 240 MHz clock (4.168 ns) and, once
// every six cycles, a valid bit with a trigger word {8'hC3, 24-bit sequence
// number}. Link i's transmit clock is the design's 320 MHz output delayed by
// D_i = 0.2 + 0.05*i ns (jitter cleaner plus transceiver), and its reset is
// released on a random cycle, so every link starts on a random write-enable
// phase; the PLL model starts on a random 40 MHz phase after every reset.
//
// Four runs: (0) all links carry TTC triggers; (1, 2) links cycle through the
// four sources TTC / DDG / SC / IDLE; (3) all TTC again, then the LHC marker is
// moved by one 240 MHz cycle so that the whole chain must realign. In every
// run and for every write on every link the testbench checks the frame
// contents against what it sent, and for TTC frames that the time from the
// valid bit to the transmit edge writing the frame is 13 PON clock periods plus
// D_i, the same in every run (deterministic latency), with no trigger lost or
// repeated. DDG links carry a counting pattern {link, counter} that must
// arrive without a gap (the known-pattern downlink test). Mechanisms counted,
// each of which must occur: PLL reset for a wrong phase, write-enable shift,
// link aligned with no shift, loss and recovery of alignment, each source.
module tb_cru_lpgbt_ttc;
  import lpgbt_ttc_pkg::*;
  localparam int      N = MAX_LINKS;
  localparam realtime T = 4.168;
  int checks = 0, failures = 0;

  logic        clk240 = 1'b0, rst240 = 1'b1, pon_valid = 1'b0;
  logic [31:0] pon_trg = '0;
  logic        clk40_out, clk320_out, clk40_aligned;
  logic [7:0]  pll_retries;
  logic        txclk [N];
  logic        txrst [N];
  dl_src_e     src_sel [N];
  logic [31:0] ddg_data [N];
  dl_frame_t   sc_frame [N];
  dl_frame_t   tx_frame [N];
  logic        tx_clk_en [N];
  logic        link_aligned [N];
  logic        link_fail [N];
  logic [3:0]  link_steps [N];

  cru_lpgbt_ttc dut (
    .clk240(clk240), .rst240(rst240), .pon_valid(pon_valid), .pon_trg(pon_trg),
    .clk40_out(clk40_out), .clk320_out(clk320_out),
    .txclk(txclk), .txrst(txrst), .src_sel(src_sel), .ddg_data(ddg_data), .sc_frame(sc_frame),
    .tx_frame(tx_frame), .tx_clk_en(tx_clk_en),
    .clk40_aligned(clk40_aligned), .pll_retries(pll_retries),
    .link_aligned(link_aligned), .link_fail(link_fail), .link_steps(link_steps));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 50) $display("FAIL %s at %t", what, $realtime);
    end
  endtask

  // ---- PON receiver model ---------------------------------------------------
  always #(T / 2) clk240 = ~clk240;
  int unsigned vcnt = 0, voff = 0;
  logic [23:0] seq = '0;
  realtime     t_launch [4096];
  always @(posedge clk240) begin
    vcnt = (vcnt + 1) % 6;
    if (vcnt == voff) begin
      seq = seq + 1'b1;
      pon_valid <= 1'b1;
      pon_trg   <= {8'hC3, seq};
      t_launch[seq % 4096] = $realtime;
    end else begin
      pon_valid <= 1'b0;
      pon_trg   <= $urandom;
    end
  end

  // ---- DDG and slow-control stimulus ---------------------------------------
  logic [23:0] lhc = '0;
  always @(posedge clk40_out) begin
    lhc <= lhc + 1'b1;
    for (int i = 0; i < N; i++) ddg_data[i] <= {8'(i), lhc};
  end
  initial for (int i = 0; i < N; i++) begin
    sc_frame[i] = {4'(i), 32'h5C00_0000 | 32'(i)};
    src_sel[i]  = SRC_TTC;
    txrst[i]    = 1'b1;
    ddg_data[i] = '0;
  end

  // ---- mechanism counters -----------------------------------------------------
  int n_pll_retry_runs = 0, n_shift_links = 0, n_noshift_links = 0, n_realign = 0;
  int n_src [4];

  // ---- per-link transmit clock and checker ----------------------------------
  bit      monitor = 0;
  realtime lat [N];
  for (genvar g = 0; g < N; g++) begin : g_link
    localparam realtime DI = 0.2 + 0.05 * g;
    always @(clk320_out) txclk[g] <= #(DI) clk320_out;

    realtime     t_prev = 0;
    logic [23:0] last_seq = '0, last_cnt = '0;
    bit          have_seq = 0, have_cnt = 0;
    always @(posedge txclk[g]) begin
      if (monitor && tx_clk_en[g]) begin
        dl_frame_t f;
        f = tx_frame[g];
        n_src[src_sel[g]]++;
        unique case (src_sel[g])
          SRC_TTC: begin
            realtime l;
            l = t_prev - t_launch[f.data[23:0] % 4096];
            check(f.data[31:24] == 8'hC3 && {f.ic, f.ec} == 4'(g), $sformatf("link %0d TTC frame %h", g, f));
            check(l > 13.0 * T + DI - 0.003 && l < 13.0 * T + DI + 0.003,
                  $sformatf("link %0d latency %0t expected %0t", g, l, 13.0 * T + DI));
            if (have_seq) check(f.data[23:0] == last_seq + 1'b1, $sformatf("link %0d trigger sequence", g));
            last_seq = f.data[23:0];
            have_seq = 1;
          end
          SRC_DDG: begin
            check(f.data[31:24] == 8'(g) && {f.ic, f.ec} == 4'(g), $sformatf("link %0d DDG frame %h", g, f));
            if (have_cnt) check(f.data[23:0] == last_cnt + 1'b1, $sformatf("link %0d DDG pattern", g));
            last_cnt = f.data[23:0];
            have_cnt = 1;
          end
          SRC_SC:  check(f == sc_frame[g], $sformatf("link %0d SC frame %h", g, f));
          default: check(f == '0, $sformatf("link %0d idle frame %h", g, f));
        endcase
      end
      if (!monitor) begin
        have_seq = 0;
        have_cnt = 0;
      end
      t_prev = $realtime;
    end
  end

  initial begin : watchdog
    #(3000000.0);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit all_aligned();
    for (int i = 0; i < N; i++) if (!link_aligned[i]) return 0;
    return clk40_aligned;
  endfunction

  task automatic wait_all_aligned(input int max_cycles);
    int c = 0;
    while (!all_aligned() && c < max_cycles) begin
      @(posedge clk240);
      c++;
    end
    check(all_aligned(), "PLL and all links aligned");
  endtask

  task automatic watch(input int lhc_cycles);
    repeat (4) @(posedge clk40_out);
    monitor = 1;
    repeat (lhc_cycles) @(posedge clk40_out);
    monitor = 0;
    for (int i = 0; i < N; i++) check(!link_fail[i] && link_aligned[i], "links stay aligned");
  endtask

  initial begin
    for (int r = 0; r < 4; r++) begin
      monitor = 0;
      rst240 = 1'b1;
      for (int i = 0; i < N; i++) begin
        txrst[i] = 1'b1;
        src_sel[i] = (r == 1) ? dl_src_e'(i % 4) : (r == 2) ? dl_src_e'((i + 1) % 4) : SRC_TTC;
      end
      repeat (8) @(posedge clk240);
      rst240 = 1'b0;
      // Transceivers come out of reset at random 320 MHz cycles.
      for (int i = 0; i < N; i++) begin
        repeat ($urandom_range(3, 0)) @(posedge clk320_out);
        txrst[i] = 1'b0;
      end
      wait_all_aligned(40000);
      if (pll_retries != 0) n_pll_retry_runs++;
      for (int i = 0; i < N; i++) begin
        if (link_steps[i] != 0) n_shift_links++;
        else n_noshift_links++;
      end
      $display("run %0d: PLL resets %0d, link shifts %0d %0d %0d %0d ...", r, pll_retries,
               link_steps[0], link_steps[1], link_steps[2], link_steps[3]);
      watch(60);
      if (r == 3) begin
        // LHC marker moves by one PON cycle: lose alignment, realign, same latency.
        @(posedge clk240);
        voff = (voff + 1) % 6;
        repeat (60) @(posedge clk240);
        check(!clk40_aligned, "marker move detected");
        wait_all_aligned(40000);
        n_realign++;
        watch(60);
      end
    end
    check(n_pll_retry_runs > 0, $sformatf("PLL reset for wrong phase happened (%0d runs)", n_pll_retry_runs));
    check(n_shift_links > 0, $sformatf("write-enable shift happened (%0d links)", n_shift_links));
    check(n_noshift_links > 0, $sformatf("aligned without shift happened (%0d links)", n_noshift_links));
    check(n_realign > 0, "realignment happened");
    for (int s = 0; s < 4; s++) check(n_src[s] > 0, $sformatf("source %0d used (%0d frames)", s, n_src[s]));
    $display("mechanisms: retry_runs=%0d shift_links=%0d noshift_links=%0d realign=%0d src=%0d/%0d/%0d/%0d",
             n_pll_retry_runs, n_shift_links, n_noshift_links, n_realign, n_src[0], n_src[1], n_src[2], n_src[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
