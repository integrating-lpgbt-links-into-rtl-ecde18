// tb_dl_mux -- self-checking test of the downlink source multiplexer.
//
// Random selects, trigger words, generator words and slow-control frames are
// applied every clock; one cycle later every link's frame must equal the
// expected value worked out in the testbench (TTC or DDG data with slow-control
// IC/EC bits, the whole slow-control frame, or zeros). Reset must clear all
// frames. Run with 6 links.
module tb_dl_mux;
  import lpgbt_ttc_pkg::*;
  localparam int N = 6;
  int checks = 0, failures = 0;

  logic clk40 = 1'b0, rst = 1'b1;
  dl_src_e sel [N];
  logic [31:0] ttc;
  logic [31:0] ddg [N];
  dl_frame_t sc [N];
  dl_frame_t frame [N];

  dl_mux #(.N_LINKS(N)) dut (.clk40(clk40), .rst(rst), .sel(sel), .ttc(ttc), .ddg(ddg), .sc(sc), .frame(frame));

  always #12.5 clk40 = ~clk40;

  initial begin : watchdog
    #(100000.0);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic dl_frame_t expect_frame(input dl_src_e s, input logic [31:0] t,
                                             input logic [31:0] d, input dl_frame_t f);
    dl_frame_t e;
    case (s)
      SRC_TTC: e = {f[35:32], t};
      SRC_DDG: e = {f[35:32], d};
      SRC_SC:  e = f;
      default: e = '0;
    endcase
    return e;
  endfunction

  initial begin
    dl_frame_t exp_f [N];
    int nsrc [4];
    for (int i = 0; i < N; i++) begin
      sel[i] = SRC_TTC;
      ddg[i] = '0;
      sc[i]  = '0;
    end
    ttc = '0;
    repeat (3) @(posedge clk40);
    #1;
    for (int i = 0; i < N; i++) begin
      checks++;
      if (frame[i] !== '0) begin failures++; $display("FAIL reset link %0d", i); end
    end
    rst = 1'b0;
    for (int c = 0; c < 300; c++) begin
      ttc = $urandom;
      for (int i = 0; i < N; i++) begin
        sel[i] = dl_src_e'($urandom_range(3, 0));
        ddg[i] = $urandom;
        sc[i]  = {4'($urandom), 32'($urandom)};
        exp_f[i] = expect_frame(sel[i], ttc, ddg[i], sc[i]);
        nsrc[sel[i]]++;
      end
      @(posedge clk40);
      #1;
      for (int i = 0; i < N; i++) begin
        checks++;
        if (frame[i] !== exp_f[i]) begin
          failures++;
          $display("FAIL link %0d sel %s: %h expected %h", i, sel[i].name(), frame[i], exp_f[i]);
        end
      end
    end
    for (int s = 0; s < 4; s++) begin
      checks++;
      if (nsrc[s] == 0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
