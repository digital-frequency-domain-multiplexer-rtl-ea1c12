// tb_dfmux_top: end-to-end run of the board firmware with four modules of
// four channels (two carriers per sine table, small filters). Each module's
// carrier and nuller D/A outputs are added into its A/D input, standing in
// for the detectors and SQUID. Through the processor bus it exercises, and
// counts, each mechanism of the design:
//   synth+demod   module 0 demodulates its carrier to the expected magnitude
//   table sharing two carriers of one sine table active at once (module 0)
//   channel off   disabled channels read exactly zero
//   nulling       module 1's inverted nuller comb removes its carrier
//   sync          the board sync command restarts all phase accumulators
//   rate select   module 3 at FIR #4 delivers 8x fewer frames than at FIR #1,
//                 then switches back (bypass of filter stages)
//   overflow      module 2 is never read and its FIFO overflows
//   watchdog      the processor stops kicking and is reset
// A mechanism that never happened counts as a failure.
module tb_dfmux_top;
  import dfmux_pkg::*;
  localparam int NM = 4, NC = 4, MUX = 2, R = 8, N = 3, TAPS = 8, FD = 512, WDT = 6000;
  localparam int FRAME_T = MUX * R * 2;     // clocks per FIR #1 output
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst;
  logic [10:0] host_addr;
  logic host_we, host_re, proc_rst, smp_en;
  logic [31:0] host_wdata, host_rdata;
  logic signed [15:0] car_dac [NM], nul_dac [NM];
  logic signed [13:0] adc [NM];
  logic [1:0] car_gain [NM], nul_gain [NM], adc_gain [NM];
  logic [NM-1:0] fifo_nonempty;

  dfmux_top #(.N_MOD(NM), .N_CH(NC), .MUX(MUX), .CIC_N(N), .CIC_R(R), .TAPS(TAPS),
              .FIFO_DEPTH(FD), .WD_TIMEOUT(WDT)) dut (
    .clk, .rst, .host_addr, .host_we, .host_wdata, .host_re, .host_rdata, .proc_rst,
    .smp_en, .car_dac, .nul_dac, .adc, .car_gain, .nul_gain, .adc_gain, .fifo_nonempty);

  for (genvar m = 0; m < NM; m++) begin : g_loop
    assign adc[m] = 14'((int'(car_dac[m]) + int'(nul_dac[m])) >>> 2);
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", msg);
    end
  endtask

  task automatic wr(input int m, input logic [7:0] a, input logic [31:0] d);
    @(negedge clk); host_addr = {1'b0, 2'(m), a}; host_wdata = d; host_we = 1;
    @(negedge clk); host_we = 0;
  endtask
  task automatic wr_brd(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk); host_addr = {1'b1, 2'd0, a}; host_wdata = d; host_we = 1;
    @(negedge clk); host_we = 0;
  endtask
  task automatic rd(input int m, input logic [7:0] a, output logic [31:0] d);
    @(negedge clk); host_addr = {1'b0, 2'(m), a}; host_re = 1;
    @(negedge clk); host_re = 0; d = host_rdata;
  endtask

  // Drain module m's FIFO; return word count and channel-0 magnitude and
  // the largest |word| of disabled channels 2 and 3 in the last frame.
  task automatic drain(input int m, output int nw, output real mag, output int off_max);
    logic [31:0] st, d;
    logic signed [31:0] fi, fq;
    rd(m, RA_FIFO_STAT, st);
    nw = int'(st[15:0]);
    off_max = 0; fi = 0; fq = 0;
    for (int k = 0; k < nw; k++) begin
      rd(m, RA_FIFO_DATA, d);
      if (k % (2 * NC) == 0) begin fi = d; off_max = 0; end
      if (k % (2 * NC) == 1) fq = d;
      if (k % (2 * NC) >= 4 && (int'($signed(d)) > off_max || -int'($signed(d)) > off_max))
        off_max = (int'($signed(d)) < 0) ? -int'($signed(d)) : int'($signed(d));
    end
    mag = $sqrt(real'(fi) * real'(fi) + real'(fq) * real'(fq));
  endtask

  function automatic real fir_gain();
    real g;
    g = 0.0;
    for (int n = 0; n < TAPS; n++) begin
      real m, a, w0, h, s, tt, x;
      m = real'(n) - (TAPS - 1) / 2.0;
      a = 2.0 * real'(n) / (TAPS - 1) - 1.0;
      x = 13.0 * $sqrt(1.0 - a * a);
      s = 1.0; tt = 1.0;
      for (int k = 1; k < 40; k++) begin tt = tt * (x / (2.0 * k)) ** 2; s += tt; end
      w0 = s;
      s = 1.0; tt = 1.0;
      for (int k = 1; k < 40; k++) begin tt = tt * (13.0 / (2.0 * k)) ** 2; s += tt; end
      h = $sin(2.0 * 3.141592653589793 * 0.21 * m) / (3.141592653589793 * m);
      g += h * w0 / s;
    end
    return g;
  endfunction

  // mechanism counters
  int n_demod = 0, n_share = 0, n_off = 0, n_null = 0, n_sync = 0, n_rate = 0, n_ovf = 0, n_wd = 0;
  bit kicking = 1;

  always @(posedge clk) if (!rst && smp_en && dut.sync) n_sync++;
  always @(posedge clk) if (!rst && smp_en && dut.g_mod[0].u_mod.car_amp[0] != 0
                             && dut.g_mod[0].u_mod.car_amp[1] != 0) n_share++;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // processor alive: kick the watchdog while "kicking"
  initial begin
    @(negedge rst);
    forever begin
      repeat (1000) @(posedge clk);
      if (kicking) wr_brd(RA_BRD_KICK, 32'd1);
      else break;
    end
  end

  initial begin
    logic [31:0] d;
    real mag, mag0, expect_mag;
    int nw, offm, c0, c3;
    rst = 1; host_addr = 0; host_we = 0; host_re = 0; host_wdata = 0;
    repeat (4) @(posedge clk);
    #1 rst = 0;
    @(negedge clk); host_addr = {1'b1, 2'd0, RA_BRD_ID}; host_re = 1;
    @(negedge clk); host_re = 0;
    check(host_rdata == {16'(NM), 16'(NC)}, "board identification");
    for (int m = 0; m < NM; m++) begin
      wr(m, RA_CAR_FREQ + 0, 32'h1000_0000);
      wr(m, RA_CAR_AMP + 0, 32'd16000);
      wr(m, RA_NUL_FREQ + 0, 32'h1000_0000);
      wr(m, RA_CHAN_EN, 32'h3);
      wr(m, RA_CTRL, 32'({(m == 3) ? 3'd3 : 3'd0, 2'(m), 2'(m), 2'(m)}));
    end
    wr(0, RA_CAR_FREQ + 1, 32'h2000_0000);     // second carrier in the same table (an even
                                                // harmonic, which the square-wave mixer rejects)
    wr(0, RA_CAR_AMP + 1, 32'd8000);
    wr(1, RA_NUL_AMP + 0, -32'sd16000);         // module 1 nulls its carrier
    for (int m = 0; m < NM; m++) check(car_gain[m] == 2'(m) && adc_gain[m] == 2'(m), "gain selects");
    wr_brd(RA_BRD_SYNC, 32'd1);
    repeat (FRAME_T * 30) @(posedge clk);

    // module 0: demodulated carrier and disabled channels
    drain(0, nw, mag0, offm);
    expect_mag = 4000.0 * 0.6366 * 8.0 * 16384.0 * fir_gain();
    if (mag0 > 0.93 * expect_mag && mag0 < 1.07 * expect_mag) n_demod++;
    check(mag0 > 0.93 * expect_mag && mag0 < 1.07 * expect_mag,
          $sformatf("module 0 magnitude %0.0f expected %0.0f", mag0, expect_mag));
    if (offm == 0) n_off++;
    check(offm == 0, "disabled channels read zero");
    check(nw > 0 && nw % (2 * NC) == 0, "whole frames");
    // module 1: nulled
    drain(1, nw, mag, offm);
    if (mag < 0.01 * mag0) n_null++;
    check(mag < 0.01 * mag0, $sformatf("module 1 nulled to %0.0f", mag));

    // rate select: count words over a fixed window
    drain(0, nw, mag, offm);
    drain(3, nw, mag, offm);
    rd(0, RA_FIFO_STAT, d); c0 = -int'(d[15:0]);
    rd(3, RA_FIFO_STAT, d); c3 = -int'(d[15:0]);
    repeat (FRAME_T * 32) @(posedge clk);
    rd(0, RA_FIFO_STAT, d); c0 += int'(d[15:0]);
    rd(3, RA_FIFO_STAT, d); c3 += int'(d[15:0]);
    check(c0 >= 8 * 31 && c0 <= 8 * 34, $sformatf("FIR #1 rate: %0d words", c0));
    check(c3 >= 8 * 3 && c3 <= 8 * 5, $sformatf("FIR #4 rate: %0d words", c3));
    if (c3 * 6 < c0) n_rate++;
    wr(3, RA_CTRL, 32'({3'd0, 2'd3, 2'd3, 2'd3}));   // switch module 3 back to FIR #1
    drain(3, nw, mag, offm);
    repeat (FRAME_T * 16) @(posedge clk);
    rd(3, RA_FIFO_STAT, d);
    check(int'(d[15:0]) >= 8 * 14, $sformatf("after the switch: %0d words", d[15:0]));
    if (int'(d[15:0]) >= 8 * 14) n_rate++;

    // overflow on the unread module 2
    rd(2, RA_FIFO_STAT, d);
    if (d[16]) n_ovf++;
    check(d[16] && int'(d[15:0]) == FD, "module 2 FIFO overflowed");
    rd(0, RA_FIFO_STAT, d);
    check(!d[17], "no filter overrun");

    // sync again and confirm module 0 still demodulates the same magnitude
    wr_brd(RA_BRD_SYNC, 32'd1);
    repeat (FRAME_T * 20) @(posedge clk);
    drain(0, nw, mag, offm);
    check(mag > 0.99 * mag0 && mag < 1.01 * mag0, "same magnitude after sync");

    // watchdog: stop kicking
    kicking = 0;
    for (int k = 0; k < 3 * WDT && !proc_rst; k++) @(posedge clk);
    if (proc_rst) n_wd++;

    check(n_demod > 0, "mechanism: synthesis and demodulation");
    check(n_share > 0, "mechanism: shared sine table");
    check(n_off > 0, "mechanism: disabled channel");
    check(n_null > 0, "mechanism: nulling");
    check(n_sync >= 2, "mechanism: sync");
    check(n_rate >= 2, "mechanism: rate select and switch");
    check(n_ovf > 0, "mechanism: FIFO overflow");
    check(n_wd > 0, "mechanism: watchdog reset");
    $display("mechanisms: demod=%0d share=%0d off=%0d null=%0d sync=%0d rate=%0d ovf=%0d wd=%0d",
             n_demod, n_share, n_off, n_null, n_sync, n_rate, n_ovf, n_wd);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
