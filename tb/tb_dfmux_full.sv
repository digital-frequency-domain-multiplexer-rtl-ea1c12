// tb_dfmux_full: the board firmware at its full size (four modules of 32
// channels, 8 carriers per sine table, 6-stage 2048x CIC, six 128-tap FIRs).
// Module 0 synthesizes a 500 kHz carrier (25 MHz sample rate) and demodulates
// it from its own D/A output; module 1 does the same with its nuller comb
// set to cancel the carrier. Checks: frames of 64 words reach the FIFO every
// 2 x 2048 samples (6.1 kHz at FIR #1, 32768 clocks of 200 MHz); disabled
// channels read zero; once the 128-tap filter has filled, channel 0 carries
// the expected magnitude A*(2/pi)*8*2^14 and module 1's nulled carrier is
// below 1 % of it.
module tb_dfmux_full;
  import dfmux_pkg::*;
  localparam int NM = 4, NC = 32;
  localparam int FRAME_T = 8 * 2048 * 2;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #2.5 clk = ~clk;

  logic rst;
  logic [10:0] host_addr;
  logic host_we, host_re, proc_rst, smp_en;
  logic [31:0] host_wdata, host_rdata;
  logic signed [15:0] car_dac [NM], nul_dac [NM];
  logic signed [13:0] adc [NM];
  logic [1:0] car_gain [NM], nul_gain [NM], adc_gain [NM];
  logic [NM-1:0] fifo_nonempty;

  dfmux_top dut (
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
  task automatic rd(input int m, input logic [7:0] a, output logic [31:0] d);
    @(negedge clk); host_addr = {1'b0, 2'(m), a}; host_re = 1;
    @(negedge clk); host_re = 0; d = host_rdata;
  endtask

  // Read one 64-word frame of module m: channel-0 magnitude and largest
  // |word| of the disabled channels.
  task automatic frame(input int m, output real mag, output int off_max);
    logic [31:0] d;
    logic signed [31:0] fi, fq;
    off_max = 0; fi = 0; fq = 0;
    for (int k = 0; k < 2 * NC; k++) begin
      rd(m, RA_FIFO_DATA, d);
      if (k == 0) fi = d;
      if (k == 1) fq = d;
      if (k >= 2 && (int'($signed(d)) > off_max || -int'($signed(d)) > off_max))
        off_max = (int'($signed(d)) < 0) ? -int'($signed(d)) : int'($signed(d));
    end
    mag = $sqrt(real'(fi) * real'(fi) + real'(fq) * real'(fq));
  endtask

  // frame timing on module 0's FIFO writes
  int t = 0, first_w = -1, last_frame_t = -1, nframes = 0, bad_gap = 0, wcount = 0;
  always @(posedge clk) t <= t + 1;
  always @(posedge clk) if (!rst && dut.g_mod[0].u_mod.f_wr) begin
    if (wcount % 64 == 0) begin
      if (last_frame_t >= 0 && t - last_frame_t != FRAME_T) bad_gap++;
      last_frame_t = t;
      nframes++;
    end
    wcount++;
  end

  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d;
    real mag, mag1, expect_mag;
    int offm, offm1;
    rst = 1; host_addr = 0; host_we = 0; host_re = 0; host_wdata = 0;
    repeat (4) @(posedge clk);
    #1 rst = 0;
    for (int m = 0; m < 2; m++) begin
      wr(m, RA_CAR_FREQ + 0, 32'h051E_B852);    // 0.02 x 2^32: 500 kHz at 25 MHz
      wr(m, RA_CAR_AMP + 0, 32'd16000);
      wr(m, RA_NUL_FREQ + 0, 32'h051E_B852);
      wr(m, RA_CHAN_EN, 32'h0000_00FF);
    end
    wr(1, RA_NUL_AMP + 0, -32'sd16000);
    @(negedge clk); host_addr = {1'b1, 2'd0, RA_BRD_SYNC}; host_wdata = 1; host_we = 1;
    @(negedge clk); host_we = 0;
    // let the 128-tap FIR #1 fill (64 outputs of 2 CIC outputs each), reading
    // frames as the processor would so the FIFOs never overflow
    for (int f = 0; f < 70; f++) begin
      while (!fifo_nonempty[0] || !fifo_nonempty[1]) @(posedge clk);
      repeat (200) @(posedge clk);
      frame(0, mag, offm);
      frame(1, mag1, offm1);
    end
    expect_mag = 4000.0 * 0.6366 * 8.0 * 16384.0;
    $display("frames %0d, magnitude %0.0f (expected %0.0f), nulled %0.0f", nframes, mag, expect_mag, mag1);
    check(mag > 0.97 * expect_mag && mag < 1.03 * expect_mag, "channel 0 magnitude");
    check(mag1 < 0.01 * mag, "nulled carrier");
    check(offm <= 64 * 16384 && offm1 <= 64 * 16384, "other channels near zero");
    rd(2, RA_FIFO_STAT, d);
    check(d[15:0] != 0, "an idle module still writes frames");
    check(nframes >= 70 && bad_gap == 0, $sformatf("frames every %0d clocks", FRAME_T));
    rd(0, RA_FIFO_STAT, d);
    check(!d[16] && !d[17], "no overflow or overrun");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
