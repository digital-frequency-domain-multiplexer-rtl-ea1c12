// tb_dmfd: a three-channel demodulator with small filters. The A/D carries
// a square wave locked to channel 0's frequency; channel 1 is disabled and
// channel 2 listens at twice channel 0's frequency. Checks that every filter output
// becomes one frame of 6 FIFO words in the order ch0 I, ch0 Q, ch1 I, ...,
// written on consecutive clocks, with the values expected for each channel
// (ch0 I near A*8*2^14*g, the rest near zero, ch1 exactly zero), and that
// frames come once per two CIC outputs.
module tb_dmfd;
  localparam int NC = 3, R = 8, N = 3, TAPS = 8, SP = 2, A = 1000;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst, smp_en, sync;
  logic [NC-1:0] ch_en;
  logic [31:0] freq [NC], phase [NC];
  logic [2:0] rate_sel;
  logic signed [13:0] adc;
  logic fifo_wr, overrun;
  logic [31:0] fifo_data;

  dmfd #(.N_CH(NC), .CIC_N(N), .CIC_R(R), .TAPS(TAPS)) dut (
    .clk, .rst, .smp_en, .sync, .ch_en, .freq, .phase, .rate_sel, .adc,
    .fifo_wr, .fifo_data, .overrun);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", msg);
    end
  endtask

  int div = 0;
  logic [31:0] macc;
  always @(posedge clk) begin
    if (rst) begin div <= 0; macc <= 0; end
    else begin
      div <= (div == SP-1) ? 0 : div + 1;
      if (smp_en) macc <= macc + freq[0];
    end
  end
  assign smp_en = !rst && (div == SP-1);
  assign adc = macc[31] ? -14'(A) : 14'(A);

  // collect frames
  int t = 0, wpos = 0, nframes = 0, last_w = -1, frame_t = -1, last_frame_t = -1, bad_gap = 0;
  logic signed [31:0] w [2*NC];
  always @(posedge clk) t <= t + 1;
  always @(posedge clk) if (!rst && fifo_wr) begin
    if (wpos > 0) check(t == last_w + 1, "frame words on consecutive clocks");
    else begin
      if (last_frame_t >= 0 && t - last_frame_t != SP * R * 2) bad_gap++;
      last_frame_t = t;
    end
    w[wpos] = fifo_data;
    last_w = t;
    wpos++;
    if (wpos == 2 * NC) begin wpos = 0; nframes++; end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real g, big;
    rst = 1; sync = 0; rate_sel = 0; ch_en = 3'b101;
    freq[0] = 32'h1000_0000; freq[1] = 32'h1000_0000; freq[2] = 32'h2000_0000;
    for (int c = 0; c < NC; c++) phase[c] = 0;
    repeat (3) @(posedge clk);
    #1 rst = 0;
    repeat (SP * R * 2 * 30) @(posedge clk);
    @(negedge clk);
    check(nframes >= 25, $sformatf("frames written: %0d", nframes));
    check(bad_gap == 0, "one frame per two CIC outputs");
    check(!overrun, "no overrun");
    // DC gain of the 8-tap design, computed from its formula
    g = 0.0;
    for (int n = 0; n < TAPS; n++) begin
      real m, a, wv, h, s, tt, x;
      m = real'(n) - 3.5;
      a = 2.0 * real'(n) / 7.0 - 1.0;
      x = 13.0 * $sqrt(1.0 - a * a);
      s = 1.0; tt = 1.0;
      for (int k = 1; k < 40; k++) begin tt = tt * (x / (2.0 * k)) ** 2; s += tt; end
      wv = s;
      s = 1.0; tt = 1.0;
      for (int k = 1; k < 40; k++) begin tt = tt * (13.0 / (2.0 * k)) ** 2; s += tt; end
      wv = wv / s;
      h = $sin(2.0 * 3.141592653589793 * 0.21 * m) / (3.141592653589793 * m);
      g += h * wv;
    end
    big = real'(A) * 8.0 * 16384.0 * g;
    check(real'(w[0]) > 0.99 * big && real'(w[0]) < 1.01 * big, $sformatf("ch0 I %0d expected %0.0f", w[0], big));
    check(w[1] > -65536 && w[1] < 65536, $sformatf("ch0 Q %0d", w[1]));
    check(w[2] == 0 && w[3] == 0, "disabled ch1 is zero");
    check(real'(w[4]) < 0.2 * big && real'(w[4]) > -0.2 * big, $sformatf("ch2 I %0d small", w[4]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
