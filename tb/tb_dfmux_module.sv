// tb_dfmux_module: one multiplexer module (4 channels, 2 carriers per sine
// table, small filters) with its carrier and nuller D/A outputs summed into
// its A/D input, standing in for the cold electronics. Through the register
// bus it programs a carrier, reads registers back, checks the gain-select
// outputs, reads demodulated frames from the FIFO and checks the carrier's
// amplitude (A*(2/pi) after square-wave mixing, times the filter gains);
// then programs the nuller as the inverted comb and checks the carrier
// vanishes; finally lets the FIFO overflow and clears the flag.
module tb_dfmux_module;
  import dfmux_pkg::*;
  localparam int NC = 4, MUX = 2, R = 8, N = 3, TAPS = 8, FD = 64;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst, smp_en, sync;
  logic [7:0] reg_addr;
  logic reg_we, reg_re;
  logic [31:0] reg_wdata, reg_rdata;
  logic signed [15:0] car_dac, nul_dac;
  logic signed [13:0] adc;
  logic [1:0] car_gain, nul_gain, adc_gain;
  logic fifo_nonempty;

  dfmux_module #(.N_CH(NC), .MUX(MUX), .CIC_N(N), .CIC_R(R), .TAPS(TAPS), .FIFO_DEPTH(FD)) dut (
    .clk, .rst, .smp_en, .sync, .reg_addr, .reg_we, .reg_wdata, .reg_re, .reg_rdata,
    .car_dac, .nul_dac, .adc, .car_gain, .nul_gain, .adc_gain, .fifo_nonempty);

  // cold electronics stand-in: the two combs add at the SQUID input
  assign adc = 14'((int'(car_dac) + int'(nul_dac)) >>> 2);

  int div = 0;
  always @(posedge clk) div <= rst ? 0 : ((div == MUX-1) ? 0 : div + 1);
  assign smp_en = !rst && (div == MUX-1);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", msg);
    end
  endtask

  task automatic wr(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk); reg_addr = a; reg_wdata = d; reg_we = 1;
    @(negedge clk); reg_we = 0;
  endtask

  task automatic rd(input logic [7:0] a, output logic [31:0] d);
    @(negedge clk); reg_addr = a; reg_re = 1;
    @(negedge clk); reg_re = 0; d = reg_rdata;
  endtask

  task automatic do_sync();
    @(negedge clk); sync = 1;
    @(posedge clk); while (!smp_en) @(posedge clk);
    @(negedge clk); sync = 0;
  endtask

  // Drain the FIFO and return the magnitude of channel 0 in the last frame.
  task automatic last_frame(output real mag, output int nwords);
    logic [31:0] st, d;
    int cnt;
    logic signed [31:0] fi, fq;
    rd(RA_FIFO_STAT, st);
    cnt = int'(st[15:0]);
    nwords = cnt;
    for (int k = 0; k < cnt; k++) begin
      rd(RA_FIFO_DATA, d);
      if ((k % (2 * NC)) == 0) fi = d;
      if ((k % (2 * NC)) == 1) fq = d;
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

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d;
    real mag, mag0, expect_mag;
    int nw;
    rst = 1; sync = 0; reg_addr = 0; reg_we = 0; reg_re = 0; reg_wdata = 0;
    repeat (3) @(posedge clk);
    #1 rst = 0;
    wr(RA_CAR_FREQ + 0, 32'h1000_0000);
    wr(RA_CAR_AMP + 0, 32'd16000);
    wr(RA_NUL_FREQ + 0, 32'h1000_0000);
    wr(RA_CHAN_EN, 32'h1);
    wr(RA_CTRL, 32'({3'd0, 2'd1, 2'd2, 2'd3}));
    rd(RA_CAR_FREQ + 0, d); check(d == 32'h1000_0000, "frequency read back");
    rd(RA_CAR_AMP + 0, d);  check(d == 32'd16000, "amplitude read back");
    rd(RA_CHAN_EN, d);      check(d == 32'h1, "enable read back");
    check(car_gain == 2'd1 && nul_gain == 2'd2 && adc_gain == 2'd3, "gain selects");
    do_sync();
    // carrier alone
    repeat (MUX * R * 2 * 20) @(posedge clk);
    check(fifo_nonempty, "FIFO has data");
    last_frame(mag0, nw);
    check(nw % (2 * NC) == 0 && nw > 0, $sformatf("whole frames in FIFO: %0d words", nw));
    expect_mag = 4000.0 * 0.6366 * 8.0 * 16384.0 * fir_gain();
    check(mag0 > 0.95 * expect_mag && mag0 < 1.05 * expect_mag,
          $sformatf("carrier magnitude %0.0f expected %0.0f", mag0, expect_mag));
    // nulling comb: same frequency and phase, inverted amplitude
    wr(RA_NUL_AMP + 0, -32'sd16000);
    repeat (MUX * R * 2 * 20) @(posedge clk);
    last_frame(mag, nw);
    check(mag < 0.01 * mag0, $sformatf("nulled magnitude %0.0f of %0.0f", mag, mag0));
    // overflow
    wr(RA_FIFO_STAT, 32'h0001_0000);
    rd(RA_FIFO_STAT, d); check(!d[16], "no overflow after clearing");
    repeat (MUX * R * 2 * (FD / (2 * NC) + 4)) @(posedge clk);
    rd(RA_FIFO_STAT, d);
    check(d[16] && int'(d[15:0]) == FD, "FIFO full and overflow flagged");
    last_frame(mag, nw);
    wr(RA_FIFO_STAT, 32'h0001_0000);
    rd(RA_FIFO_STAT, d); check(!d[16], "overflow cleared");
    check(!d[17], "no filter overrun");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
