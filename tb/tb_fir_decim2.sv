// tb_fir_decim2: runs the default 128-tap filter. Checks the coefficient
// set (symmetric, DC gain 2^24 within rounding, flat pass band, stop band
// from a quarter of the input rate up, evaluated here from the taps), then
// feeds random 18-bit I/Q samples and compares each output with a direct
// convolution computed here: one output per two inputs, the 32-bit value
// with 14 fraction bits and the 18-bit value for the next stage, both
// convergently rounded. Also checks the latency and the overrun flag.
module tb_fir_decim2;
  localparam int TAPS = 128;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst, in_valid;
  logic signed [17:0] in_i, in_q;
  logic out_valid, overrun;
  logic signed [31:0] y32_i, y32_q;
  logic signed [17:0] y18_i, y18_q;

  fir_decim2 dut (.clk, .rst, .in_valid, .in_i, .in_q, .out_valid, .y32_i, .y32_q,
                  .y18_i, .y18_q, .overrun);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", msg);
    end
  endtask

  function automatic longint rnd(input longint v, input int sh, input longint lim);
    longint k, f, half;
    k = v >>> sh;
    f = v - (k << sh);
    half = 64'sd1 << (sh - 1);
    if (f > half || (f == half && k[0])) k++;
    if (k > lim) k = lim;
    if (k < -lim - 1) k = -lim - 1;
    return k;
  endfunction

  longint xi [$], xq [$];
  int nout = 0, t = 0, t_start = 0, lat = -1;
  always @(posedge clk) t <= t + 1;

  always @(posedge clk) if (!rst && out_valid) begin
    longint ai, aq, ei, eq;
    int last;
    nout++;
    last = 2 * nout - 1;
    ai = 0; aq = 0;
    for (int k = 0; k < TAPS; k++)
      if (last - k >= 0) begin
        ai += longint'(dut.coef[k]) * xi[last - k];
        aq += longint'(dut.coef[k]) * xq[last - k];
      end
    ei = rnd(ai, 10, 64'sd2147483647);
    eq = rnd(aq, 10, 64'sd2147483647);
    check(longint'(y32_i) == ei && longint'(y32_q) == eq,
          $sformatf("out %0d y32 %0d/%0d", nout, y32_i, ei));
    check(longint'(y18_i) == rnd(ei, 14, 131071) && longint'(y18_q) == rnd(eq, 14, 131071),
          $sformatf("out %0d y18 %0d/%0d", nout, y18_i, rnd(ei, 14, 131071)));
    if (lat < 0) lat = t - t_start;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint sum;
    real worst_stop, worst_pass;
    rst = 1; in_valid = 0; in_i = 0; in_q = 0;
    repeat (3) @(posedge clk);
    #1 rst = 0;
    // coefficient properties
    sum = 0;
    for (int k = 0; k < TAPS; k++) begin
      sum += longint'(dut.coef[k]);
      check(dut.coef[k] == dut.coef[TAPS-1-k], $sformatf("symmetric tap %0d", k));
    end
    check(sum > 16777216 - TAPS && sum < 16777216 + TAPS, $sformatf("DC gain %0d", sum));
    worst_stop = 0.0; worst_pass = 0.0;
    for (int j = 0; j <= 100; j++) begin
      real f, re, im, mag;
      f = 0.25 + 0.25 * real'(j) / 100.0;
      re = 0.0; im = 0.0;
      for (int k = 0; k < TAPS; k++) begin
        re += real'(dut.coef[k]) * $cos(6.283185307179586 * f * k);
        im += real'(dut.coef[k]) * $sin(6.283185307179586 * f * k);
      end
      mag = $sqrt(re * re + im * im) / 16777216.0;
      if (mag > worst_stop) worst_stop = mag;
      f = 0.15 * real'(j) / 100.0;
      re = 0.0; im = 0.0;
      for (int k = 0; k < TAPS; k++) begin
        re += real'(dut.coef[k]) * $cos(6.283185307179586 * f * k);
        im += real'(dut.coef[k]) * $sin(6.283185307179586 * f * k);
      end
      mag = $sqrt(re * re + im * im) / 16777216.0;
      if (mag - 1.0 > worst_pass) worst_pass = mag - 1.0;
      if (1.0 - mag > worst_pass) worst_pass = 1.0 - mag;
    end
    $display("stop band peak %0.1f dB, pass band deviation %g", 20.0 * $log10(worst_stop), worst_pass);
    check(20.0 * $log10(worst_stop) < -120.0, "stop band below -120 dB");
    check(worst_pass < 1e-5, "pass band flat to 1e-5");
    // random data, inputs spaced by more than a pass
    for (int n = 0; n < 120; n++) begin
      @(negedge clk);
      in_valid = 1;
      in_i = (n < 40) ? 18'sd131071 : 18'($urandom());
      in_q = (n < 40) ? -18'sd131072 : 18'($urandom());
      xi.push_back(longint'(in_i));
      xq.push_back(longint'(in_q));
      if (n == 1) t_start = t + 1;
      @(negedge clk);
      in_valid = 0;
      repeat (TAPS + 10) @(negedge clk);
    end
    check(nout == 60, $sformatf("one output per two inputs: %0d", nout));
    check(lat == TAPS + 3, $sformatf("latency %0d", lat));
    check(!overrun, "no overrun at the normal rate");
    // two inputs back to back start a pass and then hit it
    @(negedge clk); in_valid = 1; xi.push_back(0); xq.push_back(0); in_i = 0; in_q = 0;
    @(negedge clk); xi.push_back(0); xq.push_back(0);
    @(negedge clk); xi.push_back(0); xq.push_back(0);
    @(negedge clk); in_valid = 0;
    repeat (TAPS + 10) @(negedge clk);
    check(overrun, "overrun flagged");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
