// tb_dmfd_channel: one demodulator channel with a 3-stage 8x CIC and 8-tap
// FIRs. The A/D input is a square wave of amplitude A locked to the mixer
// (period 16 samples), so the mixed I rail is the constant +A and Q averages
// to zero. Expected after settling: I = A * 8^3 / 2^6 (CIC gain and
// truncation) * 2^14 (fraction bits of the 32-bit word) times the FIR DC
// gain, Q = 0. For every rate select the spacing of the outputs must be
// 2^(sel+1) CIC outputs (the bypassed stages); a disabled channel gives 0.
module tb_dmfd_channel;
  localparam int R = 8, N = 3, TAPS = 8, SP = 2;   // SP: clocks per sample
  localparam int A = 1000;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst, smp_en, sync, en;
  logic [31:0] freq, phase;
  logic [2:0] rate_sel;
  logic signed [13:0] adc;
  logic out_valid, overrun;
  logic signed [31:0] out_i, out_q;

  dmfd_channel #(.CIC_N(N), .CIC_R(R), .TAPS(TAPS)) dut (
    .clk, .rst, .smp_en, .sync, .en, .freq, .phase, .rate_sel, .adc,
    .out_valid, .out_i, .out_q, .overrun);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", msg);
    end
  endtask

  // sample strobe and a model of the mixer phase driving the A/D
  int div = 0;
  logic [31:0] macc;
  always @(posedge clk) begin
    if (rst) begin div <= 0; macc <= 0; end
    else begin
      div <= (div == SP-1) ? 0 : div + 1;
      if (smp_en) macc <= macc + freq;
    end
  end
  assign smp_en = !rst && (div == SP-1);
  assign adc = macc[31] ? -14'(A) : 14'(A);

  real dcg;
  function automatic real absr(input real v); return v < 0.0 ? -v : v; endfunction
  int t = 0, last_t = -1, n_out = 0, bad_gap = 0, gap_exp;
  logic signed [31:0] li, lq;
  always @(posedge clk) t <= t + 1;
  always @(posedge clk) if (!rst && out_valid) begin
    if (last_t >= 0 && (t - last_t) != gap_exp) bad_gap++;
    last_t = t; n_out++; li = out_i; lq = out_q;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real expi;
    rst = 1; sync = 0; en = 1; freq = 32'h1000_0000; phase = 0; rate_sel = 0;
    repeat (3) @(posedge clk);
    #1 rst = 0;
    dcg = 0.0;
    for (int k = 0; k < TAPS; k++) dcg += real'(dut.g_fir[0].u_fir.coef[k]);
    dcg = dcg / 16777216.0;
    expi = real'(A) * 8.0 * 16384.0;       // 8^3/2^6 = 8
    for (int s = 0; s < 6; s++) begin
      rate_sel = 3'(s);
      gap_exp  = SP * R * (2 ** (s + 1));
      last_t = -1; n_out = 0; bad_gap = 0;
      repeat (gap_exp * 6 + 2000) @(posedge clk);
      check(n_out >= 5, $sformatf("outputs at select %0d: %0d", s, n_out));
      check(bad_gap == 0, $sformatf("output spacing at select %0d (%0d clocks)", s, gap_exp));
      // each FIR stage multiplies the DC gain
      check(absr(real'(li) - expi * (dcg ** (s + 1))) < 4.0 * 16384.0,
            $sformatf("I at select %0d: %0d expected %0.0f", s, li, expi * (dcg ** (s + 1))));
      check(lq > -4 * 16384 && lq < 4 * 16384, $sformatf("Q at select %0d: %0d", s, lq));
    end
    check(!overrun, "no filter overrun");
    // disabled channel -> factor zero
    rate_sel = 0; en = 0;
    repeat (SP * R * 2 * 12) @(posedge clk);
    check(li == 0 && lq == 0, "disabled channel reads zero");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
