// fir_decim2: low-pass FIR filter that decimates by two (I and Q).
//
// The demodulator follows its CIC filter with a chain of these: each is a
// TAPS-tap (128 by default) FIR with a flat "top-hat" pass band that halves
// the sample rate. Because it runs thousands of times slower than the clock,
// a single multiply-accumulate unit per rail works through the taps one per
// clock, as a dedicated FPGA MAC block would. The tap count and the MAC come
// from the published design; the coefficients do not.
//
// Coefficients (choice of this design): a Kaiser-windowed sinc,
//   h[n] = 2*FC*sinc(2*FC*(n-(TAPS-1)/2)) * I0(BETA*sqrt(1-(2n/(TAPS-1)-1)^2)) / I0(BETA),
// with FC = 0.21 of the input rate and BETA = 13, quantised to 25-bit signed
// words with DC gain 2^24. The pass band (to 0.15 of the input rate) is flat
// to 1e-6 and the stop band (from 0.25, the output Nyquist frequency) is
// below -120 dB, the published attenuation; 18-bit words would limit it to
// about -85 dB, hence the 25-bit coefficients (a 25x18 multiplier). They are
// computed when the ROM is initialised.
//
// Numbers: the 18-bit input times a 25-bit coefficient accumulates in
// IN_W+COEF_W+log2(TAPS) bits. The 32-bit output y32 is the accumulator
// convergently rounded to keep 14 fraction bits below the input's units;
// y18 is y32 convergently rounded back to an 18-bit integer, the input of
// the next stage.
//
// Timing: inputs arrive on in_valid (one per CIC or previous-stage output).
// Every second input starts a pass over the taps; out_valid pulses TAPS+3
// clocks later. An input that arrives while a pass is still running is an
// overrun (sticky flag); inputs must be at least TAPS+3 clocks apart.
module fir_decim2 #(
  parameter int  TAPS   = 128,
  parameter int  IN_W   = 18,
  parameter int  COEF_W = 25,
  parameter int  OUT_W  = 32,
  parameter real FC     = 0.21,
  parameter real BETA   = 13.0
) (
  input  logic                      clk,
  input  logic                      rst,
  input  logic                      in_valid,
  input  logic signed [IN_W-1:0]    in_i,
  input  logic signed [IN_W-1:0]    in_q,
  output logic                      out_valid,
  output logic signed [OUT_W-1:0]   y32_i,
  output logic signed [OUT_W-1:0]   y32_q,
  output logic signed [IN_W-1:0]    y18_i,
  output logic signed [IN_W-1:0]    y18_q,
  output logic                      overrun
);

  localparam int TW    = $clog2(TAPS);
  localparam int ACC_W = IN_W + COEF_W + TW;
  localparam int FRAC  = OUT_W - IN_W;          // 14 fraction bits in y32
  localparam int SH1   = (COEF_W - 1) - FRAC;   // accumulator -> y32

  // ---------------- coefficient ROM ----------------
  logic signed [COEF_W-1:0] coef [TAPS];

  function automatic real bessel_i0(input real x);
    real s, t;
    s = 1.0;
    t = 1.0;
    for (int k = 1; k < 40; k++) begin
      t = t * (x / (2.0 * k)) * (x / (2.0 * k));
      s = s + t;
    end
    return s;
  endfunction

  initial begin
    real pi, m, arg, w, h, scale;
    pi    = 3.14159265358979323846;
    scale = 2.0 ** (COEF_W - 1);
    for (int n = 0; n < TAPS; n++) begin
      m   = real'(n) - (real'(TAPS) - 1.0) / 2.0;
      arg = 2.0 * real'(n) / (real'(TAPS) - 1.0) - 1.0;
      w   = bessel_i0(BETA * $sqrt(1.0 - arg * arg)) / bessel_i0(BETA);
      if (m == 0.0) h = 2.0 * FC;
      else          h = $sin(2.0 * pi * FC * m) / (pi * m);
      h = h * w * scale;
      coef[n] = COEF_W'($rtoi(h >= 0.0 ? h + 0.5 : h - 0.5));
    end
  end

  // ---------------- sample buffer ----------------
  logic signed [IN_W-1:0] buf_i [TAPS], buf_q [TAPS];
  logic [TW-1:0]          wp;      // next write position
  logic                   phase;   // toggles per input; a pass starts when it wraps
  logic                   busy;
  logic [TW-1:0]          tap;
  logic [TW-1:0]          newest;

  always_ff @(posedge clk) begin
    if (rst) begin
      wp      <= '0;
      phase   <= 1'b0;
      overrun <= 1'b0;
      for (int n = 0; n < TAPS; n++) begin
        buf_i[n] <= '0;
        buf_q[n] <= '0;
      end
    end else if (in_valid) begin
      buf_i[wp] <= in_i;
      buf_q[wp] <= in_q;
      wp        <= wp + 1'b1;
      phase     <= ~phase;
      if (busy) overrun <= 1'b1;
    end
  end

  // ---------------- MAC sequencer ----------------
  logic                     mac_v, mac_v2, mac_first, mac_first2, mac_last, mac_last2;
  logic signed [IN_W-1:0]   x_i, x_q;
  logic signed [COEF_W-1:0] c_r;
  logic signed [IN_W+COEF_W-1:0] p_i, p_q;
  logic signed [ACC_W-1:0]  acc_i, acc_q;
  logic                     done;

  always_ff @(posedge clk) begin
    if (rst) begin
      busy   <= 1'b0;
      tap    <= '0;
      newest <= '0;
    end else if (in_valid && phase && !busy) begin
      busy   <= 1'b1;
      tap    <= '0;
      newest <= wp;                   // the sample being written now
    end else if (busy) begin
      tap <= tap + 1'b1;
      if (tap == TW'(TAPS-1)) busy <= 1'b0;
    end
  end

  // Stage 1: operand fetch, stage 2: product, stage 3: accumulate.
  always_ff @(posedge clk) begin
    if (rst) begin
      {mac_v, mac_v2, mac_first, mac_first2, mac_last, mac_last2} <= '0;
      x_i <= '0; x_q <= '0; c_r <= '0;
      p_i <= '0; p_q <= '0;
      acc_i <= '0; acc_q <= '0;
      done  <= 1'b0;
    end else begin
      mac_v     <= busy;
      mac_first <= busy && (tap == '0);
      mac_last  <= busy && (tap == TW'(TAPS-1));
      x_i <= buf_i[newest - tap];
      x_q <= buf_q[newest - tap];
      c_r <= coef[tap];
      mac_v2     <= mac_v;
      mac_first2 <= mac_first;
      mac_last2  <= mac_last;
      p_i <= x_i * c_r;
      p_q <= x_q * c_r;
      if (mac_v2) begin
        acc_i <= (mac_first2 ? ACC_W'(0) : acc_i) + ACC_W'(p_i);
        acc_q <= (mac_first2 ? ACC_W'(0) : acc_q) + ACC_W'(p_q);
      end
      done <= mac_v2 && mac_last2;
    end
  end

  // Convergent rounding (half to even) of v by sh bits, saturated to W bits.
  function automatic logic signed [OUT_W-1:0] rnd32(input logic signed [ACC_W-1:0] v);
    logic signed [ACC_W-1:0] k;
    logic [SH1-1:0]          f;
    logic                    up;
    k  = v >>> SH1;
    f  = v[SH1-1:0];
    up = f[SH1-1] && ((f[SH1-2:0] != '0) || k[0]);
    k  = k + ACC_W'(up);
    if (k >  ACC_W'(2**(OUT_W-1) - 1)) return OUT_W'(2**(OUT_W-1) - 1);
    if (k < -ACC_W'(2**(OUT_W-1)))     return OUT_W'(-(2**(OUT_W-1)));
    return k[OUT_W-1:0];
  endfunction

  function automatic logic signed [IN_W-1:0] rnd18(input logic signed [OUT_W-1:0] v);
    logic signed [OUT_W-1:0] k;
    logic [FRAC-1:0]         f;
    logic                    up;
    k  = v >>> FRAC;
    f  = v[FRAC-1:0];
    up = f[FRAC-1] && ((f[FRAC-2:0] != '0) || k[0]);
    k  = k + OUT_W'(up);
    if (k >  OUT_W'(2**(IN_W-1) - 1)) return IN_W'(2**(IN_W-1) - 1);
    return k[IN_W-1:0];
  endfunction

  logic signed [OUT_W-1:0] r_i, r_q;
  always_comb begin
    r_i = rnd32(acc_i);
    r_q = rnd32(acc_q);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid <= 1'b0;
      y32_i <= '0; y32_q <= '0; y18_i <= '0; y18_q <= '0;
    end else begin
      out_valid <= done;
      if (done) begin
        y32_i <= r_i;
        y32_q <= r_q;
        y18_i <= rnd18(r_i);
        y18_q <= rnd18(r_q);
      end
    end
  end

endmodule
