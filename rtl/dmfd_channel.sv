// dmfd_channel: demodulator pipeline of one detector channel.
//
// A/D samples -> square-wave quadrature mixer -> CIC decimator (2048x, 18-bit
// output) -> FIR #1 .. FIR #6, each a 128-tap low-pass decimating by 2 ->
// frequency select -> 32-bit I and Q words for the FIFO. With a 25 MHz A/D
// the stage outputs are at 12.2 kHz (CIC), 6.1, 3.05, 1.53, 0.76 kHz, 381 Hz
// and 191 Hz (FIR #1..#6). This chain, its rates, widths and the selectable
// output follow the published design. Each FIR stage feeds the next with
// its 18-bit rounded output, and the selector forwards the chosen stage's
// 32-bit output (choices of this design).
//
// Interface: smp_en marks one A/D sample per MUX clocks; freq is the
// carrier's frequency word (so the mixer stays locked to the synthesizer),
// phase the mixer's own offset; rate_sel picks FIR #(rate_sel+1). overrun
// reports a FIR that received data while still busy.
module dmfd_channel #(
  parameter int PHASE_W = 32,
  parameter int ADC_W   = 14,
  parameter int CIC_N   = 6,
  parameter int CIC_R   = 2048,
  parameter int TAPS    = 128,
  parameter int N_ST    = 6
) (
  input  logic                      clk,
  input  logic                      rst,
  input  logic                      smp_en,
  input  logic                      sync,
  input  logic                      en,
  input  logic [PHASE_W-1:0]        freq,
  input  logic [PHASE_W-1:0]        phase,
  input  logic [2:0]                rate_sel,
  input  logic signed [ADC_W-1:0]   adc,
  output logic                      out_valid,
  output logic signed [31:0]        out_i,
  output logic signed [31:0]        out_q,
  output logic                      overrun
);

  localparam int FW = 18;

  logic                   mix_v;
  logic signed [ADC_W:0]  mix_i, mix_q;

  sq_mixer #(.PHASE_W(PHASE_W), .ADC_W(ADC_W)) u_mix (
    .clk, .rst, .smp_en, .sync, .en, .freq, .phase, .adc,
    .out_i(mix_i), .out_q(mix_q), .out_valid(mix_v));

  logic                      cic_v;
  logic signed [FW-1:0]      cic_i, cic_q;
  localparam int CIC_W = ADC_W + 1 + CIC_N * $clog2(CIC_R);
  logic signed [CIC_W-1:0]   cic_fi, cic_fq;

  cic_decimator #(.IN_W(ADC_W+1), .N(CIC_N), .R(CIC_R), .TR_W(FW)) u_cic (
    .clk, .rst, .in_valid(mix_v), .in_i(mix_i), .in_q(mix_q),
    .out_valid(cic_v), .out_i(cic_i), .out_q(cic_q), .full_i(cic_fi), .full_q(cic_fq));

  logic                  st_v   [N_ST];
  logic signed [31:0]    st_i   [N_ST];
  logic signed [31:0]    st_q   [N_ST];
  logic signed [FW-1:0]  s18_i  [N_ST];
  logic signed [FW-1:0]  s18_q  [N_ST];
  logic                  st_ovr [N_ST];

  for (genvar k = 0; k < N_ST; k++) begin : g_fir
    logic                 v_in;
    logic signed [FW-1:0] d_i, d_q;
    if (k == 0) begin : g_first
      assign v_in = cic_v;
      assign d_i  = cic_i;
      assign d_q  = cic_q;
    end else begin : g_next
      assign v_in = st_v[k-1];
      assign d_i  = s18_i[k-1];
      assign d_q  = s18_q[k-1];
    end
    fir_decim2 #(.TAPS(TAPS), .IN_W(FW), .OUT_W(32)) u_fir (
      .clk, .rst, .in_valid(v_in), .in_i(d_i), .in_q(d_q),
      .out_valid(st_v[k]), .y32_i(st_i[k]), .y32_q(st_q[k]),
      .y18_i(s18_i[k]), .y18_q(s18_q[k]), .overrun(st_ovr[k]));
  end

  freq_select #(.N_ST(N_ST), .W(32)) u_sel (
    .clk, .rst, .sel(rate_sel), .st_valid(st_v), .st_i, .st_q,
    .out_valid, .out_i, .out_q);

  always_comb begin
    overrun = 1'b0;
    for (int k = 0; k < N_ST; k++) overrun |= st_ovr[k];
  end

endmodule
