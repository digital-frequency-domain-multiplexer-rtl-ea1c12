// sq_mixer: square-wave quadrature mixer of one demodulator channel.
//
// Down-converts the A/D stream to base band without a multiplier: each
// sample is multiplied by +1 or -1 (in-phase, I) and by +1 or -1 shifted a
// quarter period (quadrature, Q), or by 0 when the channel is disabled. The
// square waves come from a 32-bit phase accumulator, stepped by the same
// frequency word as the carrier's synthesizer so that both stay locked, and
// a 32-bit phase offset that absorbs the phase shift of the cold wiring.
// This much is the published design.
//
// Choices of this design: I is +1 while the top bit of (accumulator +
// offset) is 0, i.e. in phase with a table sine of the same phase; Q uses the
// phase advanced by a quarter turn (a cosine); "0" is the disabled channel;
// outputs are one bit wider than the A/D word so that negating the most
// negative sample cannot overflow.
//
// Timing: on smp_en the A/D word is mixed with the current phase and
// registered (out_valid one cycle), then the accumulator advances; sync
// restarts the accumulator at the same sample as the synthesizers.
module sq_mixer #(
  parameter int PHASE_W = 32,
  parameter int ADC_W   = 14
) (
  input  logic                      clk,
  input  logic                      rst,
  input  logic                      smp_en,
  input  logic                      sync,
  input  logic                      en,
  input  logic [PHASE_W-1:0]        freq,
  input  logic [PHASE_W-1:0]        phase,
  input  logic signed [ADC_W-1:0]   adc,
  output logic signed [ADC_W:0]     out_i,
  output logic signed [ADC_W:0]     out_q,
  output logic                      out_valid
);

  logic [PHASE_W-1:0] acc, p_i, p_q;
  logic signed [ADC_W:0] x;

  always_comb begin
    p_i = acc + phase;
    p_q = p_i + (PHASE_W'(1) << (PHASE_W-2));
    x   = (ADC_W+1)'(adc);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      acc       <= '0;
      out_i     <= '0;
      out_q     <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= smp_en;
      if (smp_en) begin
        acc   <= sync ? '0 : acc + freq;
        out_i <= !en ? '0 : (p_i[PHASE_W-1] ? -x : x);
        out_q <= !en ? '0 : (p_q[PHASE_W-1] ? -x : x);
      end
    end
  end

endmodule
