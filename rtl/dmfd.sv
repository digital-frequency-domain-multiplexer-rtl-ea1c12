// dmfd: Digital Multi-Frequency Demodulator of one multiplexer module.
//
// The A/D stream is sent down N_CH parallel channel pipelines (mixer, CIC,
// FIR chain, frequency select), one per detector carrier, as published. All
// channels share the sample strobe, reset and sync, so they run in lockstep
// and deliver their outputs in the same clock. This design then collects
// the I and Q words of every channel into a frame and writes it to the FIFO
// one word per clock, in the order ch0 I, ch0 Q, ch1 I, ... (the frame
// format is a choice of this design). A frame that arrives while the
// previous one is still being written is counted as a collector overrun.
//
// Timing: a frame occupies the FIFO write port for 2*N_CH clocks, far fewer
// than the clocks between filter outputs.
module dmfd #(
  parameter int N_CH    = 32,
  parameter int PHASE_W = 32,
  parameter int ADC_W   = 14,
  parameter int CIC_N   = 6,
  parameter int CIC_R   = 2048,
  parameter int TAPS    = 128
) (
  input  logic                      clk,
  input  logic                      rst,
  input  logic                      smp_en,
  input  logic                      sync,
  input  logic [N_CH-1:0]           ch_en,
  input  logic [PHASE_W-1:0]        freq  [N_CH],
  input  logic [PHASE_W-1:0]        phase [N_CH],
  input  logic [2:0]                rate_sel,
  input  logic signed [ADC_W-1:0]   adc,
  output logic                      fifo_wr,
  output logic [31:0]               fifo_data,
  output logic                      overrun
);

  localparam int NW = 2 * N_CH;
  localparam int IW = $clog2(NW + 1);

  logic               ch_v   [N_CH];
  logic signed [31:0] ch_i   [N_CH];
  logic signed [31:0] ch_q   [N_CH];
  logic               ch_ovr [N_CH];

  for (genvar c = 0; c < N_CH; c++) begin : g_ch
    dmfd_channel #(.PHASE_W(PHASE_W), .ADC_W(ADC_W), .CIC_N(CIC_N), .CIC_R(CIC_R), .TAPS(TAPS)) u_ch (
      .clk, .rst, .smp_en, .sync, .en(ch_en[c]), .freq(freq[c]), .phase(phase[c]),
      .rate_sel, .adc, .out_valid(ch_v[c]), .out_i(ch_i[c]), .out_q(ch_q[c]),
      .overrun(ch_ovr[c]));
  end

  // Frame collector.
  logic [31:0]   frame [NW];
  logic [IW-1:0] idx;
  logic          busy, coll_ovr;

  always_ff @(posedge clk) begin
    if (rst) begin
      busy      <= 1'b0;
      idx       <= '0;
      fifo_wr   <= 1'b0;
      fifo_data <= '0;
      coll_ovr  <= 1'b0;
      for (int n = 0; n < NW; n++) frame[n] <= '0;
    end else begin
      fifo_wr <= 1'b0;
      if (ch_v[0]) begin
        if (busy) coll_ovr <= 1'b1;
        for (int c = 0; c < N_CH; c++) begin
          frame[2*c]   <= ch_i[c];
          frame[2*c+1] <= ch_q[c];
        end
        busy <= 1'b1;
        idx  <= '0;
      end else if (busy) begin
        fifo_wr   <= 1'b1;
        fifo_data <= frame[idx];
        idx       <= idx + 1'b1;
        if (idx == IW'(NW - 1)) busy <= 1'b0;
      end
    end
  end

  always_comb begin
    overrun = coll_ovr;
    for (int c = 0; c < N_CH; c++) overrun |= ch_ovr[c];
  end

endmodule
