// dmfs: Digital Multi-Frequency Synthesizer.
//
// Produces the sum of N_CAR sine carriers for a 16-bit D/A. Each carrier is a
// direct digital synthesizer: a 32-bit phase accumulator advanced by the
// carrier's frequency word once per sample, plus a 32-bit programmable phase
// offset; the top 16 bits of the sum address a 64K x 16 sine table. The sine
// is multiplied by the carrier's 16-bit amplitude register, the product is
// truncated to 18 bits, all carriers are accumulated, and the result is
// truncated to 16 bits for the D/A. These steps and widths follow the
// published design.
//
// Table sharing: one sine table serves MUX carriers (8 by default), read once
// per clock, so the logic runs at MUX times the D/A sample rate and smp_en
// pulses once every MUX clocks. There are N_CAR/MUX tables working in
// parallel. Choices of this design: the amplitude is signed, so a comb can be
// inverted (the nulling comb) through the amplitude alone; the 18-bit
// product is bits [30:13] of the 32-bit product (the sign bit repeated in
// bit 31 dropped); the carrier sum saturates at 18 bits before its two low
// bits are dropped; sync restarts every phase accumulator at the next sample.
//
// Timing: smp_en in the cycle before slot 0. Carrier c = g*MUX+s is read in
// slot s by table g. dac_out updates 3 clocks after the last slot of a
// sample period, with a one-cycle dac_valid, i.e. once per MUX clocks.
module dmfs #(
  parameter int N_CAR   = 32,
  parameter int MUX     = 8,
  parameter int PHASE_W = 32,
  parameter int AW      = 16,
  parameter int DW      = 16,
  parameter int AMP_W   = 16,
  parameter int DAC_W   = 16
) (
  input  logic                        clk,
  input  logic                        rst,
  input  logic                        smp_en,
  input  logic                        sync,
  input  logic [PHASE_W-1:0]          freq  [N_CAR],
  input  logic [PHASE_W-1:0]          phase [N_CAR],
  input  logic signed [AMP_W-1:0]     amp   [N_CAR],
  output logic signed [DAC_W-1:0]     dac_out,
  output logic                        dac_valid
);

  localparam int G     = N_CAR / MUX;          // number of shared sine tables
  localparam int SW    = (MUX > 1) ? $clog2(MUX) : 1;
  localparam int PW    = 18;                   // product truncated to 18 bits
  localparam int ACC_W = PW + $clog2(N_CAR) + 1;

  // Phase accumulators, one per carrier, stepped once per sample.
  logic [PHASE_W-1:0] acc [N_CAR];
  always_ff @(posedge clk) begin
    if (rst) begin
      for (int c = 0; c < N_CAR; c++) acc[c] <= '0;
    end else if (smp_en) begin
      for (int c = 0; c < N_CAR; c++) acc[c] <= sync ? '0 : acc[c] + freq[c];
    end
  end

  // Slot counter: which carrier of each group the tables serve this clock.
  logic [SW-1:0] slot;
  always_ff @(posedge clk) begin
    if (rst || smp_en) slot <= '0;
    else if (slot != SW'(MUX-1)) slot <= slot + 1'b1;
  end

  // Stage 0: address, Stage 1: table word and amplitude, Stage 2: product.
  logic signed [DW-1:0]    lut_q  [G];
  logic signed [AMP_W-1:0] amp_q  [G];
  logic signed [PW-1:0]    prod_q [G];
  logic [SW-1:0]           slot_q1, slot_q2;
  logic                    run_q1, run_q2;

  for (genvar g = 0; g < G; g++) begin : g_tab
    logic [PHASE_W-1:0] p;
    logic [AW-1:0]      a;
    logic signed [DW+AMP_W-1:0] full;
    always_comb begin
      p = acc[g*MUX + int'(slot)] + phase[g*MUX + int'(slot)];
      a = p[PHASE_W-1 -: AW];
    end
    sine_lut #(.AW(AW), .DW(DW)) u_lut (.clk(clk), .addr(a), .data(lut_q[g]));
    always_ff @(posedge clk) amp_q[g] <= amp[g*MUX + int'(slot)];
    assign full = lut_q[g] * amp_q[g];
    always_ff @(posedge clk) prod_q[g] <= full[DW+AMP_W-2 -: PW];
  end

  // The slot is "running" from smp_en until the last slot has been read.
  logic running;
  always_ff @(posedge clk) begin
    if (rst) running <= 1'b0;
    else if (smp_en) running <= 1'b1;
    else if (slot == SW'(MUX-1)) running <= 1'b0;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      {run_q1, run_q2} <= '0;
      slot_q1 <= '0;
      slot_q2 <= '0;
    end else begin
      run_q1  <= running;
      run_q2  <= run_q1;
      slot_q1 <= slot;
      slot_q2 <= slot_q1;
    end
  end

  // Stage 3: accumulate all carriers of the sample period.
  logic signed [ACC_W-1:0] sum_g, acc_next, acc_r;
  always_comb begin
    sum_g = '0;
    for (int g = 0; g < G; g++) sum_g = sum_g + ACC_W'(prod_q[g]);
    acc_next = ((slot_q2 == '0) ? ACC_W'(0) : acc_r) + sum_g;
  end

  localparam logic signed [ACC_W-1:0] SAT_MAX = ACC_W'( (2**(PW-1)) - 1);
  localparam logic signed [ACC_W-1:0] SAT_MIN = -ACC_W'(2**(PW-1));

  always_ff @(posedge clk) begin
    if (rst) begin
      acc_r     <= '0;
      dac_out   <= '0;
      dac_valid <= 1'b0;
    end else begin
      dac_valid <= 1'b0;
      if (run_q2) begin
        acc_r <= acc_next;
        if (slot_q2 == SW'(MUX-1)) begin
          logic signed [PW-1:0] s18;
          if (acc_next > SAT_MAX)      s18 = SAT_MAX[PW-1:0];
          else if (acc_next < SAT_MIN) s18 = SAT_MIN[PW-1:0];
          else                         s18 = acc_next[PW-1:0];
          dac_out   <= s18[PW-1 -: DAC_W];
          dac_valid <= 1'b1;
        end
      end
    end
  end

endmodule
