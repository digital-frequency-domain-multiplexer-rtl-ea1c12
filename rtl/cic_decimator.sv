// cic_decimator: N-stage cascaded integrator-comb (Hogenauer) decimator.
//
// N integrators run at the input rate; every R-th input the last integrator
// is handed to N comb (differentiator) stages that run at the output rate.
// The register width OUT_W = IN_W + N*log2(R) holds the full bit growth; with
// the published decimation of 2048 and an 81-bit output this gives N = 6
// stages for a 15-bit input (the 14-bit A/D word after the +/-1 mixer), and
// differential delay 1. The 81-bit result is reduced to an 18-bit signed
// integer by convergent truncation (round half to even) of its top bits,
// saturating the one case where rounding up would overflow.
//
// Choice of this design: the integrators are pipelined (stage k adds stage
// k-1's registered value) and the combs share one subtractor, one stage per
// clock after each decimation, since the output rate is thousands of times
// slower than the clock. I and Q are filtered by the same structure in
// parallel.
//
// Timing: in_valid qualifies one input per sample. out_valid pulses once
// per R inputs; out_valid is high 2N clocks after the clock edge that took
// the R-th input (N integrator clocks, N comb clocks).
module cic_decimator #(
  parameter int IN_W  = 15,
  parameter int N     = 6,
  parameter int R     = 2048,
  parameter int OUT_W = IN_W + N * $clog2(R),
  parameter int TR_W  = 18
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     in_valid,
  input  logic signed [IN_W-1:0]   in_i,
  input  logic signed [IN_W-1:0]   in_q,
  output logic                     out_valid,
  output logic signed [TR_W-1:0]   out_i,
  output logic signed [TR_W-1:0]   out_q,
  output logic signed [OUT_W-1:0]  full_i,
  output logic signed [OUT_W-1:0]  full_q
);

  localparam int RW = (R > 1) ? $clog2(R) : 1;
  localparam int CW = (N > 1) ? $clog2(N) : 1;
  localparam int SH = OUT_W - TR_W;

  logic signed [OUT_W-1:0] int_i [N], int_q [N];
  logic [RW-1:0]           dcnt;
  logic                    dec;        // last integrator holds a decimated sample
  logic                    v_d [N];    // valid travelling through the integrator pipeline

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int k = 0; k < N; k++) begin
        int_i[k] <= '0;
        int_q[k] <= '0;
        v_d[k]   <= 1'b0;
      end
    end else begin
      v_d[0] <= in_valid;
      for (int k = 1; k < N; k++) v_d[k] <= v_d[k-1];
      if (in_valid) begin
        int_i[0] <= int_i[0] + OUT_W'(in_i);
        int_q[0] <= int_q[0] + OUT_W'(in_q);
      end
      for (int k = 1; k < N; k++) begin
        if (v_d[k-1]) begin
          int_i[k] <= int_i[k] + int_i[k-1];
          int_q[k] <= int_q[k] + int_q[k-1];
        end
      end
    end
  end

  // Decimation counter on samples leaving the last integrator.
  assign dec = v_d[N-1] && (dcnt == RW'(R-1));
  always_ff @(posedge clk) begin
    if (rst) dcnt <= '0;
    else if (v_d[N-1]) dcnt <= (dcnt == RW'(R-1)) ? '0 : dcnt + 1'b1;
  end

  // Comb section: one stage per clock through a shared subtractor.
  logic signed [OUT_W-1:0] dly_i [N], dly_q [N];
  logic signed [OUT_W-1:0] x_i, x_q;
  logic [CW-1:0]           cstage;
  logic                    cbusy;

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int k = 0; k < N; k++) begin
        dly_i[k] <= '0;
        dly_q[k] <= '0;
      end
      x_i    <= '0;
      x_q    <= '0;
      cstage <= '0;
      cbusy  <= 1'b0;
    end else if (dec) begin
      x_i    <= int_i[N-1];
      x_q    <= int_q[N-1];
      cstage <= '0;
      cbusy  <= 1'b1;
    end else if (cbusy) begin
      x_i <= x_i - dly_i[cstage];
      x_q <= x_q - dly_q[cstage];
      dly_i[cstage] <= x_i;
      dly_q[cstage] <= x_q;
      if (cstage == CW'(N-1)) cbusy <= 1'b0;
      cstage <= cstage + 1'b1;
    end
  end

  // Convergent truncation of the OUT_W-bit result to TR_W bits.
  function automatic logic signed [TR_W-1:0] conv_trunc(input logic signed [OUT_W-1:0] v);
    logic signed [OUT_W-SH:0] kept;
    logic [SH-1:0]            frac;
    logic                     up;
    logic signed [OUT_W-SH:0] r;
    kept = (OUT_W-SH+1)'(v >>> SH);
    frac = v[SH-1:0];
    up   = frac[SH-1] && ((frac[SH-2:0] != '0) || kept[0]);
    r    = kept + (OUT_W-SH+1)'(up);
    if (r > (OUT_W-SH+1)'(2**(TR_W-1) - 1)) return TR_W'(2**(TR_W-1) - 1);
    return r[TR_W-1:0];
  endfunction

  logic cbusy_q;
  always_ff @(posedge clk) begin
    if (rst) begin
      cbusy_q   <= 1'b0;
      out_valid <= 1'b0;
      out_i     <= '0;
      out_q     <= '0;
      full_i    <= '0;
      full_q    <= '0;
    end else begin
      cbusy_q   <= cbusy;
      out_valid <= 1'b0;
      if (cbusy_q && !cbusy) begin
        out_valid <= 1'b1;
        out_i     <= conv_trunc(x_i);
        out_q     <= conv_trunc(x_q);
        full_i    <= x_i;
        full_q    <= x_q;
      end
    end
  end

endmodule
