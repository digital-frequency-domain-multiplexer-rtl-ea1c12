// freq_select: output-rate selector of a demodulator channel.
//
// Every FIR stage of the channel's filter chain halves the sample rate. The
// selector forwards the output of one stage, chosen by a software register,
// to the FIFO; the stages after it are bypassed, which trades a narrower
// band for a higher data rate (the published design uses this for
// commissioning). sel = k picks FIR #(k+1); values past the last stage pick
// the last stage. The output is registered: one clock after the chosen
// stage's out_valid.
module freq_select #(
  parameter int N_ST = 6,
  parameter int W    = 32
) (
  input  logic                  clk,
  input  logic                  rst,
  input  logic [2:0]            sel,
  input  logic                  st_valid [N_ST],
  input  logic signed [W-1:0]   st_i     [N_ST],
  input  logic signed [W-1:0]   st_q     [N_ST],
  output logic                  out_valid,
  output logic signed [W-1:0]   out_i,
  output logic signed [W-1:0]   out_q
);

  int unsigned k;
  always_comb k = (int'(sel) < N_ST) ? int'(sel) : N_ST - 1;

  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid <= 1'b0;
      out_i     <= '0;
      out_q     <= '0;
    end else begin
      out_valid <= st_valid[k];
      if (st_valid[k]) begin
        out_i <= st_i[k];
        out_q <= st_q[k];
      end
    end
  end

endmodule
