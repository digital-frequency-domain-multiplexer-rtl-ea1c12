// sync_fifo: the output FIFO of a multiplexer module.
//
// Single-clock first-in first-out memory between the demodulator, which
// writes filtered samples, and the host processor, which drains them. The
// published design says only that the filter output goes to a FIFO that the
// processor reads; width follows the 32-bit filter output, the depth (1024
// words by default) and the behaviour when full (the word is dropped and a
// sticky overflow flag is raised until cleared) are choices of this design.
//
// Timing: a write is stored on the clock edge where wr_en is high and the
// FIFO is not full (a write to a full FIFO is dropped even if a read
// happens in the same clock). rd_data shows the oldest word while not empty
// (first-word fall-through); rd_en removes it on the clock edge.
module sync_fifo #(
  parameter int W     = 32,
  parameter int DEPTH = 1024
) (
  input  logic                       clk,
  input  logic                       rst,
  input  logic                       wr_en,
  input  logic [W-1:0]               wr_data,
  input  logic                       rd_en,
  output logic [W-1:0]               rd_data,
  output logic                       empty,
  output logic                       full,
  output logic [$clog2(DEPTH):0]     count,
  input  logic                       ovf_clr,
  output logic                       overflow
);

  localparam int AW = $clog2(DEPTH);

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic          do_wr, do_rd;

  always_comb begin
    empty   = (count == '0);
    full    = (count == (AW+1)'(DEPTH));
    do_wr   = wr_en && !full;
    do_rd   = rd_en && !empty;
    rd_data = mem[rp];
  end

  always_ff @(posedge clk) if (do_wr) mem[wp] <= wr_data;

  always_ff @(posedge clk) begin
    if (rst) begin
      wp       <= '0;
      rp       <= '0;
      count    <= '0;
      overflow <= 1'b0;
    end else begin
      if (do_wr) wp <= wp + 1'b1;
      if (do_rd) rp <= rp + 1'b1;
      count <= count + (AW+1)'(do_wr) - (AW+1)'(do_rd);
      if (wr_en && full)  overflow <= 1'b1;
      else if (ovf_clr)   overflow <= 1'b0;
    end
  end

  // A read of an empty FIFO is a protocol error of the reader.
  a_no_underflow: assert property (@(posedge clk) disable iff (rst) rd_en |-> !empty)
    else $warning("sync_fifo: read while empty");

endmodule
