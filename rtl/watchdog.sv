// watchdog: processor watchdog timer.
//
// The published board resets its embedded processor when the processor
// stops responding. Here the processor proves it is alive by writing a kick
// register; if no kick arrives for TIMEOUT clocks, proc_rst is asserted for
// PULSE clocks and the count starts again. Timeout, pulse length and the
// kick mechanism are choices of this design (the default timeout is about
// 1.3 s at a 200 MHz clock).
module watchdog #(
  parameter int unsigned TIMEOUT = 2**28,
  parameter int unsigned PULSE   = 64
) (
  input  logic clk,
  input  logic rst,
  input  logic kick,
  output logic proc_rst
);

  localparam int CW = $clog2(TIMEOUT + 1);
  localparam int PW = $clog2(PULSE + 1);

  logic [CW-1:0] cnt;
  logic [PW-1:0] pcnt;

  always_ff @(posedge clk) begin
    if (rst) begin
      cnt  <= '0;
      pcnt <= '0;
    end else if (pcnt != '0) begin
      pcnt <= pcnt - 1'b1;
      cnt  <= '0;
    end else if (kick) begin
      cnt <= '0;
    end else if (cnt == CW'(TIMEOUT - 1)) begin
      cnt  <= '0;
      pcnt <= PW'(PULSE);
    end else begin
      cnt <= cnt + 1'b1;
    end
  end

  assign proc_rst = (pcnt != '0);

endmodule
