// tb_sine_lut: checks the sine table against an independently computed
// sine for every address, the quarter-period landmarks, odd symmetry about
// half a period and the one-clock read latency.
module tb_sine_lut;
  localparam int AW = 16, DW = 16;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [AW-1:0]        addr;
  logic signed [DW-1:0] data;
  sine_lut #(.AW(AW), .DW(DW)) dut (.clk, .addr, .data);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", msg);
    end
  endtask

  function automatic int ref_sin(input int a);
    real v;
    v = 32767.0 * $sin(6.283185307179586 * real'(a) / 65536.0);
    return $rtoi(v >= 0.0 ? v + 0.5 : v - 0.5);
  endfunction

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    addr = '0;
    @(posedge clk);
    for (int a = 0; a < 2**AW; a++) begin
      addr = AW'(a);
      @(posedge clk);
      #1;
      check(int'(data) - ref_sin(a) <= 1 && ref_sin(a) - int'(data) <= 1,
            $sformatf("addr %0d: %0d vs %0d", a, data, ref_sin(a)));
    end
    // landmarks and symmetry
    addr = 16'd0;     @(posedge clk); #1 check(data == 0,      "sin(0)");
    addr = 16'd16384; @(posedge clk); #1 check(data == 32767,  "sin(pi/2)");
    addr = 16'd32768; @(posedge clk); #1 check(data == 0,      "sin(pi)");
    addr = 16'd49152; @(posedge clk); #1 check(data == -32767, "sin(3pi/2)");
    for (int k = 0; k < 200; k++) begin
      int a;
      logic signed [DW-1:0] d0;
      a = $urandom_range(0, 32767);
      addr = AW'(a); @(posedge clk); #1 d0 = data;
      addr = AW'(a + 32768); @(posedge clk); #1
      check(data == -d0, $sformatf("odd symmetry at %0d", a));
    end
    // latency: value changes only at the clock edge after the address
    addr = 16'd16384; @(posedge clk); #1;
    addr = 16'd0; #1 check(data == 32767, "registered read holds until the edge");
    @(posedge clk); #1 check(data == 0, "new word one clock later");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
