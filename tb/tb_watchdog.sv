// tb_watchdog: with TIMEOUT = 100 and PULSE = 5, regular kicks keep the
// processor reset low; once kicks stop, reset rises exactly 100 clocks after
// the last kick, stays high 5 clocks and repeats every 105 clocks.
module tb_watchdog;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst, kick, proc_rst;

  watchdog #(.TIMEOUT(100), .PULSE(5)) dut (.clk, .rst, .kick, .proc_rst);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", msg);
    end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t, hi;
    rst = 1; kick = 0;
    repeat (3) @(posedge clk);
    #1 rst = 0;
    for (int n = 0; n < 1000; n++) begin
      kick = (n % 90 == 0);
      @(posedge clk); #1;
      check(!proc_rst, "no reset while kicked");
    end
    kick = 1; @(posedge clk); #1 kick = 0;
    t = 0;
    while (!proc_rst && t < 500) begin @(posedge clk); #1 t++; end
    check(t == 100, $sformatf("reset after %0d clocks", t));
    hi = 0;
    while (proc_rst) begin @(posedge clk); #1 hi++; end
    check(hi == 5, $sformatf("pulse %0d clocks", hi));
    t = 0;
    while (!proc_rst && t < 500) begin @(posedge clk); #1 t++; end
    check(t == 100, "repeats while unresponsive");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
