// tb_sq_mixer: random A/D words, frequency and phase words; an independent
// model tracks the phase accumulator and checks that I is the sample times
// +/-1 by the sign of sin(phase), Q by the sign of cos(phase), and both are 0
// while the channel is disabled. Also checks the sync restart.
module tb_sq_mixer;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst, smp_en, sync, en;
  logic [31:0] freq, phase;
  logic signed [13:0] adc;
  logic signed [14:0] out_i, out_q;
  logic out_valid;

  sq_mixer dut (.clk, .rst, .smp_en, .sync, .en, .freq, .phase, .adc, .out_i, .out_q, .out_valid);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", msg);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] macc;
  int          exp_i, exp_q;
  bit          pend;
  int          n_neg = 0;

  initial begin
    rst = 1; smp_en = 0; sync = 0; en = 1; adc = '0;
    freq = 32'h0123_4567; phase = 32'h3000_0000;
    macc = '0; pend = 0;
    repeat (3) @(posedge clk);
    #1 rst = 0;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      smp_en = ($urandom_range(0, 2) == 0);
      adc    = 14'($urandom());
      if (n == 1000) freq = $urandom();
      if (n == 1500) phase = $urandom();
      en   = !(n >= 2000 && n < 2200);
      sync = (n == 2500);
      if (smp_en) begin
        real ph, s, c;
        int  x;
        ph = 6.283185307179586 * (real'(macc + phase) + 0.5) / 4294967296.0;
        s  = $sin(ph);
        c  = $cos(ph);
        x  = int'(adc);
        exp_i = !en ? 0 : (s >= 0.0 ? x : -x);
        exp_q = !en ? 0 : (c >= 0.0 ? x : -x);
        macc  = sync ? 32'd0 : macc + freq;
      end
      pend = smp_en;
      @(posedge clk); #1;
      check(out_valid == pend, "out_valid one clock after the strobe");
      if (pend) begin
        check(int'(out_i) == exp_i && int'(out_q) == exp_q,
              $sformatf("n=%0d I %0d/%0d Q %0d/%0d", n, out_i, exp_i, out_q, exp_q));
        if (exp_i < 0 && en) n_neg++;
      end
    end
    // the most negative sample negates without overflow
    @(negedge clk); smp_en = 1; adc = -14'sd8192; en = 1; freq = 0; phase = 32'h8000_0000; sync = 1;
    @(posedge clk); #1 check(int'(out_i) == 8192, "-(-8192) fits");
    check(n_neg > 100, "negated samples seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
