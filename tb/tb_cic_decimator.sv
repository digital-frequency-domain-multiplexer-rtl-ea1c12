// tb_cic_decimator: (1) a 3-stage, 8x decimator fed random 15-bit samples is
// compared with the direct convolution of the input with the CIC impulse
// response (an 8-point boxcar convolved with itself three times, computed
// here), both at full width and after convergent truncation to 18 bits; the
// output rate (one per R inputs) and latency are checked. (2) The default
// 6-stage, 2048x decimator must be 81 bits wide and map a constant input x
// to 8x once settled (gain 2048^6 = 2^66, truncation drops 63 bits).
module tb_cic_decimator;
  localparam int IN_W = 15, N = 3, R = 8;
  localparam int OUT_W = IN_W + N * 3;
  localparam int HL = N * (R - 1) + 1;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst, in_valid;
  logic signed [IN_W-1:0] in_i, in_q;
  logic out_valid;
  logic signed [17:0] out_i, out_q;
  logic signed [OUT_W-1:0] full_i, full_q;

  cic_decimator #(.IN_W(IN_W), .N(N), .R(R)) dut (
    .clk, .rst, .in_valid, .in_i, .in_q, .out_valid, .out_i, .out_q, .full_i, .full_q);

  // default-size instance
  logic in_valid2;
  logic signed [14:0] d2_i, d2_q;
  logic out_valid2;
  logic signed [17:0] o2_i, o2_q;
  logic signed [80:0] f2_i, f2_q;
  cic_decimator dut2 (.clk, .rst, .in_valid(in_valid2), .in_i(d2_i), .in_q(d2_q),
    .out_valid(out_valid2), .out_i(o2_i), .out_q(o2_q), .full_i(f2_i), .full_q(f2_q));

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", msg);
    end
  endtask

  longint h [HL];
  longint xi [$], xq [$];

  function automatic longint conv_trunc(input longint v);
    longint k, f;
    k = v >>> (OUT_W - 18);
    f = v - (k << (OUT_W - 18));
    if (f > (64'sd1 << (OUT_W - 19)) || (f == (64'sd1 << (OUT_W - 19)) && k[0])) k++;
    if (k > 131071) k = 131071;
    return k;
  endfunction

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int m = 0, last_t = -1, t = 0, last_in_t = 0, lat = -1;
  always @(posedge clk) t <= t + 1;

  always @(posedge clk) if (!rst && out_valid) begin
    longint yi, yq;
    m++;
    yi = 0; yq = 0;
    for (int k = 0; k < HL; k++) begin
      int idx;
      idx = m * R - 1 - k;
      if (idx >= 0) begin
        yi += h[k] * xi[idx];
        yq += h[k] * xq[idx];
      end
    end
    check(longint'(full_i) == yi && longint'(full_q) == yq,
          $sformatf("output %0d full: %0d/%0d", m, full_i, yi));
    check(longint'(out_i) == conv_trunc(yi) && longint'(out_q) == conv_trunc(yq),
          $sformatf("output %0d truncated: %0d/%0d", m, out_i, conv_trunc(yi)));
    if (last_t >= 0) check(t - last_t == R, "one output per R inputs");
    last_t = t;
  end

  initial begin
    // impulse response: boxcar of length R convolved N times
    longint tmp [HL];
    for (int k = 0; k < HL; k++) h[k] = (k < R) ? 1 : 0;
    for (int s = 1; s < N; s++) begin
      for (int k = 0; k < HL; k++) begin
        tmp[k] = 0;
        for (int j = 0; j < R; j++) if (k - j >= 0) tmp[k] += h[k - j];
      end
      h = tmp;
    end
    rst = 1; in_valid = 0; in_i = 0; in_q = 0;
    in_valid2 = 0; d2_i = 0; d2_q = 0;
    repeat (3) @(posedge clk);
    #1 rst = 0;
    for (int n = 0; n < 800; n++) begin
      in_valid = 1;
      in_i = IN_W'($urandom());
      in_q = (n % 50 == 0) ? -15'sd16384 : IN_W'($urandom());
      xi.push_back(longint'(in_i));
      xq.push_back(longint'(in_q));
      @(posedge clk); #1;
    end
    in_valid = 0;
    repeat (20) @(posedge clk);
    check(m == 100, $sformatf("output count %0d", m));
    // latency: one more block of R inputs, measure to out_valid
    last_t = -1;
    for (int n = 0; n < R; n++) begin
      in_valid = 1; in_i = 0; in_q = 0; xi.push_back(0); xq.push_back(0);
      @(posedge clk); #1;
    end
    in_valid = 0;
    lat = 0;
    while (!out_valid) begin @(posedge clk); #1; lat++; end
    check(lat == 2 * N, $sformatf("latency after last input %0d", lat));
    repeat (5) @(posedge clk);
    // default size: constant input
    check($bits(f2_i) == 81, "default output width is 81 bits");
    for (int n = 0; n < 2048 * 8; n++) begin
      in_valid2 = 1; d2_i = 15'sd1234; d2_q = -15'sd5000;
      @(posedge clk); #1;
    end
    in_valid2 = 0;
    repeat (20) @(posedge clk);
    check(o2_i == 18'sd9872 && o2_q == -18'sd40000, $sformatf("default DC gain: %0d %0d", o2_i, o2_q));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
