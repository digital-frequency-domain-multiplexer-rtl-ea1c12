// tb_dmfs: drives a 4-carrier synthesizer sharing two sine tables (2
// carriers per table) with random frequency, phase and amplitude words and
// compares every D/A word with a model that computes the sine, the 18-bit
// product, the saturated sum and the 16-bit truncation on its own. Also
// checks one D/A word per sample period, saturation and the sync restart.
module tb_dmfs;
  localparam int N = 4, MUX = 2;
  int checks = 0, failures = 0, nsat = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst, smp_en, sync;
  logic [31:0]        freq [N], phase [N];
  logic signed [15:0] amp [N];
  logic signed [15:0] dac_out;
  logic               dac_valid;

  dmfs #(.N_CAR(N), .MUX(MUX)) dut (.clk, .rst, .smp_en, .sync, .freq, .phase, .amp,
                                    .dac_out, .dac_valid);

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

  // Model: accumulator snapshots taken after every sample step.
  logic [31:0] macc [N];
  typedef logic [N-1:0][31:0] snap_t;   // packed: one entry per carrier
  snap_t q[$];

  function automatic int expect_word(input snap_t s);
    longint sum;
    sum = 0;
    for (int c = 0; c < N; c++) begin
      logic [31:0] p;
      longint prod;
      p    = s[c] + phase[c];
      prod = longint'(ref_sin(int'(p[31:16]))) * longint'(amp[c]);
      sum += prod >>> 13;           // 18-bit product (bits 30:13)
    end
    if (sum > 131071) begin sum = 131071; nsat++; end
    if (sum < -131072) begin sum = -131072; nsat++; end
    return int'(sum >>> 2);
  endfunction

  // Strobe every MUX clocks.
  int div = 0;
  always @(posedge clk) begin
    if (rst) div <= 0; else div <= (div == MUX-1) ? 0 : div + 1;
  end
  assign smp_en = !rst && (div == MUX-1);

  always @(posedge clk) begin
    if (rst) for (int c = 0; c < N; c++) macc[c] <= '0;
    else if (smp_en) begin
      snap_t s;
      for (int c = 0; c < N; c++) begin
        s[c] = sync ? 32'd0 : macc[c] + freq[c];
        macc[c] <= s[c];
      end
      q.push_back(s);
    end
  end

  int last_v = -1, cyc = 0, nwords = 0, skip = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (!rst && dac_valid) begin
      snap_t s;
      int e;
      s = q.pop_front();
      e = expect_word(s);
      if (skip > 0) skip--;   // words in flight while the settings changed
      else check(int'(dac_out) == e, $sformatf("word %0d: dut %0d model %0d", nwords, dac_out, e));
      if (last_v >= 0) check(cyc - last_v == MUX, "one D/A word per sample period");
      last_v = cyc;
      nwords++;
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst = 1; sync = 0;
    for (int c = 0; c < N; c++) begin
      freq[c]  = $urandom();
      phase[c] = $urandom();
      amp[c]   = 16'($urandom_range(0, 65535));
    end
    repeat (5) @(posedge clk);
    rst <= 0;
    repeat (600) @(posedge clk);
    // sync restart of all accumulators
    @(negedge clk) sync = 1;
    @(posedge clk); while (!smp_en) @(posedge clk);
    @(negedge clk) sync = 0;
    repeat (200) @(posedge clk);
    // all carriers in phase at full amplitude: the sum must saturate
    for (int c = 0; c < N; c++) begin
      freq[c] = 32'h0100_0000; phase[c] = 32'h4000_0000; amp[c] = 16'sd32767;
    end
    skip = 4;
    @(negedge clk) sync = 1;
    @(posedge clk); while (!smp_en) @(posedge clk);
    @(negedge clk) sync = 0;
    repeat (400) @(posedge clk);
    check(nsat > 0, "saturation exercised");
    check(nwords > 500, "words produced");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
