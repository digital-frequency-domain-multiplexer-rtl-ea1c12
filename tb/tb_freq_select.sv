// tb_freq_select: six stages with random valids and words; for every
// select value the output must carry the chosen stage's word one clock after
// its valid and ignore the other stages; out-of-range selects pick the last.
module tb_freq_select;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst;
  logic [2:0] sel;
  logic st_valid [6];
  logic signed [31:0] st_i [6], st_q [6];
  logic out_valid;
  logic signed [31:0] out_i, out_q;

  freq_select dut (.clk, .rst, .sel, .st_valid, .st_i, .st_q, .out_valid, .out_i, .out_q);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", msg);
    end
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int k, nv;
    logic signed [31:0] ei, eq;
    bit ev;
    rst = 1; sel = 0;
    for (int s = 0; s < 6; s++) begin st_valid[s] = 0; st_i[s] = 0; st_q[s] = 0; end
    repeat (3) @(posedge clk);
    #1 rst = 0;
    nv = 0;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      sel = 3'(n / 250);
      for (int s = 0; s < 6; s++) begin
        st_valid[s] = ($urandom_range(0, 3) == 0);
        st_i[s] = $urandom(); st_q[s] = $urandom();
      end
      k  = (int'(sel) < 6) ? int'(sel) : 5;
      ev = st_valid[k]; ei = st_i[k]; eq = st_q[k];
      @(posedge clk); #1;
      check(out_valid == ev, $sformatf("valid follows stage %0d", k));
      if (ev) begin
        nv++;
        check(out_i == ei && out_q == eq, $sformatf("data of stage %0d", k));
      end
    end
    check(nv > 300, "valid outputs seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
