// tb_sync_fifo: random pushes and pops against a queue model on an 8-word
// FIFO: data order, count, empty/full, the dropped word and sticky overflow
// flag on a write to a full FIFO, and clearing that flag.
module tb_sync_fifo;
  localparam int D = 8;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst, wr_en, rd_en, empty, full, ovf_clr, overflow;
  logic [31:0] wr_data, rd_data;
  logic [3:0] count;

  sync_fifo #(.W(32), .DEPTH(D)) dut (.clk, .rst, .wr_en, .wr_data, .rd_en, .rd_data,
    .empty, .full, .count, .ovf_clr, .overflow);

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

  logic [31:0] q[$];
  bit exp_ovf;
  int n_full = 0;

  initial begin
    rst = 1; wr_en = 0; rd_en = 0; ovf_clr = 0; wr_data = 0; exp_ovf = 0;
    repeat (3) @(posedge clk);
    #1 rst = 0;
    for (int n = 0; n < 4000; n++) begin
      @(negedge clk);
      check(int'(count) == q.size(), $sformatf("count %0d vs %0d", count, q.size()));
      check(empty == (q.size() == 0) && full == (q.size() == D), "flags");
      check(overflow == exp_ovf, "overflow flag");
      if (q.size() > 0) check(rd_data == q[0], "head word");
      // phases: fill-heavy, then drain-heavy
      wr_en   = ($urandom_range(0, 99) < ((n / 500) % 2 ? 30 : 70));
      rd_en   = ($urandom_range(0, 99) < ((n / 500) % 2 ? 70 : 30)) && q.size() > 0;
      ovf_clr = ($urandom_range(0, 49) == 0);
      wr_data = $urandom();
      @(posedge clk);
      // a write into a full FIFO is dropped, even with a read in the same clock
      if (wr_en && q.size() == D) begin exp_ovf = 1; n_full++; end
      else begin
        if (ovf_clr) exp_ovf = 0;
        if (wr_en) q.push_back(wr_data);
      end
      if (rd_en) void'(q.pop_front());
    end
    check(n_full > 10, "writes to a full FIFO exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
