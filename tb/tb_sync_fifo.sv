// tb_sync_fifo: random pushes and pops against a queue model; checks data
// order, empty/full flags and the level count, including running full.
module tb_sync_fifo;
  localparam int W = 16, D = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = !clk;
  logic wr_en = 0, rd_en = 0, full, empty;
  logic [W-1:0] wd = '0, rd;
  logic [$clog2(D):0] level;
  int checks = 0, failures = 0, n_full = 0;
  logic [W-1:0] mq[$];

  sync_fifo #(.W(W), .DEPTH(D)) dut (.clk, .rst_n, .wr_en, .wr_data(wd), .wr_full(full),
    .rd_en, .rd_data(rd), .rd_empty(empty), .level);

  task automatic chk(logic c, string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      chk(empty == (mq.size() == 0), "empty flag");
      chk(full == (mq.size() == D), "full flag");
      chk(int'(level) == mq.size(), "level");
      if (mq.size() != 0) chk(rd == mq[0], "head data");
      if (full) n_full++;
      // phases: fill-biased then drain-biased
      wr_en = !full && ($urandom_range(99) < ((i / 200) % 2 ? 30 : 80));
      rd_en = !empty && ($urandom_range(99) < ((i / 200) % 2 ? 80 : 30));
      wd = W'($urandom);
      @(posedge clk);
      #1;
      if (rd_en) void'(mq.pop_front());
      if (wr_en) mq.push_back(wd);
    end
    chk(n_full > 0, "never full");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
