// tb_dv_update: random candidate costs for a series of units with random
// candidate counts; checks BestBits/BestDV against a running minimum (earlier
// candidate on ties), the group/unit labels, the one-cycle output latency and
// the 'updated' pulse.
module tb_dv_update;
  import ipc_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = !clk;
  logic bits_valid = 0, best_valid, updated;
  logic [BITS_W-1:0] bits_test = '0, best_bits;
  dv_tag_t tag = '0;
  logic signed [DV_W-1:0] best_dv;
  logic [GRP_W-1:0] best_grp;
  logic [UNIT_W-1:0] best_unit;
  int checks = 0, failures = 0, n_upd = 0, n_exp_upd = 0;
  dv_update dut (.clk, .rst_n, .bits_valid, .bits_test, .tag, .best_valid, .best_bits,
                 .best_dv, .best_grp, .best_unit, .updated);
  always @(posedge clk) if (rst_n && updated) n_upd++;
  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int u = 0; u < 300; u++) begin
      automatic int nc = $urandom_range(1, 8);
      automatic int bb = 0, bd = 0;
      automatic logic [1:0] gg = 2'($urandom);
      for (int c = 0; c < nc; c++) begin
        automatic int cost = $urandom_range(20) + 100;
        automatic int d = c - 4;
        @(negedge clk);
        bits_valid = 1; bits_test = BITS_W'(cost);
        tag = '{dv: DV_W'(d), grp: gg, unit: UNIT_W'(u), first: (c == 0), last: (c == nc - 1)};
        if (c == 0 || cost < bb) begin
          if (c != 0) n_exp_upd++;
          bb = cost; bd = d;
        end
        if ($urandom_range(2) == 0 && c != nc - 1) begin
          @(negedge clk); bits_valid = 0;
        end
      end
      @(negedge clk);
      bits_valid = 0;
      checks++;
      if (!best_valid || int'(best_bits) != bb || int'(best_dv) != bd ||
          best_grp != gg || int'(best_unit) != (u % 256)) begin
        failures++;
        if (failures < 10) $display("FAIL unit %0d: got %0d/%0d exp %0d/%0d", u, best_bits, best_dv, bb, bd);
      end
      @(negedge clk);
      checks++; if (best_valid) begin failures++; $display("FAIL valid held"); end
    end
    checks++; if (n_upd != n_exp_upd) begin failures++; $display("FAIL updated count %0d vs %0d", n_upd, n_exp_upd); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk); failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
