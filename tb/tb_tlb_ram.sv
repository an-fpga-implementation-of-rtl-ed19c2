// tb_tlb_ram: checks the reset contents, writes with and without 'hold', and
// that every entry reads back on the table output the next cycle.
module tb_tlb_ram;
  import ipc_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = !clk;
  logic wr_en = 0, hold = 0;
  logic [GRP_W-1:0] wr_grp = '0;
  logic [BAND_W-1:0] wr_band = '0;
  len_t wr_len = '0;
  tlb_t tab, model;
  int checks = 0, failures = 0;
  tlb_ram dut (.clk, .rst_n, .wr_en, .wr_grp, .wr_band, .wr_len, .hold, .table_o(tab));
  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    model = TLB_DEFAULT;
    checks++; if (tab !== model) begin failures++; $display("FAIL reset contents"); end
    checks++; if (unit_len(tab[3]) != 64 || unit_len(tab[2]) != 32 ||
                  unit_len(tab[1]) != 16 || unit_len(tab[0]) != 16) begin
      failures++; $display("FAIL default unit lengths"); end
    for (int i = 0; i < 200; i++) begin
      @(negedge clk);
      wr_en = 1'($urandom); hold = ($urandom_range(3) == 0);
      wr_grp = 2'($urandom); wr_band = 2'($urandom); wr_len = 16'($urandom_range(100));
      @(negedge clk);
      if (wr_en && !hold) model[wr_grp][wr_band] = wr_len;
      wr_en = 0;
      checks++; if (tab !== model) begin failures++; $display("FAIL after write %0d", i); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk); failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
