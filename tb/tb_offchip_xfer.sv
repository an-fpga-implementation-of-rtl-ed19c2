// tb_offchip_xfer: random read commands of 1 to 100 words against the
// behavioural DRAM (random request back-pressure, random gaps in the read
// data). Checks that every word returns in order with the data stored at its
// address and its command's destination, that out_last marks each command's
// final word, and that no burst exceeds MAX_BURST words.
module tb_offchip_xfer;
  import ipc_pkg::*;
  localparam int MB = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = !clk;
  logic cmd_valid = 0, cmd_ready, dram_req_valid, dram_req_ready, dram_rsp_valid;
  logic [ADDR_W-1:0] cmd_addr = '0, dram_req_addr;
  len_t cmd_len = '0, dram_req_len;
  dest_t cmd_dest = '0, out_dest;
  logic [COEF_W-1:0] dram_rsp_data, out_data;
  logic out_valid, out_last;
  int checks = 0, failures = 0, n_bursts = 0;

  offchip_xfer #(.MAX_BURST(MB), .OUTSTANDING(4)) dut (.clk, .rst_n, .cmd_valid, .cmd_ready,
    .cmd_addr, .cmd_len, .cmd_dest, .dram_req_valid, .dram_req_ready, .dram_req_addr,
    .dram_req_len, .dram_rsp_valid, .dram_rsp_data, .out_valid, .out_data, .out_dest, .out_last);
  dram_model #(.AW(12), .LAT(5), .READY_PCT(60), .GAP_PCT(20)) u_dram (.clk, .rst_n,
    .req_valid(dram_req_valid), .req_ready(dram_req_ready), .req_addr(dram_req_addr),
    .req_len(dram_req_len), .rsp_valid(dram_rsp_valid), .rsp_data(dram_rsp_data));

  typedef struct { logic [31:0] d; dest_t t; logic last; } w_t;
  w_t wq[$];

  always @(posedge clk) if (rst_n) begin
    if (dram_req_valid && dram_req_ready) begin
      n_bursts++;
      checks++;
      if (dram_req_len == 0 || dram_req_len > MB) begin failures++; $display("FAIL burst length %0d", dram_req_len); end
    end
    if (out_valid) begin
      w_t e;
      checks++;
      e = wq.pop_front();
      if (out_data != e.d || out_dest != e.t || out_last != e.last) begin
        failures++;
        if (failures < 10) $display("FAIL data %h exp %h last %b exp %b", out_data, e.d, out_last, e.last);
      end
    end
  end

  initial begin
    for (int a = 0; a < 4096; a++) u_dram.write(a, (a * 32'h9e37_79b9) ^ 32'h1234_5678);
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 150; n++) begin
      automatic int len = $urandom_range(1, 100);
      automatic int a = $urandom_range(0, 3900);
      automatic dest_t t = dest_t'($urandom);
      for (int i = 0; i < len; i++) begin
        w_t w;
        w.d = ((a + i) * 32'h9e37_79b9) ^ 32'h1234_5678; w.t = t; w.last = (i == len - 1);
        wq.push_back(w);
      end
      @(negedge clk);
      cmd_valid = 1; cmd_addr = ADDR_W'(a); cmd_len = len_t'(len); cmd_dest = t;
      @(posedge clk);
      while (!cmd_ready) @(posedge clk);
      @(negedge clk);
      cmd_valid = 0;
    end
    while (wq.size() != 0) @(negedge clk);
    repeat (10) @(negedge clk);
    checks++; if (n_bursts < 150) begin failures++; $display("FAIL too few bursts"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk); failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
