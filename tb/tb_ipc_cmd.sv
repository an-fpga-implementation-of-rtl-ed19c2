// tb_ipc_cmd: random unit requests (original or reconstructed bank, any
// group, unit, component and precinct, random TLB lengths) with random
// back-pressure from the transfer side. Each command's entry address and
// length are checked against the IPC Group-aligned layout computed here, and
// returned words must be written into exactly the Q or C FIFO their tag names.
module tb_ipc_cmd;
  import ipc_pkg::*;
  localparam int NU = 80;
  logic clk = 0, rst_n = 0;
  always #5 clk = !clk;
  logic [ADDR_W-1:0] orig_base, recon_base;
  logic [15:0] orig_prec, ref_prec;
  logic [1:0] yuv;
  tlb_t tlb;
  logic req_valid = 0, req_ready, cmd_valid, cmd_ready = 0, in_valid = 0;
  fetch_req_t req = '0;
  logic [ADDR_W-1:0] cmd_addr;
  len_t cmd_len;
  dest_t cmd_dest, in_dest = '0;
  logic [COEF_W-1:0] in_data = '0, wr_data;
  logic [NG-1:0] q_wr, c_wr;
  int checks = 0, failures = 0, n_stall = 0;

  ipc_cmd #(.NUM_UNITS(NU)) dut (.clk, .rst_n, .orig_base, .recon_base, .orig_prec, .ref_prec,
    .yuv, .tlb, .req_valid, .req_ready, .req, .cmd_valid, .cmd_ready, .cmd_addr, .cmd_len,
    .cmd_dest, .in_valid, .in_data, .in_dest, .q_wr, .c_wr, .wr_data);

  typedef struct { longint addr; int len; logic rc; logic [1:0] g; } exp_t;
  exp_t eq[$];

  function automatic int ul(int g);
    int s = 0;
    for (int b = 0; b < MAX_BANDS; b++) s += int'(tlb[g][b]);
    return s;
  endfunction

  always @(posedge clk) if (rst_n) begin
    if (cmd_valid && !cmd_ready) n_stall++;
    if (cmd_valid && cmd_ready) begin
      exp_t e;
      checks++;
      e = eq.pop_front();
      if (longint'(cmd_addr) != e.addr || int'(cmd_len) != e.len ||
          cmd_dest.is_recon != e.rc || cmd_dest.grp != e.g) begin
        failures++;
        if (failures < 10) $display("FAIL addr %h exp %h len %0d exp %0d", cmd_addr, e.addr, cmd_len, e.len);
      end
    end
  end

  // request side
  initial begin
    for (int g = 0; g < NG; g++) for (int b = 0; b < MAX_BANDS; b++) tlb[g][b] = 16'($urandom_range(0, 40));
    orig_base = 32'h0010_0000; recon_base = 32'h0200_0000;
    orig_prec = 16'd7; ref_prec = 16'd6; yuv = 2'd2;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 600; n++) begin
      automatic fetch_req_t r = '{is_recon: 1'($urandom), grp: 2'($urandom), unit: UNIT_W'($urandom_range(NU - 1))};
      automatic exp_t e;
      automatic longint goff = 0;
      if (n == 300) begin orig_prec = 16'd123; ref_prec = 16'd0; yuv = 2'd0; end
      for (int k = 0; k < int'(r.grp); k++) goff += ul(k);
      e.addr = (r.is_recon ? longint'(recon_base) : longint'(orig_base)) +
               longint'(r.is_recon ? ref_prec : orig_prec) * 3 * PREC_WORDS + longint'(yuv) * PREC_WORDS +
               NU * goff + longint'(r.unit) * ul(r.grp);
      e.addr = e.addr & 64'hffff_ffff;
      e.len = ul(r.grp); e.rc = r.is_recon; e.g = r.grp;
      @(negedge clk);
      req_valid = 1; req = r;
      @(posedge clk);
      while (!req_ready) @(posedge clk);
      eq.push_back(e);
      @(negedge clk);
      req_valid = 0;
      if ($urandom_range(1) == 0) @(negedge clk);
    end
    repeat (20) @(negedge clk);
    checks++; if (eq.size() != 0) begin failures++; $display("FAIL commands missing"); end
    checks++; if (n_stall == 0) begin failures++; $display("FAIL no back-pressure seen"); end
    // data routing
    for (int n = 0; n < 200; n++) begin
      @(negedge clk);
      in_valid = 1'($urandom); in_dest = dest_t'($urandom); in_data = $urandom;
      #1;
      checks++;
      if (q_wr != (in_valid && !in_dest.is_recon ? NG'(1) << in_dest.grp : '0) ||
          c_wr != (in_valid &&  in_dest.is_recon ? NG'(1) << in_dest.grp : '0) ||
          wr_data != in_data) begin
        failures++; $display("FAIL routing");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  // transfer side: random ready
  always @(negedge clk) cmd_ready <= ($urandom_range(2) != 0);
  initial begin
    repeat (100000) @(posedge clk); failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
