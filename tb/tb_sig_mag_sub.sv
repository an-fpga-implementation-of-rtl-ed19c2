// tb_sig_mag_sub: random sign-magnitude pairs, all four sign combinations and
// the extreme magnitudes, against integer subtraction; checks the one-cycle
// latency and that the group index travels with the residual.
module tb_sig_mag_sub;
  import ipc_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = !clk;
  logic in_valid = 0, out_valid;
  logic [COEF_W-1:0] orig = '0, recon = '0;
  logic [GRP_W-1:0] in_grp = '0, out_grp;
  logic [RES_W-1:0] res;
  int checks = 0, failures = 0;
  sig_mag_sub dut (.clk, .rst_n, .in_valid, .orig, .recon, .in_grp, .out_valid, .res, .out_grp);

  function automatic longint v(logic [31:0] w);
    return w[31] ? -longint'(w[30:0]) : longint'(w[30:0]);
  endfunction

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      logic [31:0] o, r;
      longint e, m;
      logic [1:0] gg;
      o = $urandom; r = $urandom;
      if (i % 5 == 0) begin o[30:0] = o[30:0] & 31'hff; r[30:0] = r[30:0] & 31'hff; end
      if (i == 1) begin o = 32'h7fff_ffff; r = 32'hffff_ffff; end
      if (i == 2) begin o = 32'hffff_ffff; r = 32'h7fff_ffff; end
      if (i == 3) begin o = 32'h8000_0005; r = 32'h0000_0005; end
      if (i == 4) begin o = 32'h8000_0000; r = 32'h0000_0000; end
      gg = 2'($urandom);
      @(negedge clk);
      orig = o; recon = r; in_valid = 1; in_grp = gg;
      @(negedge clk);
      in_valid = 0;
      e = v(o) - v(r);
      m = e < 0 ? -e : e;
      checks++;
      if (!out_valid || out_grp != gg || longint'(res[31:0]) != m || res[32] != (e < 0)) begin
        failures++;
        if (failures < 10) $display("FAIL o=%h r=%h res=%h exp=%0d", o, r, res, e);
      end
    end
    @(negedge clk);
    checks++; if (out_valid) begin failures++; $display("FAIL valid stuck"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk); failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
