// tb_gcli_cal: streams the residuals of random units (random group, random
// band-block lengths in the TLB input, including empty blocks and blocks that
// are not a multiple of the code-group size, random idle cycles) and checks
// BitsTest against a cost computed here: per code group of up to 4
// coefficients inside one block, n*GCLI + GCLI + 1, GCLI being the bit length
// of the OR of the magnitudes. Also checks that the tag (DV_D2) comes out with
// its unit and that bits_valid follows the unit's last residual by 3 cycles.
module tb_gcli_cal;
  import ipc_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = !clk;
  tlb_t tlb;
  logic in_valid = 0, bits_valid;
  logic [RES_W-1:0] res = '0;
  logic [GRP_W-1:0] grp = '0;
  dv_tag_t tag = '0, tag_out;
  logic [BITS_W-1:0] bits_test;
  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  gcli_cal dut (.clk, .rst_n, .tlb, .in_valid, .res, .grp, .tag, .bits_valid, .bits_test, .tag_out);

  typedef struct { int bits; dv_tag_t t; longint due; } exp_t;
  exp_t eq[$];

  always @(posedge clk) if (rst_n && bits_valid) begin
    checks++;
    if (eq.size() == 0) begin failures++; $display("FAIL unexpected bits_valid"); end
    else begin
      exp_t e;
      e = eq.pop_front();
      if (int'(bits_test) != e.bits || tag_out != e.t || cyc != e.due) begin
        failures++;
        if (failures < 10) $display("FAIL bits=%0d exp=%0d cyc=%0d due=%0d", bits_test, e.bits, cyc, e.due);
      end
    end
  end

  initial begin
    for (int g = 0; g < NG; g++)
      for (int b = 0; b < MAX_BANDS; b++) tlb[g][b] = 16'($urandom_range(0, 11));
    tlb[0] = TLB_DEFAULT[0];
    tlb[3][0] = 16'd0;  // leading empty block
    for (int g = 0; g < NG; g++) if (unit_len(tlb[g]) == 0) tlb[g][1] = 16'd5;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 400; n++) begin
      automatic int g = $urandom_range(NG - 1);
      automatic int cost = 0;
      automatic int shift = $urandom_range(0, 31);
      automatic dv_tag_t t = '{dv: DV_W'($urandom), grp: 2'(g), unit: UNIT_W'($urandom),
                                first: 1'($urandom), last: 1'($urandom)};
      for (int b = 0; b < MAX_BANDS; b++)
        for (int s = 0; s < int'(tlb[g][b]); s += 4) begin
          automatic int cnt = (int'(tlb[g][b]) - s < 4) ? int'(tlb[g][b]) - s : 4;
          automatic logic [31:0] orv = '0;
          automatic int gc = 0;
          for (int i = 0; i < cnt; i++) begin
            automatic logic [31:0] m = ($urandom_range(9) == 0) ? 32'd0 : ($urandom >> shift);
            orv |= m;
            @(negedge clk);
            while ($urandom_range(4) == 0) begin in_valid = 0; @(negedge clk); end
            in_valid = 1; res = {1'($urandom), m}; grp = 2'(g); tag = t;
          end
          for (int k = 0; k < 32; k++) if (orv[k]) gc = k + 1;
          cost += cnt * gc + gc + 1;
        end
      begin
        exp_t e;
        e.bits = cost; e.t = t; e.due = cyc + 3;
        eq.push_back(e);
      end
    end
    @(negedge clk);
    in_valid = 0;
    repeat (8) @(negedge clk);
    checks++; if (eq.size() != 0) begin failures++; $display("FAIL %0d results missing", eq.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk); failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
