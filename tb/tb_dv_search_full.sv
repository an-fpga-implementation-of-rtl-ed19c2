// tb_dv_search_full: end-to-end test of dv_search_top with every parameter at its default (80 units per precinct, 2560x4 coefficients per component).
//
// The testbench fills a behavioural DRAM with an original and a reconstructed
// precinct component in the IPC Group-aligned layout, starts the search, and
// compares every (unit, group) result with a reference model written here
// from the design's rules: residual = original - reconstructed, code groups of
// 4 coefficients that do not cross band blocks, cost n*GCLI + GCLI + 1 per code
// group, lowest cost wins, earlier candidate on ties, window DV_MIN..DV_MAX
// clipped to the precinct. It runs three searches, one per colour component: the
// first with the reset contents of the TLB, the other two after loading other
// band-block lengths, with other precinct numbers. It counts how often each
// mechanism occurred (FIFO credit stall, DRAM back-pressure, burst splitting,
// clipped search window, DV improvement, tie kept, TLB reload) and counts a
// failure for any that never did. It also checks that 'done' coincides with
// the last result and that the search keeps the DRAM read port busy: the run
// must take fewer than twice as many cycles as words read.
module tb_dv_search_full;
  import ipc_pkg::*;

  localparam int NU     = 80;
  localparam int FD     = 512;
  localparam int DVMIN  = -4;
  localparam int DVMAX  = 3;
  localparam int MB     = 16;
  localparam int CG     = 4;
  localparam longint WATCHDOG = 3000000;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = !clk;

  logic                   start = 1'b0, busy, done;
  logic [ADDR_W-1:0]      orig_base, recon_base;
  logic [15:0]            orig_prec, ref_prec;
  logic [1:0]             yuv;
  logic                   tlb_wr_en = 1'b0;
  logic [GRP_W-1:0]       tlb_wr_grp = '0;
  logic [BAND_W-1:0]      tlb_wr_band = '0;
  logic [LEN_W-1:0]       tlb_wr_len = '0;
  logic                   dram_req_valid, dram_req_ready, dram_rsp_valid;
  logic [ADDR_W-1:0]      dram_req_addr;
  logic [LEN_W-1:0]       dram_req_len;
  logic [COEF_W-1:0]      dram_rsp_data;
  logic                   dv_valid;
  logic signed [DV_W-1:0] dv;
  logic [BITS_W-1:0]      dv_bits;
  logic [GRP_W-1:0]       dv_grp;
  logic [UNIT_W-1:0]      dv_unit;

  dv_search_top  dut (
    .clk, .rst_n, .start, .busy, .done, .orig_base, .recon_base, .orig_prec,
    .ref_prec, .yuv, .tlb_wr_en, .tlb_wr_grp, .tlb_wr_band, .tlb_wr_len,
    .dram_req_valid, .dram_req_ready, .dram_req_addr, .dram_req_len,
    .dram_rsp_valid, .dram_rsp_data, .dv_valid, .dv, .dv_bits, .dv_grp, .dv_unit);

  dram_model #(.AW(17), .LAT(8), .READY_PCT(70), .GAP_PCT(10)) u_dram (
    .clk, .rst_n, .req_valid(dram_req_valid), .req_ready(dram_req_ready),
    .req_addr(dram_req_addr), .req_len(dram_req_len),
    .rsp_valid(dram_rsp_valid), .rsp_data(dram_rsp_data));

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // ---------------- mechanism counters ----------------
  int n_credit = 0, n_backpr = 0, n_split = 0, n_clip = 0, n_improve = 0;
  int n_tie = 0, n_reload = 0, n_words = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_ctrl.credit_stall) n_credit++;
    if (dram_req_valid && !dram_req_ready) n_backpr++;
    if (dut.u_xfer.cmd_valid && dut.u_xfer.cmd_ready && dut.u_xfer.cmd_len > MB) n_split++;
    if (dut.u_upd.updated) n_improve++;
    if (dram_rsp_valid) n_words++;
    if (dram_req_valid && dram_req_ready && longint'(dram_req_addr) + longint'(dram_req_len) > 2**17) begin
      failures++;
      $display("FAIL: read beyond the modelled DRAM at %h", dram_req_addr);
    end
  end

  // ---------------- test data and reference ----------------
  int unsigned shadow [int unsigned];
  int          bl [NG][MAX_BANDS];

  function automatic int ulen(int g);
    int s = 0;
    for (int b = 0; b < MAX_BANDS; b++) s += bl[g][b];
    return s;
  endfunction

  function automatic int unsigned entry(int unsigned base, int prec, int comp, int g, int u);
    int goff = 0;
    for (int k = 0; k < g; k++) goff += ulen(k);
    return base + prec * 3 * PREC_WORDS + comp * PREC_WORDS + NU * goff + u * ulen(g);
  endfunction

  function automatic longint sm2int(int unsigned w);
    longint m = longint'(w & 32'h7fff_ffff);
    return w[31] ? -m : m;
  endfunction

  function automatic int unsigned int2sm(longint v);
    return v < 0 ? (32'h8000_0000 | int'(-v)) : int'(v);
  endfunction

  function automatic int unit_cost(int g, int u, int ru, int unsigned ob, int op,
                                   int unsigned rb, int rp, int comp);
    int unsigned oa = entry(ob, op, comp, g, u);
    int unsigned ra = entry(rb, rp, comp, g, ru);
    int pos = 0, cost = 0;
    for (int b = 0; b < MAX_BANDS; b++) begin
      for (int s = 0; s < bl[g][b]; s += CG) begin
        int n = (bl[g][b] - s < CG) ? bl[g][b] - s : CG;
        longint orv = 0;
        int gc = 0;
        for (int i = 0; i < n; i++) begin
          longint r = sm2int(shadow[oa + pos + s + i]) - sm2int(shadow[ra + pos + s + i]);
          if (r < 0) r = -r;
          orv |= r;
        end
        for (int k = 0; k < 40; k++) if (orv[k]) gc = k + 1;
        cost += n * gc + gc + 1;
      end
      pos += bl[g][b];
    end
    return cost;
  endfunction

  task automatic put(int unsigned a, int unsigned d);
    shadow[a] = d;
    u_dram.write(a, d);
  endtask

  // Reconstructed data is the original shifted by a few units plus noise, so
  // the best DV varies over the precinct.
  task automatic fill(int unsigned ob, int op, int unsigned rb, int rp, int comp);
    for (int g = 0; g < NG; g++)
      for (int u = 0; u < NU; u++)
        for (int i = 0; i < ulen(g); i++)
          put(entry(ob, op, comp, g, u) + i, int2sm(longint'($urandom_range(2047)) - 1024));
    for (int g = 0; g < NG; g++)
      for (int u = 0; u < NU; u++) begin
        int src = u + int'($urandom_range(6)) - 3;
        int noise = 1 << $urandom_range(6);
        if (src < 0) src = 0;
        if (src >= NU) src = NU - 1;
        for (int i = 0; i < ulen(g); i++) begin
          longint v = sm2int(shadow[entry(ob, op, comp, g, src) + i]);
          if ($urandom_range(3) == 0) v = longint'($urandom_range(2047)) - 1024;
          put(entry(rb, rp, comp, g, u) + i, int2sm(v + longint'($urandom_range(noise)) - noise/2));
        end
      end
  endtask

  typedef struct { int dv; int bits; } res_t;
  res_t exp_q[$];

  task automatic make_ref(int unsigned ob, int op, int unsigned rb, int rp, int comp);
    exp_q.delete();
    for (int u = 0; u < NU; u++)
      for (int g = 0; g < NG; g++) begin
        int lo = (DVMIN > -u) ? DVMIN : -u;
        int hi = (DVMAX < NU - 1 - u) ? DVMAX : NU - 1 - u;
        int bb = 0, bd = 0;
        if (lo != DVMIN || hi != DVMAX) n_clip++;
        for (int d = lo; d <= hi; d++) begin
          int c = unit_cost(g, u, u + d, ob, op, rb, rp, comp);
          if (d == lo || c < bb) begin bb = c; bd = d; end
          else if (c == bb) n_tie++;
        end
        exp_q.push_back('{dv: bd, bits: bb});
      end
  endtask

  // ---------------- result collection ----------------
  int got = 0, idx_u = 0, idx_g = 0;
  logic done_seen = 1'b0, last_seen = 1'b0;
  always @(posedge clk) if (rst_n) begin
    if (dv_valid) begin
      res_t e;
      checks++;
      if (exp_q.size() == 0) begin
        failures++;
        $display("FAIL: unexpected result u=%0d g=%0d", dv_unit, dv_grp);
      end else begin
        e = exp_q.pop_front();
        if (int'(dv) != e.dv || int'(dv_bits) != e.bits ||
            int'(dv_unit) != idx_u || int'(dv_grp) != idx_g) begin
          failures++;
          if (failures < 10)
            $display("FAIL: u=%0d g=%0d got dv=%0d bits=%0d unit=%0d grp=%0d, expected dv=%0d bits=%0d",
                     idx_u, idx_g, dv, dv_bits, dv_unit, dv_grp, e.dv, e.bits);
        end
      end
      got++;
      last_seen = (exp_q.size() == 0);
      if (idx_g == NG - 1) begin idx_g = 0; idx_u++; end else idx_g++;
    end
    if (done) begin
      checks++;
      if (!(dv_valid && exp_q.size() == 0)) begin
        failures++;
        $display("FAIL: done not aligned with the last result");
      end
      done_seen = 1'b1;
    end
  end

  task automatic run(int unsigned ob, int op, int unsigned rb, int rp, int comp);
    longint t0, words0;
    fill(ob, op, rb, rp, comp);
    make_ref(ob, op, rb, rp, comp);
    got = 0; idx_u = 0; idx_g = 0; done_seen = 1'b0;
    orig_base = ob; orig_prec = 16'(op); recon_base = rb; ref_prec = 16'(rp); yuv = 2'(comp);
    @(negedge clk);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    t0 = cyc; words0 = n_words;
    while (!done_seen) @(negedge clk);
    checks++;
    if (got != NU * NG) begin
      failures++;
      $display("FAIL: %0d results, expected %0d", got, NU * NG);
    end
    checks++;
    if (cyc - t0 >= 2 * (n_words - words0)) begin
      failures++;
      $display("FAIL: %0d cycles for %0d words read", cyc - t0, n_words - words0);
    end
    $display("search: %0d units x %0d groups, %0d cycles, %0d words read, %0.2f cycles per coefficient of the component",
             NU, NG, cyc - t0, n_words - words0,
             real'(cyc - t0) / real'(NU * (ulen(0) + ulen(1) + ulen(2) + ulen(3))));
  endtask

  task automatic tlb_write(int g, int b, int len);
    bl[g][b] = len;
    @(negedge clk);
    tlb_wr_en = 1'b1; tlb_wr_grp = 2'(g); tlb_wr_band = 2'(b); tlb_wr_len = 16'(len);
    @(negedge clk);
    tlb_wr_en = 1'b0;
  endtask

  initial begin
    for (int g = 0; g < NG; g++)
      for (int b = 0; b < MAX_BANDS; b++) bl[g][b] = int'(TLB_DEFAULT[g][b]);
    orig_base = '0; recon_base = '0; orig_prec = '0; ref_prec = '0; yuv = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    repeat (2) @(negedge clk);
    run(32'h0, 1, 32'h1_0000, 0, 1);
    // other block split, other unit lengths
    tlb_write(0, 0, 5); tlb_write(0, 1, 3); tlb_write(0, 2, 7); tlb_write(0, 3, 1);
    tlb_write(1, 0, 16); tlb_write(1, 1, 0);
    tlb_write(2, 0, 20); tlb_write(2, 1, 20);
    tlb_write(3, 0, 30); tlb_write(3, 1, 26);
    n_reload++;
    run(32'h0, 0, 32'h1_0000, 1, 2);
    // third component, so that Y, U and V have each been searched
    run(32'h0, 1, 32'h1_0000, 0, 0);
    $display("mechanisms: credit_stall=%0d dram_backpressure=%0d burst_split=%0d clipped_window=%0d dv_improved=%0d tie_kept=%0d tlb_reload=%0d",
             n_credit, n_backpr, n_split, n_clip, n_improve, n_tie, n_reload);
    // With 512-word FIFOs the job queue fills before the credits run out, so a
    // credit stall is not required here (tb_dv_search_top covers it).
    checks++; if (n_backpr == 0) begin failures++; $display("FAIL: no DRAM back-pressure"); end
    checks++; if (n_split == 0) begin failures++; $display("FAIL: no burst split"); end
    checks++; if (n_clip == 0) begin failures++; $display("FAIL: no clipped window"); end
    checks++; if (n_improve == 0) begin failures++; $display("FAIL: no DV improvement"); end
    checks++; if (n_tie == 0) begin failures++; $display("FAIL: no tie"); end
    checks++; if (n_reload == 0) begin failures++; $display("FAIL: no TLB reload"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    while (cyc < WATCHDOG) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
