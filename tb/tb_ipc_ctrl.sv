// tb_ipc_ctrl: CTRL against counter models of the twelve FIFOs and a
// read path that accepts requests with random back-pressure and delivers each
// unit's words after a random delay, in order. Checks: the request sequence
// (original unit then reconstructed unit u+d, for every unit, group and
// candidate in the clipped window); that no FIFO ever holds more than its
// depth and none is popped empty; that query and candidate FIFOs of the same
// group are popped together; that every job's residuals go to GCLI_CAL as
// one run of unit-length beats with the right tag; 'done' and 'busy'. It runs
// with 64-word FIFOs so that the credit stall occurs.
module tb_ipc_ctrl;
  import ipc_pkg::*;
  localparam int NU = 7, FD = 64, DVMIN = -4, DVMAX = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = !clk;
  logic start = 0, busy, done, req_valid, req_ready = 0;
  tlb_t tlb;
  fetch_req_t req;
  logic [GRP_W-1:0] qc_sel, r_sel, sub_grp, gcli_grp;
  logic q_empty, c_empty, qc_pop, sub_valid, r_empty, r_pop, gcli_valid, credit_stall;
  dv_tag_t gcli_tag;
  int checks = 0, failures = 0, n_credit = 0, n_done = 0;
  longint cyc = 0;

  ipc_ctrl #(.NUM_UNITS(NU), .DV_MIN(DVMIN), .DV_MAX(DVMAX), .FIFO_DEPTH(FD), .JOBQ_DEPTH(4)) dut (
    .clk, .rst_n, .start, .busy, .done, .tlb, .req_valid, .req_ready, .req,
    .qc_sel, .q_empty, .c_empty, .qc_pop, .sub_valid, .sub_grp,
    .r_sel, .r_empty, .r_pop, .gcli_valid, .gcli_grp, .gcli_tag, .credit_stall);

  int qn [NG], cn [NG], rn [NG];
  assign q_empty = (qn[qc_sel] == 0);
  assign c_empty = (cn[qc_sel] == 0);
  assign r_empty = (rn[r_sel] == 0);

  function automatic int ul(int g);
    int s = 0;
    for (int b = 0; b < MAX_BANDS; b++) s += int'(tlb[g][b]);
    return s;
  endfunction

  fetch_req_t rq_exp[$];
  dv_tag_t    tag_exp[$];
  typedef struct { longint due; logic rc; int g; int n; } dl_t;
  dl_t dq[$];
  int beat = 0;
  logic r_pend = 0;
  int   r_pend_g = 0;

  always @(posedge clk) if (rst_n) begin
    cyc <= cyc + 1;
    if (credit_stall) n_credit++;
    if (done) n_done++;
    // requests
    if (req_valid && req_ready) begin
      fetch_req_t e;
      dl_t d;
      checks++;
      e = rq_exp.pop_front();
      if (req != e) begin failures++; if (failures < 10) $display("FAIL request %p exp %p", req, e); end
      d.due = (dq.size() != 0 && dq[dq.size()-1].due > cyc + 3) ? dq[dq.size()-1].due : cyc + 3 + $urandom_range(10);
      d.rc = req.is_recon; d.g = int'(req.grp); d.n = ul(int'(req.grp));
      dq.push_back(d);
    end
    while (dq.size() != 0 && dq[0].due <= cyc) begin
      dl_t d;
      d = dq.pop_front();
      if (d.rc) cn[d.g] += d.n; else qn[d.g] += d.n;
    end
    // SIG_MAG_SUB model: one cycle
    if (r_pend) rn[r_pend_g]++;
    r_pend = sub_valid;
    r_pend_g = int'(sub_grp);
    checks++;
    if (qc_pop != sub_valid || (qc_pop && (q_empty || c_empty)) || sub_grp != qc_sel) begin
      failures++; $display("FAIL pair pop");
    end
    if (qc_pop) begin qn[qc_sel]--; cn[qc_sel]--; end
    // residual side
    if (r_pop) begin
      checks++;
      if (r_empty || !gcli_valid || tag_exp.size() == 0 || gcli_tag != tag_exp[0] || gcli_grp != gcli_tag.grp) begin
        failures++; if (failures < 10) $display("FAIL gcli beat tag %p", gcli_tag);
      end
      rn[r_sel]--;
      beat++;
      if (tag_exp.size() != 0 && beat == ul(int'(tag_exp[0].grp))) begin
        beat = 0;
        void'(tag_exp.pop_front());
      end
    end
    for (int k = 0; k < NG; k++) begin
      if (qn[k] > FD || cn[k] > FD || rn[k] > FD) begin
        failures++; $display("FAIL FIFO %0d over depth", k);
      end
    end
  end
  always @(negedge clk) req_ready <= ($urandom_range(3) != 0);

  task automatic make_exp();
    for (int u = 0; u < NU; u++)
      for (int g = 0; g < NG; g++) begin
        int lo = (DVMIN > -u) ? DVMIN : -u;
        int hi = (DVMAX < NU - 1 - u) ? DVMAX : NU - 1 - u;
        for (int d = lo; d <= hi; d++) begin
          rq_exp.push_back('{is_recon: 1'b0, grp: 2'(g), unit: UNIT_W'(u)});
          rq_exp.push_back('{is_recon: 1'b1, grp: 2'(g), unit: UNIT_W'(u + d)});
          tag_exp.push_back('{dv: DV_W'(d), grp: 2'(g), unit: UNIT_W'(u), first: (d == lo), last: (d == hi)});
        end
      end
  endtask

  initial begin
    tlb = TLB_DEFAULT;
    for (int k = 0; k < NG; k++) begin qn[k] = 0; cn[k] = 0; rn[k] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int run = 0; run < 2; run++) begin
      if (run == 1) begin tlb[3][0] = 16'd40; tlb[3][1] = 16'd20; tlb[1][3] = 16'd3; end
      make_exp();
      @(negedge clk);
      start = 1;
      @(negedge clk);
      start = 0;
      checks++; if (!busy) begin failures++; $display("FAIL busy"); end
      while (!done) @(negedge clk);
      @(negedge clk);
      checks++; if (busy || rq_exp.size() != 0 || tag_exp.size() != 0) begin
        failures++; $display("FAIL end state: busy=%0d requests left %0d jobs left %0d", busy, rq_exp.size(), tag_exp.size());
      end
    end
    checks++; if (n_done != 2) begin failures++; $display("FAIL done count %0d", n_done); end
    checks++; if (n_credit == 0) begin failures++; $display("FAIL no credit stall"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk); failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
