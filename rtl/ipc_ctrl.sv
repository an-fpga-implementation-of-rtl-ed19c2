// ipc_ctrl: CTRL, the sequencer of the DV search.
//
// After 'start' it walks every IPC Unit u of the precinct, every IPC Group g
// and every candidate DV d with DV_MIN <= d <= DV_MAX whose reference unit
// u+d lies inside the precinct. Each (u, g, d) is a job and flows through
// three decoupled steps, each with its own pointer into the job sequence:
//   fetch  When the query FIFO Q[g] and candidate FIFO C[g] both have room for
//          a whole unit (space is reserved by credit counters, so the FIFOs
//          never overflow), CTRL asks CMD for the original unit (g, u) into
//          Q[g] and the reconstructed unit (g, u+d) into C[g], then queues the
//          job.
//   sub    For the oldest fetched job it points the Q and C multiplexers at
//          group g and pops both FIFOs together, one pair per cycle, into
//          SIG_MAG_SUB, as long as R[g] has a reserved free slot.
//   gcli   For the oldest subtracted job it points the R multiplexer at g and
//          forwards R[g] to GCLI_CAL one residual per cycle with the job's
//          tag (DV, group, unit, first/last candidate of the unit).
// Because the steps are queued, the fetch of later groups overlaps the
// subtraction and costing of earlier ones. 'done' pulses when the last
// residual of the last job has left for GCLI_CAL; 'busy' is high from start
// until then. The duties follow the paper's description of CTRL; the loop
// order, the search window and the credit scheme are this design's choices.
module ipc_ctrl
  import ipc_pkg::*;
#(
  parameter int NUM_UNITS  = NUM_UNITS_DEF,
  parameter int DV_MIN     = -4,
  parameter int DV_MAX     = 3,
  parameter int FIFO_DEPTH = 512,
  parameter int JOBQ_DEPTH = 8,
  localparam int CW        = $clog2(FIFO_DEPTH) + 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  output logic              busy,
  output logic              done,
  input  tlb_t              tlb,
  // fetch requests to CMD
  output logic              req_valid,
  input  logic              req_ready,
  output fetch_req_t        req,
  // query / candidate FIFOs through their multiplexers
  output logic [GRP_W-1:0]  qc_sel,
  input  logic              q_empty,
  input  logic              c_empty,
  output logic              qc_pop,
  // to SIG_MAG_SUB
  output logic              sub_valid,
  output logic [GRP_W-1:0]  sub_grp,
  // residual FIFOs through their multiplexer
  output logic [GRP_W-1:0]  r_sel,
  input  logic              r_empty,
  output logic              r_pop,
  // to GCLI_CAL
  output logic              gcli_valid,
  output logic [GRP_W-1:0]  gcli_grp,
  output dv_tag_t           gcli_tag,
  // activity, for monitoring
  output logic              credit_stall
);

  // ---------------- job generator / fetch ----------------
  logic                     gen_on, phase;   // phase 0: original, 1: reconstructed
  logic [UNIT_W-1:0]        u;
  logic [GRP_W-1:0]         g;
  logic signed [DV_W-1:0]   d, d_lo, d_hi;
  logic [CW-1:0]            q_cred [NG];
  logic [CW-1:0]            c_cred [NG];
  logic [CW-1:0]            r_cred [NG];
  len_t                     g_len;
  logic                     room, fire;
  logic                     j1_full, j1_empty, j1_pop, j1_push;
  logic                     j2_full, j2_empty, j2_pop, j2_push;
  dv_tag_t                  j1_head, j2_head, job;
  logic [$clog2(JOBQ_DEPTH):0] j1_level, j2_level;

  always_comb begin
    int lo, hi;
    lo   = (DV_MIN > -int'(u)) ? DV_MIN : -int'(u);
    hi   = (DV_MAX < NUM_UNITS - 1 - int'(u)) ? DV_MAX : NUM_UNITS - 1 - int'(u);
    d_lo = DV_W'(lo);
    d_hi = DV_W'(hi);
  end

  assign g_len   = unit_len(tlb[g]);
  assign room    = (q_cred[g] >= CW'(g_len)) && (c_cred[g] >= CW'(g_len));
  assign job     = '{dv: d, grp: g, unit: u, first: (d == d_lo), last: (d == d_hi)};
  assign req_valid = gen_on && (phase || (room && !j1_full));
  assign req.is_recon = phase;
  assign req.grp      = g;
  assign req.unit     = phase ? UNIT_W'(int'(u) + int'(d)) : u;
  assign fire    = req_valid && req_ready;
  assign j1_push = fire && phase;
  assign credit_stall = gen_on && !phase && !room;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      gen_on <= 1'b0;
      phase  <= 1'b0;
      u      <= '0;
      g      <= '0;
      d      <= '0;
    end else if (start && !busy) begin
      gen_on <= 1'b1;
      phase  <= 1'b0;
      u      <= '0;
      g      <= '0;
      d      <= DV_W'((DV_MIN > 0) ? DV_MIN : 0);   // d_lo of unit 0
    end else if (fire) begin
      phase <= !phase;
      if (phase) begin
        if (d != d_hi) d <= d + 1'b1;
        else begin
          if (g != GRP_W'(NG-1)) begin
            g <= g + 1'b1;
            d <= d_lo;
          end else begin
            g <= '0;
            if (u == UNIT_W'(NUM_UNITS-1)) gen_on <= 1'b0;
            else begin
              u <= u + 1'b1;
              // window of the next unit
              d <= DV_W'((DV_MIN > -(int'(u)+1)) ? DV_MIN : -(int'(u)+1));
            end
          end
        end
      end
    end
  end

  sync_fifo #(.W($bits(dv_tag_t)), .DEPTH(JOBQ_DEPTH)) u_jobq1 (
    .clk, .rst_n, .wr_en(j1_push), .wr_data(job), .wr_full(j1_full),
    .rd_en(j1_pop), .rd_data(j1_head), .rd_empty(j1_empty), .level(j1_level));

  // ---------------- sub step ----------------
  len_t s_cnt, s_len;
  logic s_go;
  assign qc_sel    = j1_head.grp;
  assign s_len     = unit_len(tlb[j1_head.grp]);
  assign s_go      = !j1_empty && !q_empty && !c_empty && (r_cred[j1_head.grp] != '0) &&
                     !(s_cnt == '0 && j2_full);
  assign qc_pop    = s_go;
  assign sub_valid = s_go;
  assign sub_grp   = j1_head.grp;
  assign j1_pop    = s_go && (s_cnt == s_len - 1'b1);
  assign j2_push   = s_go && (s_cnt == '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    s_cnt <= '0;
    else if (s_go) s_cnt <= j1_pop ? '0 : s_cnt + 1'b1;
  end

  sync_fifo #(.W($bits(dv_tag_t)), .DEPTH(JOBQ_DEPTH)) u_jobq2 (
    .clk, .rst_n, .wr_en(j2_push), .wr_data(j1_head), .wr_full(j2_full),
    .rd_en(j2_pop), .rd_data(j2_head), .rd_empty(j2_empty), .level(j2_level));

  // ---------------- gcli step ----------------
  len_t r_cnt, r_len;
  logic r_go;
  assign r_sel      = j2_head.grp;
  assign r_len      = unit_len(tlb[j2_head.grp]);
  assign r_go       = !j2_empty && !r_empty;
  assign r_pop      = r_go;
  assign gcli_valid = r_go;
  assign gcli_grp   = j2_head.grp;
  assign gcli_tag   = j2_head;
  assign j2_pop     = r_go && (r_cnt == r_len - 1'b1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    r_cnt <= '0;
    else if (r_go) r_cnt <= j2_pop ? '0 : r_cnt + 1'b1;
  end

  // ---------------- credits ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < NG; k++) begin
        q_cred[k] <= CW'(FIFO_DEPTH);
        c_cred[k] <= CW'(FIFO_DEPTH);
        r_cred[k] <= CW'(FIFO_DEPTH);
      end
    end else begin
      for (int k = 0; k < NG; k++) begin
        logic take_qc, give_qc, take_r, give_r;
        take_qc = fire && !phase && (g == GRP_W'(k));
        give_qc = s_go && (j1_head.grp == GRP_W'(k));
        take_r  = give_qc;
        give_r  = r_go && (j2_head.grp == GRP_W'(k));
        q_cred[k] <= q_cred[k] - (take_qc ? CW'(g_len) : '0) + CW'(give_qc);
        c_cred[k] <= c_cred[k] - (take_qc ? CW'(g_len) : '0) + CW'(give_qc);
        r_cred[k] <= r_cred[k] - CW'(take_r) + CW'(give_r);
      end
    end
  end

  // ---------------- busy / done ----------------
  logic last_out;
  assign last_out = j2_pop && j2_head.last && (j2_head.grp == GRP_W'(NG-1)) &&
                    (j2_head.unit == UNIT_W'(NUM_UNITS-1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
    end else begin
      done <= last_out;
      if (start && !busy) busy <= 1'b1;
      else if (last_out)  busy <= 1'b0;
    end
  end

  a_unit_fits: assert property (@(posedge clk) disable iff (!rst_n)
                                gen_on |-> (g_len <= len_t'(FIFO_DEPTH)));
  a_no_pop_empty: assert property (@(posedge clk) disable iff (!rst_n)
                                   qc_pop |-> !q_empty && !c_empty);

endmodule
