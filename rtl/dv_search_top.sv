// dv_search_top: displacement-vector (DV) search for Intra Pattern Copy.
//
// For every IPC Unit of the original precinct and every IPC Group, the design
// scores each candidate reference unit of the reconstructed precinct by the
// GCLI bit cost of the residual (original - reconstructed) and reports the
// DV with the lowest cost. It is the block diagram of the paper's Fig. 1:
//   residual calculation engine:  CTRL, CMD with the TLB, the off-chip data
//     transfer engine, query FIFOs Q0-Q3, candidate FIFOs C0-C3, two group
//     multiplexers, SIG_MAG_SUB, residual FIFOs R0-R3 and the R multiplexer;
//   DV comparison engine:  GCLI_CAL (pipeline stages 0-2) and DV_UPDATE
//     (stage 3).
// The DRAM, which holds the original and reconstructed IPC unit banks in the
// IPC Group-aligned layout, sits outside; its request and read-data channels
// are ports. Results leave on dv_valid with the best DV, its bit cost, the
// group index and the unit index, for the pattern-compensation stage.
// Operation: load the TLB if the defaults do not apply (only while idle),
// set the bank bases, precinct numbers and component, pulse 'start'. One
// result per (unit, group) follows in unit-major, group-minor order; 'done'
// pulses in the cycle of the last result. Parameters default to the paper's
// figures where it gives them (4 groups, 32-bit coefficients, 2560x4
// precincts) and to this design's choices elsewhere (80 units, DV window
// -4..+3, 512-word FIFOs, 16-word bursts).
// The FIFOs' full flags and levels, the transfer engine's end-of-command
// flag and the DV_UPDATE 'updated' pulse are left unconnected: CTRL's credits
// already guarantee room, and the other two serve only monitoring.
module dv_search_top
  import ipc_pkg::*;
#(
  parameter int NUM_UNITS   = NUM_UNITS_DEF,
  parameter int DV_MIN      = -4,
  parameter int DV_MAX      = 3,
  parameter int FIFO_DEPTH  = 512,
  parameter int JOBQ_DEPTH  = 8,
  parameter int MAX_BURST   = 16,
  parameter int OUTSTANDING = 8
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // control and configuration
  input  logic                   start,
  output logic                   busy,
  output logic                   done,
  input  logic [ADDR_W-1:0]      orig_base,
  input  logic [ADDR_W-1:0]      recon_base,
  input  logic [15:0]            orig_prec,
  input  logic [15:0]            ref_prec,
  input  logic [1:0]             yuv,
  // TLB load
  input  logic                   tlb_wr_en,
  input  logic [GRP_W-1:0]       tlb_wr_grp,
  input  logic [BAND_W-1:0]      tlb_wr_band,
  input  logic [LEN_W-1:0]       tlb_wr_len,
  // DRAM
  output logic                   dram_req_valid,
  input  logic                   dram_req_ready,
  output logic [ADDR_W-1:0]      dram_req_addr,
  output logic [LEN_W-1:0]       dram_req_len,
  input  logic                   dram_rsp_valid,
  input  logic [COEF_W-1:0]      dram_rsp_data,
  // result, to pattern compensation
  output logic                   dv_valid,
  output logic signed [DV_W-1:0] dv,
  output logic [BITS_W-1:0]      dv_bits,
  output logic [GRP_W-1:0]       dv_grp,
  output logic [UNIT_W-1:0]      dv_unit
);

  localparam int LW = $clog2(FIFO_DEPTH) + 1;

  tlb_t tlb;

  tlb_ram u_tlb (
    .clk, .rst_n,
    .wr_en(tlb_wr_en), .wr_grp(tlb_wr_grp), .wr_band(tlb_wr_band), .wr_len(tlb_wr_len),
    .hold(busy), .table_o(tlb));

  // ---------------- CTRL ----------------
  logic             req_valid, req_ready;
  fetch_req_t       req;
  logic [GRP_W-1:0] qc_sel, r_sel, sub_grp, gcli_grp;
  logic             q_empty, c_empty, qc_pop, r_empty, r_pop;
  logic             sub_valid, gcli_valid, ctrl_done, credit_stall;
  dv_tag_t          gcli_tag;

  ipc_ctrl #(.NUM_UNITS(NUM_UNITS), .DV_MIN(DV_MIN), .DV_MAX(DV_MAX),
             .FIFO_DEPTH(FIFO_DEPTH), .JOBQ_DEPTH(JOBQ_DEPTH)) u_ctrl (
    .clk, .rst_n, .start, .busy, .done(ctrl_done), .tlb,
    .req_valid, .req_ready, .req,
    .qc_sel, .q_empty, .c_empty, .qc_pop, .sub_valid, .sub_grp,
    .r_sel, .r_empty, .r_pop, .gcli_valid, .gcli_grp, .gcli_tag,
    .credit_stall);

  // ---------------- CMD and off-chip transfer ----------------
  logic              cmd_valid, cmd_ready;
  logic [ADDR_W-1:0] cmd_addr;
  len_t              cmd_len;
  dest_t             cmd_dest, x_dest;
  logic              x_valid, x_last;
  logic [COEF_W-1:0] x_data, wr_data;
  logic [NG-1:0]     q_wr, c_wr;

  ipc_cmd #(.NUM_UNITS(NUM_UNITS)) u_cmd (
    .clk, .rst_n, .orig_base, .recon_base, .orig_prec, .ref_prec, .yuv, .tlb,
    .req_valid, .req_ready, .req,
    .cmd_valid, .cmd_ready, .cmd_addr, .cmd_len, .cmd_dest,
    .in_valid(x_valid), .in_data(x_data), .in_dest(x_dest),
    .q_wr, .c_wr, .wr_data);

  offchip_xfer #(.MAX_BURST(MAX_BURST), .OUTSTANDING(OUTSTANDING)) u_xfer (
    .clk, .rst_n,
    .cmd_valid, .cmd_ready, .cmd_addr, .cmd_len, .cmd_dest,
    .dram_req_valid, .dram_req_ready, .dram_req_addr, .dram_req_len,
    .dram_rsp_valid, .dram_rsp_data,
    .out_valid(x_valid), .out_data(x_data), .out_dest(x_dest), .out_last(x_last));

  // ---------------- query, candidate and residual FIFOs ----------------
  logic [NG-1:0][COEF_W-1:0] q_data, c_data;
  logic [NG-1:0][RES_W-1:0]  r_data;
  logic [NG-1:0]             q_emp, c_emp, r_emp, q_pop, c_pop, r_popv, r_wr;
  logic [NG-1:0]             q_full, c_full, r_full;
  logic [NG-1:0][LW-1:0]     q_lvl, c_lvl, r_lvl;
  logic                      s_valid;
  logic [RES_W-1:0]          s_res;
  logic [GRP_W-1:0]          s_grp;

  for (genvar k = 0; k < NG; k++) begin : g_fifo
    sync_fifo #(.W(COEF_W), .DEPTH(FIFO_DEPTH)) u_q (
      .clk, .rst_n, .wr_en(q_wr[k]), .wr_data(wr_data), .wr_full(q_full[k]),
      .rd_en(q_pop[k]), .rd_data(q_data[k]), .rd_empty(q_emp[k]), .level(q_lvl[k]));
    sync_fifo #(.W(COEF_W), .DEPTH(FIFO_DEPTH)) u_c (
      .clk, .rst_n, .wr_en(c_wr[k]), .wr_data(wr_data), .wr_full(c_full[k]),
      .rd_en(c_pop[k]), .rd_data(c_data[k]), .rd_empty(c_emp[k]), .level(c_lvl[k]));
    sync_fifo #(.W(RES_W), .DEPTH(FIFO_DEPTH)) u_r (
      .clk, .rst_n, .wr_en(r_wr[k]), .wr_data(s_res), .wr_full(r_full[k]),
      .rd_en(r_popv[k]), .rd_data(r_data[k]), .rd_empty(r_emp[k]), .level(r_lvl[k]));
    assign r_wr[k] = s_valid && (s_grp == GRP_W'(k));
  end

  logic [COEF_W-1:0] q_sel_data, c_sel_data;
  logic [RES_W-1:0]  r_sel_data;

  group_mux #(.W(COEF_W), .N(NG)) u_qmux (
    .sel(qc_sel), .in_data(q_data), .in_empty(q_emp), .in_pop(q_pop),
    .out_data(q_sel_data), .out_empty(q_empty), .out_pop(qc_pop));
  group_mux #(.W(COEF_W), .N(NG)) u_cmux (
    .sel(qc_sel), .in_data(c_data), .in_empty(c_emp), .in_pop(c_pop),
    .out_data(c_sel_data), .out_empty(c_empty), .out_pop(qc_pop));
  group_mux #(.W(RES_W), .N(NG)) u_rmux (
    .sel(r_sel), .in_data(r_data), .in_empty(r_emp), .in_pop(r_popv),
    .out_data(r_sel_data), .out_empty(r_empty), .out_pop(r_pop));

  sig_mag_sub u_sub (
    .clk, .rst_n, .in_valid(sub_valid), .orig(q_sel_data), .recon(c_sel_data),
    .in_grp(sub_grp), .out_valid(s_valid), .res(s_res), .out_grp(s_grp));

  // ---------------- DV comparison engine ----------------
  logic              bits_valid;
  logic [BITS_W-1:0] bits_test;
  dv_tag_t           bits_tag;
  logic              dv_updated;

  gcli_cal u_gcli (
    .clk, .rst_n, .tlb, .in_valid(gcli_valid), .res(r_sel_data), .grp(gcli_grp),
    .tag(gcli_tag), .bits_valid, .bits_test, .tag_out(bits_tag));

  dv_update u_upd (
    .clk, .rst_n, .bits_valid, .bits_test, .tag(bits_tag),
    .best_valid(dv_valid), .best_bits(dv_bits), .best_dv(dv), .best_grp(dv_grp),
    .best_unit(dv_unit), .updated(dv_updated));

  // 'done' lines up with the last result: GCLI_CAL 3 cycles, DV_UPDATE 1,
  // CTRL's done register already accounts for one.
  logic [2:0] done_sr;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) done_sr <= '0;
    else        done_sr <= {done_sr[1:0], ctrl_done};
  end
  assign done = done_sr[2];

endmodule
