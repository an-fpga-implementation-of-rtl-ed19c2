// ipc_cmd: CMD, the address generator of the residual calculation engine.
//
// CTRL asks for one IPC Unit at a time (req_valid/req_ready with
// {is_recon, group, unit}). CMD turns it into an off-chip read command using
// the IPC Group-aligned layout: in each bank, precincts follow each other,
// each precinct holds the Y, U and V components, and inside a component all
// units of group 0 come first, then those of group 1, and so on. Hence
//   entry  = bank_base + precinct*3*PREC_WORDS + yuv*PREC_WORDS
//            + NUM_UNITS * (sum of unit lengths of groups below g)
//            + unit * unit_len(g)
//   length = unit_len(g)
// with unit lengths taken from the TLB. The original bank is read at
// orig_prec, the reconstructed bank at ref_prec. The command waits in an
// output register until the transfer engine takes it (one cycle from request
// to cmd_valid). Returning words are written into the query FIFO Q[g] or
// the candidate FIFO C[g] named by their destination tag. The layout and the
// inputs of the address computation follow the paper; the exact formula and
// word granularity are this design's.
module ipc_cmd
  import ipc_pkg::*;
#(
  parameter int NUM_UNITS  = NUM_UNITS_DEF,
  parameter int PREC_WORDS_P = PREC_WORDS
) (
  input  logic              clk,
  input  logic              rst_n,
  // configuration
  input  logic [ADDR_W-1:0] orig_base,
  input  logic [ADDR_W-1:0] recon_base,
  input  logic [15:0]       orig_prec,
  input  logic [15:0]       ref_prec,
  input  logic [1:0]        yuv,
  input  tlb_t              tlb,
  // request from CTRL
  input  logic              req_valid,
  output logic              req_ready,
  input  fetch_req_t        req,
  // command to the transfer engine
  output logic              cmd_valid,
  input  logic              cmd_ready,
  output logic [ADDR_W-1:0] cmd_addr,
  output len_t              cmd_len,
  output dest_t             cmd_dest,
  // data back from the transfer engine
  input  logic              in_valid,
  input  logic [COEF_W-1:0] in_data,
  input  dest_t             in_dest,
  // FIFO writes
  output logic [NG-1:0]     q_wr,
  output logic [NG-1:0]     c_wr,
  output logic [COEF_W-1:0] wr_data
);

  logic [ADDR_W-1:0] entry;
  len_t              ulen;

  always_comb begin
    logic [ADDR_W-1:0] goff, base, prec;
    goff = '0;
    for (int k = 0; k < NG; k++)
      if (k < int'(req.grp)) goff += ADDR_W'(unit_len(tlb[k]));
    ulen  = unit_len(tlb[req.grp]);
    base  = req.is_recon ? recon_base : orig_base;
    prec  = ADDR_W'(req.is_recon ? ref_prec : orig_prec);
    entry = base + prec * ADDR_W'(3 * PREC_WORDS_P) + ADDR_W'(yuv) * ADDR_W'(PREC_WORDS_P)
          + ADDR_W'(NUM_UNITS) * goff + ADDR_W'(req.unit) * ADDR_W'(ulen);
  end

  assign req_ready = !cmd_valid || cmd_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cmd_valid <= 1'b0;
      cmd_addr  <= '0;
      cmd_len   <= '0;
      cmd_dest  <= '0;
    end else if (req_ready) begin
      cmd_valid <= req_valid;
      if (req_valid) begin
        cmd_addr <= entry;
        cmd_len  <= ulen;
        cmd_dest <= '{is_recon: req.is_recon, grp: req.grp};
      end
    end
  end

  always_comb begin
    q_wr = '0;
    c_wr = '0;
    if (in_valid) begin
      if (in_dest.is_recon) c_wr[in_dest.grp] = 1'b1;
      else                  q_wr[in_dest.grp] = 1'b1;
    end
  end
  assign wr_data = in_data;

endmodule
