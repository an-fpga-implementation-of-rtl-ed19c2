// gcli_cal: stages 0 to 2 of the four-stage DV comparison pipeline; it turns
// the residual stream of one candidate IPC Unit into the unit's bit cost.
//
// Input: one residual per cycle (in_valid), the unit's group index and a tag
// with the candidate's DV. The residuals of one unit arrive back to back, in
// block order; the unit's layout comes from the TLB contents on 'tlb'.
//   Stage 0  CalIdx counts the residual's position in the unit and maps it to
//            a band block (BandIdx) and the position in that block; CalSize
//            gives the code-group size (GrpSize) and CalWidth the unit length
//            (UnitWidth) of the group. The magnitude goes to DataBuffer, the
//            tag to the DV register.
//   Stage 1  GetOrMask ORs the magnitudes of one code group. A code group
//            ends after GrpSize residuals or at the end of a band block. It
//            then emits OrAll (the OR) and OrIdx (the code group's index in
//            the unit); the tag moves to DV_D1.
//   Stage 2  CalGCLI takes GCLI = position of the highest set bit of OrAll
//            plus one, prices the code group at n*GCLI + (GCLI+1) bits (n
//            coefficients of GCLI bitplanes, plus a unary GCLI code) and sums
//            this over the unit, restarting at OrIdx 0. After the unit's last
//            code group it presents BitsTest with the tag in DV_D2.
// The residual sign does not enter the cost and is not used. There is no
// back-pressure. Latency from the last residual of a unit to
// bits_valid is 3 cycles. The stage split and register names follow the
// paper's Fig. 2; the GCLI cost formula, the code-group size of 4 and the
// block-boundary rule are this design's reading of JPEG XS, which the paper
// does not spell out.
module gcli_cal
  import ipc_pkg::*;
#(
  parameter int CG_SIZE [NG] = '{4, 4, 4, 4}   // code-group size per group
) (
  input  logic              clk,
  input  logic              rst_n,
  input  tlb_t              tlb,
  input  logic              in_valid,
  input  logic [RES_W-1:0]  res,
  input  logic [GRP_W-1:0]  grp,
  input  dv_tag_t           tag,
  output logic              bits_valid,
  output logic [BITS_W-1:0] bits_test,
  output dv_tag_t           tag_out
);

  localparam int CNT_W = 5;

  // ---------------- stage 0: CalIdx / CalSize / CalWidth ----------------
  len_t              unit_pos;           // CalIdx position counter
  len_t              c_unit_w;           // CalWidth
  logic [CNT_W-1:0]  c_grp_size;         // CalSize
  len_t              c_band_pos, c_band_len;

  always_comb begin
    len_t base;
    logic found;
    c_unit_w   = unit_len(tlb[grp]);
    c_grp_size = CNT_W'(CG_SIZE[grp]);
    c_band_pos = unit_pos;
    c_band_len = tlb[grp][0];
    base       = '0;
    found      = 1'b0;
    for (int b = 0; b < MAX_BANDS; b++) begin
      if (!found && unit_pos < base + tlb[grp][b]) begin
        found      = 1'b1;
        c_band_pos = unit_pos - base;
        c_band_len = tlb[grp][b];
      end
      base = base + tlb[grp][b];
    end
  end

  logic              s0_valid;
  logic [MAG_W-1:0]  s0_data;            // DataBuffer
  logic [CNT_W-1:0]  s0_grp_size;        // GrpSize
  len_t              s0_unit_width;      // UnitWidth
  len_t              s0_unit_pos;
  len_t              s0_band_pos, s0_band_len;   // BandIdx: place in the block
  dv_tag_t           s0_dv;              // DV

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      unit_pos      <= '0;
      s0_valid      <= 1'b0;
      s0_data       <= '0;
      s0_unit_pos   <= '0;
      s0_grp_size   <= '0;
      s0_unit_width <= '0;
      s0_band_pos   <= '0;
      s0_band_len   <= '0;
      s0_dv         <= '0;
    end else begin
      s0_valid <= in_valid;
      if (in_valid) begin
        unit_pos      <= (unit_pos == c_unit_w - 1'b1) ? '0 : unit_pos + 1'b1;
        s0_data       <= res[MAG_W-1:0];
        s0_unit_pos   <= unit_pos;
        s0_grp_size   <= c_grp_size;
        s0_unit_width <= c_unit_w;
        s0_band_pos   <= c_band_pos;
        s0_band_len   <= c_band_len;
        s0_dv         <= tag;
      end
    end
  end

  // ---------------- stage 1: GetOrMask ----------------
  logic [MAG_W-1:0]  or_acc;
  logic [CNT_W-1:0]  cg_pos;
  len_t              cg_idx;
  logic [MAG_W-1:0]  or_cur;
  logic              cg_end, s0_unit_last;

  assign s0_unit_last = (s0_unit_pos == s0_unit_width - 1'b1);

  assign or_cur = or_acc | s0_data;
  assign cg_end = (cg_pos == s0_grp_size - 1'b1) ||
                  (s0_band_pos == s0_band_len - 1'b1) || s0_unit_last;

  logic              s1_valid, s1_last;
  logic [MAG_W-1:0]  s1_or_all;          // OrAll
  len_t              s1_or_idx;          // OrIdx
  logic [CNT_W-1:0]  s1_cnt;
  dv_tag_t           s1_dv;              // DV_D1

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      or_acc    <= '0;
      cg_pos    <= '0;
      cg_idx    <= '0;
      s1_valid  <= 1'b0;
      s1_last   <= 1'b0;
      s1_or_all <= '0;
      s1_or_idx <= '0;
      s1_cnt    <= '0;
      s1_dv     <= '0;
    end else begin
      s1_valid <= s0_valid && cg_end;
      if (s0_valid) begin
        if (cg_end) begin
          or_acc    <= '0;
          cg_pos    <= '0;
          cg_idx    <= s0_unit_last ? '0 : cg_idx + 1'b1;
          s1_or_all <= or_cur;
          s1_or_idx <= cg_idx;
          s1_cnt    <= cg_pos + 1'b1;
          s1_last   <= s0_unit_last;
          s1_dv     <= s0_dv;
        end else begin
          or_acc <= or_cur;
          cg_pos <= cg_pos + 1'b1;
        end
      end
    end
  end

  // ---------------- stage 2: CalGCLI ----------------
  logic [GCLI_W-1:0] gcli;
  logic [BITS_W-1:0] cg_cost, acc, acc_new;

  always_comb begin
    gcli = '0;
    for (int i = 0; i < MAG_W; i++)
      if (s1_or_all[i]) gcli = GCLI_W'(i + 1);
    cg_cost = BITS_W'(s1_cnt) * BITS_W'(gcli) + BITS_W'(gcli) + BITS_W'(1);
    acc_new = ((s1_or_idx == '0) ? '0 : acc) + cg_cost;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc        <= '0;
      bits_valid <= 1'b0;
      bits_test  <= '0;
      tag_out    <= '0;
    end else begin
      bits_valid <= s1_valid && s1_last;
      if (s1_valid) begin
        acc <= acc_new;
        if (s1_last) begin
          bits_test <= acc_new;            // BitsTest
          tag_out   <= s1_dv;              // DV_D2
        end
      end
    end
  end

endmodule
