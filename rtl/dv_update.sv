// dv_update: stage 3 of the DV comparison pipeline (Compare and the DV MUX).
//
// Each bits_valid pulse carries the bit cost BitsTest of one candidate and its
// tag (DV, group index, unit index, first/last flags). Compare checks BitsTest
// against the stored BitsBest; the first candidate of a unit, or any strictly
// smaller cost, replaces BitsBest and, through the MUX, BestDV. On the last
// candidate of a unit the result (best_bits, best_dv, group and unit index)
// is registered and best_valid pulses for one cycle, one cycle after the last
// bits_valid. Equal costs keep the earlier candidate. 'updated' pulses
// whenever BitsBest is replaced by a smaller cost. The paper gives the
// compare-and-select structure; tie and first-candidate rules are this
// design's.
module dv_update
  import ipc_pkg::*;
(
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   bits_valid,
  input  logic [BITS_W-1:0]      bits_test,
  input  dv_tag_t                tag,
  output logic                   best_valid,
  output logic [BITS_W-1:0]      best_bits,
  output logic signed [DV_W-1:0] best_dv,
  output logic [GRP_W-1:0]       best_grp,
  output logic [UNIT_W-1:0]      best_unit,
  output logic                   updated
);

  logic [BITS_W-1:0]      bits_best;   // BitsBest
  logic signed [DV_W-1:0] dv_best;     // BestDV
  logic                   take;
  logic [BITS_W-1:0]      nxt_bits;
  logic signed [DV_W-1:0] nxt_dv;

  always_comb begin
    take     = tag.first || (bits_test < bits_best);   // Compare
    nxt_bits = take ? bits_test : bits_best;
    nxt_dv   = take ? tag.dv    : dv_best;             // MUX
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bits_best  <= '1;
      dv_best    <= '0;
      best_valid <= 1'b0;
      best_bits  <= '0;
      best_dv    <= '0;
      best_grp   <= '0;
      best_unit  <= '0;
      updated    <= 1'b0;
    end else begin
      best_valid <= bits_valid && tag.last;
      updated    <= bits_valid && !tag.first && (bits_test < bits_best);
      if (bits_valid) begin
        bits_best <= nxt_bits;
        dv_best   <= nxt_dv;
        if (tag.last) begin
          best_bits <= nxt_bits;
          best_dv   <= nxt_dv;
          best_grp  <= tag.grp;
          best_unit <= tag.unit;
        end
      end
    end
  end

endmodule
