// tlb_ram: the on-chip table of band-block lengths that CMD uses to address
// IPC Units and GCLI_CAL uses to find band boundaries.
//
// It holds NG x MAX_BANDS lengths of LEN_W bits: entry (g, b) is the number of
// coefficients of band block b in one IPC Unit of group g (0 = no such block).
// It is written one entry per cycle (wr_en, wr_grp, wr_band, wr_len), which a
// host does when the search moves to a new precinct; the input 'hold'
// lets the owner forbid writes while a search runs. Every entry is readable at
// once on 'table_o', with no latency; a write shows there the next cycle. Reset loads ipc_pkg::TLB_DEFAULT. The paper
// gives the table's role; its organisation is this design's choice.
module tlb_ram
  import ipc_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              wr_en,
  input  logic [GRP_W-1:0]  wr_grp,
  input  logic [BAND_W-1:0] wr_band,
  input  len_t              wr_len,
  input  logic              hold,       // writes ignored while high
  output tlb_t              table_o
);

  tlb_t tab;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                tab <= TLB_DEFAULT;
    else if (wr_en && !hold)   tab[wr_grp][wr_band] <= wr_len;
  end

  assign table_o = tab;

endmodule
