// sync_fifo: single-clock FIFO used for the query FIFOs Q0-Q3, the candidate
// FIFOs C0-C3 and the residual FIFOs R0-R3 of the residual calculation engine.
//
// The memory is an array of DEPTH words written at the tail pointer and read
// at the head pointer; the read side is show-ahead (rd_data is the head word
// whenever rd_empty is low, and rd_en pops it). A write to a full FIFO or a
// read from an empty one is ignored and flagged by an assertion. 'level'
// counts stored words. The paper names these FIFOs; depth and read style are
// this design's choice (512 words of 32 bits fit one block RAM each).
module sync_fifo #(
  parameter int W     = 32,
  parameter int DEPTH = 512,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         wr_en,
  input  logic [W-1:0] wr_data,
  output logic         wr_full,
  input  logic         rd_en,
  output logic [W-1:0] rd_data,
  output logic         rd_empty,
  output logic [AW:0]  level
);

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic          do_wr, do_rd;

  assign wr_full  = (level == (AW+1)'(DEPTH));
  assign rd_empty = (level == '0);
  assign do_wr    = wr_en && !wr_full;
  assign do_rd    = rd_en && !rd_empty;
  assign rd_data  = mem[rp];

  always_ff @(posedge clk) begin
    if (do_wr) mem[wp] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      level <= '0;
    end else begin
      if (do_wr) wp <= (wp == AW'(DEPTH-1)) ? '0 : wp + 1'b1;
      if (do_rd) rp <= (rp == AW'(DEPTH-1)) ? '0 : rp + 1'b1;
      level <= level + (AW+1)'(do_wr) - (AW+1)'(do_rd);
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(wr_en && wr_full));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(rd_en && rd_empty));

endmodule
