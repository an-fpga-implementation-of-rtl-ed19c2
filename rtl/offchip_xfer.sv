// offchip_xfer: the off-chip data transfer engine between CMD and the DRAM
// controller.
//
// CMD hands it one read command at a time (cmd_valid/cmd_ready): a start word
// address, a length in words and a destination tag (which FIFO the data goes
// to). The engine cuts the command into DRAM bursts of at most MAX_BURST
// words and issues them on the request channel (dram_req_valid/ready, address,
// length). For every burst it records {destination, burst length, last-burst}
// in a small in-order queue, so that up to OUTSTANDING bursts can be in
// flight. Read data returns on dram_rsp_valid/dram_rsp_data, one word per
// cycle, in request order and without back-pressure (the FIFO space was
// reserved before the command was sent). Each word leaves on out_valid with
// its destination; out_last marks the final word of a command. A new command
// is accepted the cycle after the previous one's last burst was issued. The
// paper names this block and says it talks to DRAM through a custom
// interface; the interface and the burst splitting are this design's.
module offchip_xfer
  import ipc_pkg::*;
#(
  parameter int MAX_BURST   = 16,
  parameter int OUTSTANDING = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  // command from CMD
  input  logic              cmd_valid,
  output logic              cmd_ready,
  input  logic [ADDR_W-1:0] cmd_addr,
  input  len_t              cmd_len,
  input  dest_t             cmd_dest,
  // DRAM request channel
  output logic              dram_req_valid,
  input  logic              dram_req_ready,
  output logic [ADDR_W-1:0] dram_req_addr,
  output len_t              dram_req_len,
  // DRAM read data
  input  logic              dram_rsp_valid,
  input  logic [COEF_W-1:0] dram_rsp_data,
  // data to CMD
  output logic              out_valid,
  output logic [COEF_W-1:0] out_data,
  output dest_t             out_dest,
  output logic              out_last
);

  typedef struct packed {
    dest_t dest;
    len_t  blen;
    logic  last;
  } burst_t;

  logic              busy;
  logic [ADDR_W-1:0] addr;
  len_t              rem;
  dest_t             dest;
  len_t              blen;
  logic              issue;

  burst_t tq_wdata, tq_rdata;
  logic   tq_full, tq_empty, tq_pop;
  logic [$clog2(OUTSTANDING):0] tq_level;

  assign cmd_ready      = !busy;
  assign blen           = (rem > len_t'(MAX_BURST)) ? len_t'(MAX_BURST) : rem;
  assign dram_req_valid = busy && !tq_full;
  assign dram_req_addr  = addr;
  assign dram_req_len   = blen;
  assign issue          = dram_req_valid && dram_req_ready;
  assign tq_wdata       = '{dest: dest, blen: blen, last: (rem == blen)};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      addr <= '0;
      rem  <= '0;
      dest <= '0;
    end else if (!busy) begin
      if (cmd_valid && cmd_len != '0) begin
        busy <= 1'b1;
        addr <= cmd_addr;
        rem  <= cmd_len;
        dest <= cmd_dest;
      end
    end else if (issue) begin
      addr <= addr + ADDR_W'(blen);
      rem  <= rem - blen;
      if (rem == blen) busy <= 1'b0;
    end
  end

  sync_fifo #(.W($bits(burst_t)), .DEPTH(OUTSTANDING)) u_tagq (
    .clk, .rst_n,
    .wr_en(issue), .wr_data(tq_wdata), .wr_full(tq_full),
    .rd_en(tq_pop), .rd_data(tq_rdata), .rd_empty(tq_empty), .level(tq_level)
  );

  // response side: count words of the burst at the head of the queue
  len_t rcnt;
  assign tq_pop    = dram_rsp_valid && (rcnt == tq_rdata.blen - 1'b1);
  assign out_valid = dram_rsp_valid;
  assign out_data  = dram_rsp_data;
  assign out_dest  = tq_rdata.dest;
  assign out_last  = tq_pop && tq_rdata.last;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)              rcnt <= '0;
    else if (dram_rsp_valid) rcnt <= tq_pop ? '0 : rcnt + 1'b1;
  end

  a_rsp_expected: assert property (@(posedge clk) disable iff (!rst_n)
                                   dram_rsp_valid |-> !tq_empty);
  a_req_stable:   assert property (@(posedge clk) disable iff (!rst_n)
                                   dram_req_valid && !dram_req_ready |=>
                                   dram_req_valid && $stable(dram_req_addr) && $stable(dram_req_len));

endmodule
