// dram_model: behavioural model of the external DRAM and its controller, for
// simulation only (not synthesizable logic).
//
// It accepts read requests {word address, length} when req_ready is high;
// req_ready is drawn at random each cycle with probability READY_PCT percent,
// which exercises the requester's back-pressure handling. A request is served
// LAT cycles after it was accepted, in order, one 32-bit word per cycle on
// rsp_valid/rsp_data, with random one-cycle gaps (GAP_PCT percent). The
// testbench fills the memory with the write() task.
module dram_model #(
  parameter int AW        = 17,
  parameter int LAT       = 8,
  parameter int READY_PCT = 70,
  parameter int GAP_PCT   = 10
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        req_valid,
  output logic        req_ready,
  input  logic [31:0] req_addr,
  input  logic [15:0] req_len,
  output logic        rsp_valid,
  output logic [31:0] rsp_data
);

  logic [31:0] mem [2**AW];

  typedef struct {
    int unsigned addr;
    int unsigned len;
    longint      due;
  } rq_t;

  rq_t         q[$];
  longint      cyc;
  int unsigned cur_addr, cur_rem;

  task automatic write(input int unsigned a, input logic [31:0] d);
    mem[a[AW-1:0]] = d;
  endtask

  initial begin
    for (int i = 0; i < 2**AW; i++) mem[i] = '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      req_ready <= 1'b0;
      rsp_valid <= 1'b0;
      rsp_data  <= '0;
      cyc       <= 0;
      cur_rem   <= 0;
      cur_addr  <= 0;
      q.delete();
    end else begin
      cyc       <= cyc + 1;
      req_ready <= ($urandom_range(99) < READY_PCT);
      if (req_valid && req_ready)
        q.push_back('{addr: req_addr, len: req_len, due: cyc + LAT});
      rsp_valid <= 1'b0;
      if (cur_rem != 0) begin
        if ($urandom_range(99) >= GAP_PCT) begin
          rsp_valid <= 1'b1;
          rsp_data  <= mem[cur_addr[AW-1:0]];
          cur_addr  <= cur_addr + 1;
          cur_rem   <= cur_rem - 1;
        end
      end else if (q.size() != 0 && q[0].due <= cyc) begin
        cur_addr <= q[0].addr;
        cur_rem  <= q[0].len;
        void'(q.pop_front());
      end
    end
  end

endmodule
