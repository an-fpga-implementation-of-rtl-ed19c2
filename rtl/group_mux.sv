// group_mux: the per-group selector in front of SIG_MAG_SUB (query and
// candidate side) and in front of GCLI_CAL (residual side).
//
// It chooses one of N FIFO read ports by the group index 'sel': the chosen
// FIFO's head word and empty flag go out, and the pop request coming back is
// steered to that FIFO only. It is purely combinational. The paper shows the
// three multiplexers and that CTRL drives them; the port form is this
// design's.
module group_mux #(
  parameter int W = 32,
  parameter int N = 4,
  localparam int SW = (N > 1) ? $clog2(N) : 1
) (
  input  logic [SW-1:0]       sel,
  input  logic [N-1:0][W-1:0] in_data,
  input  logic [N-1:0]        in_empty,
  output logic [N-1:0]        in_pop,
  output logic [W-1:0]        out_data,
  output logic                out_empty,
  input  logic                out_pop
);

  always_comb begin
    out_data  = in_data[sel];
    out_empty = in_empty[sel];
    in_pop    = '0;
    in_pop[sel] = out_pop;
  end

endmodule
