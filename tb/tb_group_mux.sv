// tb_group_mux: every select value with random data and flags; checks that
// the selected FIFO's word and empty flag come out and that the pop reaches
// only the selected FIFO.
module tb_group_mux;
  localparam int W = 12, N = 4;
  logic [1:0] sel;
  logic [N-1:0][W-1:0] in_data;
  logic [N-1:0] in_empty, in_pop;
  logic [W-1:0] out_data;
  logic out_empty, out_pop;
  int checks = 0, failures = 0;
  group_mux #(.W(W), .N(N)) dut (.sel, .in_data, .in_empty, .in_pop, .out_data, .out_empty, .out_pop);
  initial begin
    for (int i = 0; i < 400; i++) begin
      sel = 2'($urandom); in_empty = N'($urandom); out_pop = 1'($urandom);
      for (int k = 0; k < N; k++) in_data[k] = W'($urandom);
      #1;
      checks++; if (out_data !== in_data[sel]) begin failures++; $display("FAIL data sel=%0d", sel); end
      checks++; if (out_empty !== in_empty[sel]) begin failures++; $display("FAIL empty"); end
      checks++; if (in_pop !== (N'(out_pop) << sel)) begin failures++; $display("FAIL pop %b", in_pop); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
