// sig_mag_sub: residual = original - reconstructed for 32-bit sign-magnitude
// coefficients.
//
// Each input is split into a sign bit and a 31-bit magnitude. Four paths cover
// the four sign combinations, as the paper describes:
//   (+,+): |o|>=|r| ? +(|o|-|r|) : -(|r|-|o|)
//   (-,-): |o|>=|r| ? -(|o|-|r|) : +(|r|-|o|)
//   (+,-): +(|o|+|r|)          (-,+): -(|o|+|r|)
// and the pair of signs selects one. The result is a sign-magnitude residual
// with a 32-bit magnitude so that no sum can overflow; a zero result gets sign
// 0. One register stage: a pair accepted with in_valid appears on out_valid
// the next cycle together with the group index it came with, which the
// caller uses to pick the residual FIFO. The four-path split follows the
// paper; widths, zero sign and latency are this design's choice.
module sig_mag_sub
  import ipc_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  logic [COEF_W-1:0] orig,    // {sign, magnitude[30:0]}
  input  logic [COEF_W-1:0] recon,
  input  logic [GRP_W-1:0]  in_grp,
  output logic              out_valid,
  output logic [RES_W-1:0]  res,     // {sign, magnitude[31:0]}
  output logic [GRP_W-1:0]  out_grp
);

  logic              so, sr;
  logic [MAG_W-1:0]  mo, mr, d_or, d_ro, s_sum;
  logic              o_ge_r;
  logic              rs;
  logic [MAG_W-1:0]  rm;

  always_comb begin
    so     = orig[COEF_W-1];
    sr     = recon[COEF_W-1];
    mo     = {1'b0, orig[COEF_W-2:0]};
    mr     = {1'b0, recon[COEF_W-2:0]};
    o_ge_r = (mo >= mr);
    d_or   = mo - mr;
    d_ro   = mr - mo;
    s_sum  = mo + mr;
    unique case ({so, sr})
      2'b00: begin rs = !o_ge_r; rm = o_ge_r ? d_or : d_ro; end
      2'b11: begin rs =  o_ge_r; rm = o_ge_r ? d_or : d_ro; end
      2'b01: begin rs = 1'b0;    rm = s_sum;               end
      default: begin rs = 1'b1;  rm = s_sum;               end
    endcase
    if (rm == '0) rs = 1'b0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      res       <= '0;
      out_grp   <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        res     <= {rs, rm};
        out_grp <= in_grp;
      end
    end
  end

endmodule
