// sv_pm: one attention head's S x V module.
//
// For every sequence position i and head column j < d_k it forms
//   O[i][j] = sum_k P[i][k] * V[k][j]
// where P is the softmax output. The sum over the seq_len positions k is
// fully unrolled (SL multipliers, as in the source's SV algorithm), so one
// output per clock leaves the module as (row i, column j, value); the
// controller places it in the attention output matrix at column
// head*d_k + j, which concatenates the heads.
// Interface: start (runtime seq_len, d_k); done pulse; combinational read
// of one softmax row (p_raddr/p_rdata) and one V column (vt_raddr/vt_rdata);
// output write stream o_we/o_row/o_col/o_data.
// Timing: seq_len*d_k + 2 cycles.
module sv_pm
  import adaptor_pkg::*;
#(
  parameter int SL = SL_MAX
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [15:0]   seq_len,
  input  logic [15:0]   dk,
  input  logic          start,
  output logic          busy,
  output logic          done,
  output logic [15:0]   p_raddr,
  input  fx_t [SL-1:0]  p_rdata,
  output logic [15:0]   vt_raddr,
  input  fx_t [SL-1:0]  vt_rdata,
  output logic          o_we,
  output logic [15:0]   o_row,
  output logic [15:0]   o_col,
  output fx_t           o_data
);
  logic [15:0] i0, j0, i1, j1;
  logic        run0, v1;
  acc_t        dot0, dot1;

  always_comb begin
    dot0 = '0;
    for (int k = 0; k < SL; k++)
      if (k < int'(seq_len)) dot0 += acc_t'(p_rdata[k]) * acc_t'(vt_rdata[k]);
  end
  assign p_raddr  = i0;
  assign vt_raddr = j0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      i0 <= '0; j0 <= '0; run0 <= 1'b0; v1 <= 1'b0; i1 <= '0; j1 <= '0; dot1 <= '0;
      busy <= 1'b0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        i0 <= '0; j0 <= '0; run0 <= 1'b1; busy <= 1'b1;
      end else if (run0) begin
        if (j0 == dk - 1'b1) begin
          j0 <= '0;
          if (i0 == seq_len - 1'b1) run0 <= 1'b0;
          else i0 <= i0 + 1'b1;
        end else j0 <= j0 + 1'b1;
      end
      v1 <= run0; i1 <= i0; j1 <= j0; dot1 <= dot0;
      if (busy && !run0 && v1) begin busy <= 1'b0; done <= 1'b1; end
    end
  end

  assign o_we   = v1;
  assign o_row  = i1;
  assign o_col  = j1;
  assign o_data = acc_to_fx(dot1);
endmodule
