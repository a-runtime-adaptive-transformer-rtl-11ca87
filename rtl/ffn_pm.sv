// ffn_pm: tiled linear-layer processing module of the feed-forward network.
//
// One instance computes Y = X W for one of the three FFN linear layers,
// one weight tile at a time. A tile is KT input rows by JT output columns
// of W; the tile grid covers (inputs/KT) x (outputs/JT) tiles. For each
// tile the module runs over all (i, j), i < seq_len, j < JT, one per clock:
// the KT-term dot product of row i of the current input tile with column j
// of the weight tile is fully unrolled (KT multipliers) and added into the
// 40-bit accumulator Y[i][col_base + j] ('first' starts a fresh sum). After
// the last tile Y holds the full product, read back in Q7.8 through y_*.
// The three FFN modules of the source differ only in their tile shape:
//   FFN1 (d -> d, attention output projection): KT = TS_FFN, JT = TS_FFN
//   FFN2 (d -> hidden):                         KT = TS_FFN, JT = 4*TS_FFN
//   FFN3 (hidden -> d):                         KT = 4*TS_FFN, JT = TS_FFN
// so one parameterised module serves all three, which is this design's
// choice; the tile shapes and unroll widths follow the source.
// Interface: weight tile write port (w_j output column, w_k input row, both
// within the tile); input tile row read (x_row out, x_rdata in, KT values,
// combinational); start/first/col_base; done pulse; result read port
// returning YW consecutive columns from y_col (YW = 4*TS_FFN on FFN2, whose
// output is the next module's unrolled input tile; 1 elsewhere).
// Timing: seq_len*JT + 2 cycles per tile.
module ffn_pm
  import adaptor_pkg::*;
#(
  parameter int SL   = SL_MAX,
  parameter int KT   = TS_FFN,
  parameter int JT   = TS_FFN,
  parameter int DOUT = D_MAX,
  parameter int YW   = 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [15:0]   seq_len,
  // weight tile write port
  input  logic          w_we,
  input  logic [15:0]   w_j,
  input  logic [15:0]   w_k,
  input  fx_t           w_data,
  // control
  input  logic          start,
  input  logic          first,
  input  logic [15:0]   col_base,
  output logic          busy,
  output logic          done,
  // input tile row read
  output logic [15:0]   x_row,
  input  fx_t [KT-1:0]  x_rdata,
  // result read
  input  logic [15:0]   y_row,
  input  logic [15:0]   y_col,
  output fx_t [YW-1:0]  y_rdata
);
  localparam int JW = $clog2(JT);
  fx_t [KT-1:0] wt [JT];
  acc_t         acc [SL][DOUT];

  logic [15:0] i0, j0, i1, c1, cbase;
  logic        run0, v1, first_r;
  acc_t        dot0, dot1, nacc;

  always_comb begin
    dot0 = '0;
    for (int k = 0; k < KT; k++)
      dot0 += acc_t'(x_rdata[k]) * acc_t'(wt[j0[JW-1:0]][k]);
  end
  assign x_row = i0;
  assign nacc  = (first_r ? acc_t'(0) : acc[i1][c1]) + dot1;

  always_ff @(posedge clk) begin
    if (w_we) wt[w_j[JW-1:0]][w_k] <= w_data;
    if (v1)   acc[i1][c1] <= nacc;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      i0 <= '0; j0 <= '0; i1 <= '0; c1 <= '0; cbase <= '0; run0 <= 1'b0; v1 <= 1'b0;
      first_r <= 1'b0; dot1 <= '0; busy <= 1'b0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        i0 <= '0; j0 <= '0; run0 <= 1'b1; busy <= 1'b1; first_r <= first; cbase <= col_base;
      end else if (run0) begin
        if (j0 == 16'(JT - 1)) begin
          j0 <= '0;
          if (i0 == seq_len - 1'b1) run0 <= 1'b0;
          else i0 <= i0 + 1'b1;
        end else j0 <= j0 + 1'b1;
      end
      v1 <= run0; i1 <= i0; c1 <= cbase + j0; dot1 <= dot0;
      if (busy && !run0 && v1) begin busy <= 1'b0; done <= 1'b1; end
    end
  end

  always_comb
    for (int r = 0; r < YW; r++) y_rdata[r] = acc_to_fx(acc[y_row][y_col + 16'(r)]);
endmodule
