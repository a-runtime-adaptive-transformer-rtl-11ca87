// qkv_pm: one attention head's Q/K/V projection processing module.
//
// For every row i of the input X and every output column k < d_k it forms
//   Q[i][k] = sum_c X[i][c] * W_Q[h*d_k + k][c] + b_q[k]   (same for K, V)
// The weights are delivered one tile of TS columns of c at a time (the
// attention tiling: d_model/TS tiles), so the module holds only a d_k x TS
// slice of each of W_Q, W_K, W_V. For each tile it runs over all (i, k),
// one pair per clock; the inner sum over the TS columns of the tile is
// fully unrolled, which gives 3*TS multipliers per head (TS for each of Q,
// K and V). Partial sums are accumulated across tiles in 40-bit
// accumulators; with the last tile the sum is brought back to Q7.8 and the
// bias is added (bias_add), and the results are written to the Q, K and V
// buffers that the score and SV modules read.
// Interface: weight write port (sel 0/1/2 = Q/K/V, row k, column j within
// the tile), bias write port, X row read port (x_row out, x_rdata: the TS
// values of the current tile for that row, combinational), start with
// first/last-tile flags, done pulse. Q and K are read by row (d_k values),
// V by column (V^T row: all sequence positions of one column) so that the
// SV module can use it as an unrolled operand. Reads are combinational.
// Timing: a tile takes seq_len*d_k + 2 cycles. The per-tile loop order and
// the unrolled tile follow the source's Q,K,V algorithm; pipelining across
// rows (instead of restarting the pipeline per row) is this design's choice.
module qkv_pm
  import adaptor_pkg::*;
#(
  parameter int SL = SL_MAX,
  parameter int DK = DK_MAX,
  parameter int TS = TS_MHA
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [15:0]          seq_len,
  input  logic [15:0]          dk,
  // weight tile write port
  input  logic                 w_we,
  input  logic [1:0]           w_sel,
  input  logic [15:0]          w_row,
  input  logic [15:0]          w_col,
  input  fx_t                  w_data,
  // bias write port
  input  logic                 b_we,
  input  logic [1:0]           b_sel,
  input  logic [15:0]          b_idx,
  input  fx_t                  b_data,
  // control
  input  logic                 start,
  input  logic                 first_tile,
  input  logic                 last_tile,
  output logic                 busy,
  output logic                 done,
  // X tile row read
  output logic [15:0]          x_row,
  input  fx_t [TS-1:0]         x_rdata,
  // result read ports
  input  logic [15:0]          q_raddr,
  output fx_t [DK-1:0]         q_rdata,
  input  logic [15:0]          k_raddr,
  output fx_t [DK-1:0]         k_rdata,
  input  logic [15:0]          vt_raddr,
  output fx_t [SL-1:0]         vt_rdata
);
  fx_t [TS-1:0] wq [DK];
  fx_t [TS-1:0] wk [DK];
  fx_t [TS-1:0] wv [DK];
  fx_t          bq [DK];
  fx_t          bk [DK];
  fx_t          bv [DK];
  acc_t         aq [SL][DK];
  acc_t         ak [SL][DK];
  acc_t         av [SL][DK];
  fx_t [DK-1:0] qb [SL];
  fx_t [DK-1:0] kb [SL];
  fx_t [SL-1:0] vtb [DK];

  // loop counters (stage 0) and pipeline stage 1
  logic [15:0] i0, k0;
  logic        run0;
  logic        v1;
  logic [15:0] i1, k1;
  acc_t        sq1, sk1, sv1;
  logic        first_r, last_r;

  // stage 0: three unrolled TS-wide dot products
  acc_t dq, dkk, dv;
  always_comb begin
    dq = '0; dkk = '0; dv = '0;
    for (int j = 0; j < TS; j++) begin
      dq  += acc_t'(x_rdata[j]) * acc_t'(wq[k0[$clog2(DK)-1:0]][j]);
      dkk += acc_t'(x_rdata[j]) * acc_t'(wk[k0[$clog2(DK)-1:0]][j]);
      dv  += acc_t'(x_rdata[j]) * acc_t'(wv[k0[$clog2(DK)-1:0]][j]);
    end
  end
  assign x_row = i0;

  // stage 1: accumulate; on the last tile convert, add bias, store
  acc_t nq, nk, nv;
  fx_t  oq, ok, ov;
  always_comb begin
    nq = (first_r ? acc_t'(0) : aq[i1][k1]) + sq1;
    nk = (first_r ? acc_t'(0) : ak[i1][k1]) + sk1;
    nv = (first_r ? acc_t'(0) : av[i1][k1]) + sv1;
  end
  bias_add u_baq (.in_v(acc_to_fx(nq)), .bias(bq[k1]), .relu_en(1'b0), .out_v(oq));
  bias_add u_bak (.in_v(acc_to_fx(nk)), .bias(bk[k1]), .relu_en(1'b0), .out_v(ok));
  bias_add u_bav (.in_v(acc_to_fx(nv)), .bias(bv[k1]), .relu_en(1'b0), .out_v(ov));

  always_ff @(posedge clk) begin
    if (w_we) begin
      case (w_sel)
        2'd0:    wq[w_row][w_col] <= w_data;
        2'd1:    wk[w_row][w_col] <= w_data;
        default: wv[w_row][w_col] <= w_data;
      endcase
    end
    if (b_we) begin
      case (b_sel)
        2'd0:    bq[b_idx] <= b_data;
        2'd1:    bk[b_idx] <= b_data;
        default: bv[b_idx] <= b_data;
      endcase
    end
    if (v1) begin
      aq[i1][k1] <= nq;
      ak[i1][k1] <= nk;
      av[i1][k1] <= nv;
      if (last_r) begin
        qb[i1][k1]  <= oq;
        kb[i1][k1]  <= ok;
        vtb[k1][i1] <= ov;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      i0 <= '0; k0 <= '0; run0 <= 1'b0; v1 <= 1'b0; i1 <= '0; k1 <= '0;
      sq1 <= '0; sk1 <= '0; sv1 <= '0; first_r <= 1'b0; last_r <= 1'b0;
      busy <= 1'b0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        i0 <= '0; k0 <= '0; run0 <= 1'b1; busy <= 1'b1;
        first_r <= first_tile; last_r <= last_tile;
      end else if (run0) begin
        if (k0 == dk - 1'b1) begin
          k0 <= '0;
          if (i0 == seq_len - 1'b1) run0 <= 1'b0;
          else i0 <= i0 + 1'b1;
        end else begin
          k0 <= k0 + 1'b1;
        end
      end
      v1  <= run0;
      i1  <= i0;  k1 <= k0;
      sq1 <= dq;  sk1 <= dkk; sv1 <= dv;
      if (busy && !run0 && v1) begin
        busy <= 1'b0;
        done <= 1'b1;
      end
    end
  end

  assign q_rdata  = qb[q_raddr];
  assign k_rdata  = kb[k_raddr];
  assign vt_rdata = vtb[vt_raddr];
endmodule
