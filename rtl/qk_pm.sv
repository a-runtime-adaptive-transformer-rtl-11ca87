// qk_pm: one attention head's score module, S = Q K^T / sqrt(d_k).
//
// For every pair (i, j) of sequence positions it forms the dot product of
// row i of Q and row j of K over the d_k head dimensions, fully unrolled
// (DK multipliers), one pair per clock, and scales it by 1/sqrt(d_k). The
// scaled score is streamed out to the softmax unit's buffer as
// (row i, column j, value).
// The scale is computed once per start, in LUT logic as the source
// describes: sqrt(d_k) with seq_sqrt, then its reciprocal with seq_div, in
// Q7.8. Each score is then multiplied by the reciprocal instead of being
// divided, which is this design's choice (one divider per head instead of
// one per score). The source's algorithm divides by the embedding dimension
// while its attention equation divides by sqrt(d_k); this module follows the
// equation.
// Interface: start (runtime seq_len and d_k), done pulse; combinational Q and
// K row read ports; score write stream s_we/s_row/s_col/s_data.
// Timing: 2*18 + 2 cycles of scale set-up, then seq_len^2 cycles + 2.
module qk_pm
  import adaptor_pkg::*;
#(
  parameter int DK = DK_MAX
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [15:0]   seq_len,
  input  logic [15:0]   dk,
  input  logic          start,
  output logic          busy,
  output logic          done,
  output logic [15:0]   q_raddr,
  input  fx_t [DK-1:0]  q_rdata,
  output logic [15:0]   k_raddr,
  input  fx_t [DK-1:0]  k_rdata,
  output logic          s_we,
  output logic [15:0]   s_row,
  output logic [15:0]   s_col,
  output fx_t           s_data
);
  typedef enum logic [2:0] {IDLE, SQRT, DIV, RUN, DRAIN} st_t;
  st_t st;

  logic        sq_start, sq_done, dv_start, dv_done;
  logic        sq_busy, dv_busy;
  logic [17:0] sq_root;
  logic [35:0] dv_q;
  fx_t         inv_sqrt;        // 1/sqrt(d_k) in Q7.8

  seq_sqrt #(.W(18)) u_sqrt (
    .clk, .rst_n, .start(sq_start), .radicand({4'd0, dk, 16'd0}),
    .busy(sq_busy), .done(sq_done), .root(sq_root));
  seq_div #(.W(36)) u_div (
    .clk, .rst_n, .start(dv_start), .dividend(36'd65536),
    .divisor({18'd0, sq_root}), .busy(dv_busy), .done(dv_done), .quotient(dv_q));

  logic [15:0] i0, j0;
  logic        run0, v1;
  logic [15:0] i1, j1;
  acc_t        dot1;

  acc_t dot0;
  always_comb begin
    dot0 = '0;
    for (int k = 0; k < DK; k++)
      if (k < int'(dk)) dot0 += acc_t'(q_rdata[k]) * acc_t'(k_rdata[k]);
  end
  assign q_raddr = i0;
  assign k_raddr = j0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= IDLE; sq_start <= 1'b0; dv_start <= 1'b0; inv_sqrt <= '0;
      i0 <= '0; j0 <= '0; run0 <= 1'b0; v1 <= 1'b0; i1 <= '0; j1 <= '0; dot1 <= '0;
      busy <= 1'b0; done <= 1'b0;
    end else begin
      sq_start <= 1'b0; dv_start <= 1'b0; done <= 1'b0;
      case (st)
        IDLE: if (start) begin st <= SQRT; sq_start <= 1'b1; busy <= 1'b1; end
        SQRT: if (sq_done) begin st <= DIV; dv_start <= 1'b1; end
        DIV:  if (dv_done) begin
                st <= RUN; inv_sqrt <= sat_fx(64'(dv_q));
                i0 <= '0; j0 <= '0; run0 <= 1'b1;
              end
        RUN: begin
          if (j0 == seq_len - 1'b1) begin
            j0 <= '0;
            if (i0 == seq_len - 1'b1) begin run0 <= 1'b0; st <= DRAIN; end
            else i0 <= i0 + 1'b1;
          end else j0 <= j0 + 1'b1;
        end
        DRAIN: if (!v1) begin st <= IDLE; busy <= 1'b0; done <= 1'b1; end
        default: st <= IDLE;
      endcase
      v1 <= run0 && (st == RUN);
      i1 <= i0; j1 <= j0; dot1 <= dot0;
    end
  end

  assign s_we   = v1;
  assign s_row  = i1;
  assign s_col  = j1;
  assign s_data = sat_fx((64'(acc_to_fx(dot1)) * 64'(inv_sqrt)) >>> FRAC);

  logic unused;
  assign unused = ^{sq_busy, dv_busy, dv_q[35:16]};
endmodule
