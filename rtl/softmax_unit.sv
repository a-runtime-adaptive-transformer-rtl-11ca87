// softmax_unit: row-wise softmax of one head's score matrix, in place.
//
// The score module writes S (seq_len x seq_len, Q7.8) into this unit's
// buffer. After start, each row i is processed in three passes of seq_len
// cycles, as in the source's softmax algorithm:
//   1. max:   m = max_j S[i][j]
//   2. exp:   e_j = exp(S[i][j] - m) (Q.16, via fx_exp), sum = sum_j e_j
//   3. norm:  S[i][j] = e_j / sum, as e_j * (2^32 / sum) >> 24 (Q7.8)
// between passes 2 and 3 one serial division forms 2^32/sum (seq_div).
// The source's listing keeps one maximum and one sum for the whole matrix;
// its softmax equation normalises each row, which this unit follows.
// Multiplying by one reciprocal per row instead of dividing each element,
// and the exponent approximation, are this design's choices.
// Interface: score write port; start (runtime seq_len); done pulse;
// combinational row read port (p_raddr -> all seq positions of one row) for
// the SV module.
// Timing: per row 3*seq_len + 44 cycles.
module softmax_unit
  import adaptor_pkg::*;
#(
  parameter int SL = SL_MAX
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [15:0]   seq_len,
  input  logic          s_we,
  input  logic [15:0]   s_row,
  input  logic [15:0]   s_col,
  input  fx_t           s_data,
  input  logic          start,
  output logic          busy,
  output logic          done,
  input  logic [15:0]   p_raddr,
  output fx_t [SL-1:0]  p_rdata
);
  localparam int SW = $clog2(SL);
  typedef enum logic [2:0] {IDLE, PMAX, PEXP, PDIV, PNORM} st_t;
  st_t st;

  fx_t [SL-1:0] sb [SL];
  logic [16:0]  e_row [SL];
  logic [15:0]  row, col;
  fx_t          mx;
  logic [39:0]  sum;
  logic         dv_start, dv_done, dv_busy;
  logic [39:0]  dv_q;
  logic [39:0]  recip;

  seq_div #(.W(40)) u_div (
    .clk, .rst_n, .start(dv_start), .dividend(40'h01_0000_0000), .divisor(sum),
    .busy(dv_busy), .done(dv_done), .quotient(dv_q));

  fx_t         cur;
  logic [16:0] e_cur;
  logic [63:0] prod;
  assign cur   = sb[row[SW-1:0]][col[SW-1:0]];
  assign e_cur = fx_exp(sat_fx(64'(cur) - 64'(mx)));
  assign prod  = 64'(e_row[col[SW-1:0]]) * 64'(recip);

  always_ff @(posedge clk) begin
    if (s_we) sb[s_row[SW-1:0]][s_col[SW-1:0]] <= s_data;
    else if (st == PNORM) sb[row[SW-1:0]][col[SW-1:0]] <= sat_fx(64'(prod >> 24));
    if (st == PEXP) e_row[col[SW-1:0]] <= e_cur;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= IDLE; row <= '0; col <= '0; mx <= '0; sum <= '0; recip <= '0;
      dv_start <= 1'b0; busy <= 1'b0; done <= 1'b0;
    end else begin
      dv_start <= 1'b0; done <= 1'b0;
      case (st)
        IDLE: if (start) begin
          st <= PMAX; row <= '0; col <= '0; mx <= FX_MIN; busy <= 1'b1;
        end
        PMAX: begin
          if (cur > mx) mx <= cur;
          if (col == seq_len - 1'b1) begin col <= '0; sum <= '0; st <= PEXP; end
          else col <= col + 1'b1;
        end
        PEXP: begin
          sum <= sum + 40'(e_cur);
          if (col == seq_len - 1'b1) begin col <= '0; st <= PDIV; dv_start <= 1'b1; end
          else col <= col + 1'b1;
        end
        PDIV: if (dv_done) begin recip <= dv_q; st <= PNORM; end
        PNORM: begin
          if (col == seq_len - 1'b1) begin
            col <= '0;
            if (row == seq_len - 1'b1) begin st <= IDLE; busy <= 1'b0; done <= 1'b1; end
            else begin row <= row + 1'b1; mx <= FX_MIN; st <= PMAX; end
          end else col <= col + 1'b1;
        end
        default: st <= IDLE;
      endcase
    end
  end

  assign p_rdata = sb[p_raddr[SW-1:0]];

  // the score writer and the normalisation pass never overlap
  assert property (@(posedge clk) disable iff (!rst_n) s_we |-> !busy);

  logic unused;
  assign unused = dv_busy;
endmodule
