// layer_norm: residual connection and layer normalisation of each row.
//
// For each sequence row i the unit reads z_j = sat(a_j + b_j), where a is
// the residual input and b the sub-layer output (bias already added), and
// produces out_j = gamma_j * (z_j - mean) / sqrt(var + eps) + beta_j.
// The work follows the source's listing, in passes over the d_model columns:
//   1. sum of z                  -> mean = sum / d        (seq_div)
//   2. sum of (z - mean)^2       -> var  = sum / d        (seq_div, Q.16)
//      std = sqrt(var + eps) (seq_sqrt, Q7.8); inv = 2^24 / std (seq_div, Q.16)
//   3. out_j = gamma_j * ((z_j - mean) * inv >> 16) >> 8 + beta_j, streamed out
// eps is one Q.16 unit (2^-16). Divisions by d round toward zero. gamma and
// beta (the LN weights and biases) are held in registers written through
// g_we/be_we by the load unit; one unit serves both normalisations of an
// encoder layer and is reloaded in between, which is this design's choice.
// Interface: start (runtime seq_len, d_model); done pulse; combinational
// input read (in_row/in_col out, in_a/in_b in); output stream o_*.
// Timing per row: about 3*d + 170 cycles (three 48-cycle divisions and a
// 16-cycle square root besides the three passes).
module layer_norm
  import adaptor_pkg::*;
#(
  parameter int D = D_MAX
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [15:0]   seq_len,
  input  logic [15:0]   d_model,
  // gamma / beta registers
  input  logic          g_we,
  input  logic          be_we,
  input  logic [15:0]   p_idx,
  input  fx_t           p_data,
  // control
  input  logic          start,
  output logic          busy,
  output logic          done,
  // input read
  output logic [15:0]   in_row,
  output logic [15:0]   in_col,
  input  fx_t           in_a,
  input  fx_t           in_b,
  // output stream
  output logic          o_we,
  output logic [15:0]   o_row,
  output logic [15:0]   o_col,
  output fx_t           o_data
);
  typedef enum logic [3:0] {IDLE, SUM, MDIV, VSUM, VDIV, SQRT, IDIV, NORM} st_t;
  st_t st;

  fx_t  gamma [D];
  fx_t  beta  [D];
  logic [15:0] row, col;
  logic signed [47:0] acc;
  logic [47:0] mag;
  logic        neg;
  fx_t         mean;
  logic [31:0] var_q16;
  logic [23:0] inv;        // 1/std, Q.16

  logic dv_start, dv_done, dv_busy, sq_start, sq_done, sq_busy;
  logic [47:0] dv_a, dv_b, dv_q;
  logic [15:0] sq_root;

  seq_div #(.W(48)) u_div (
    .clk, .rst_n, .start(dv_start), .dividend(dv_a), .divisor(dv_b),
    .busy(dv_busy), .done(dv_done), .quotient(dv_q));
  seq_sqrt #(.W(16)) u_sqrt (
    .clk, .rst_n, .start(sq_start), .radicand(var_q16 + 32'd1),
    .busy(sq_busy), .done(sq_done), .root(sq_root));

  fx_t z;
  logic signed [31:0] dz;
  logic signed [63:0] nrm_w, out_w;
  fx_t nrm;
  always_comb begin
    z     = sat_fx(64'(in_a) + 64'(in_b));
    dz    = 32'(z) - 32'(mean);
    nrm_w = (64'(dz) * 64'(signed'({1'b0, inv}))) >>> 16;
    nrm   = sat_fx(nrm_w);
    out_w = ((64'(gamma[col]) * 64'(nrm)) >>> FRAC) + 64'(beta[col]);
  end
  assign in_row = row;
  assign in_col = col;

  always_ff @(posedge clk) begin
    if (g_we)  gamma[p_idx] <= p_data;
    if (be_we) beta[p_idx]  <= p_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= IDLE; row <= '0; col <= '0; acc <= '0; mag <= '0; neg <= 1'b0;
      mean <= '0; var_q16 <= '0; inv <= '0; dv_start <= 1'b0; sq_start <= 1'b0;
      dv_a <= '0; dv_b <= '0; busy <= 1'b0; done <= 1'b0;
      o_we <= 1'b0; o_row <= '0; o_col <= '0; o_data <= '0;
    end else begin
      dv_start <= 1'b0; sq_start <= 1'b0; done <= 1'b0; o_we <= 1'b0;
      case (st)
        IDLE: if (start) begin st <= SUM; row <= '0; col <= '0; acc <= '0; busy <= 1'b1; end
        SUM: begin
          acc <= acc + 48'(z);
          if (col == d_model - 1'b1) begin col <= '0; st <= MDIV; end
          else col <= col + 1'b1;
        end
        MDIV: begin
          // start |sum| / d once, then wait
          if (!dv_busy && !dv_start && !dv_done) begin
            neg <= acc < 0;
            dv_a <= (acc < 0) ? 48'(-acc) : 48'(acc);
            dv_b <= 48'(d_model);
            dv_start <= 1'b1;
          end
          if (dv_done) begin
            mean <= neg ? sat_fx(-64'(dv_q)) : sat_fx(64'(dv_q));
            acc <= '0; st <= VSUM;
          end
        end
        VSUM: begin
          acc <= acc + 48'(64'(dz) * 64'(dz));
          if (col == d_model - 1'b1) begin col <= '0; st <= VDIV; end
          else col <= col + 1'b1;
        end
        VDIV: begin
          if (!dv_busy && !dv_start && !dv_done) begin
            dv_a <= 48'(acc); dv_b <= 48'(d_model); dv_start <= 1'b1;
          end
          if (dv_done) begin
            var_q16 <= (dv_q > 48'hFFFF_FFFE) ? 32'hFFFF_FFFE : 32'(dv_q);
            sq_start <= 1'b1; st <= SQRT;
          end
        end
        SQRT: if (sq_done) begin
          dv_a <= 48'h100_0000; dv_b <= 48'(sq_root); dv_start <= 1'b1; st <= IDIV;
        end
        IDIV: if (dv_done) begin
          inv <= (dv_q > 48'hFF_FFFF) ? 24'hFF_FFFF : 24'(dv_q);
          st <= NORM;
        end
        NORM: begin
          o_we <= 1'b1; o_row <= row; o_col <= col; o_data <= sat_fx(out_w);
          if (col == d_model - 1'b1) begin
            col <= '0; acc <= '0;
            if (row == seq_len - 1'b1) begin st <= IDLE; busy <= 1'b0; done <= 1'b1; end
            else begin row <= row + 1'b1; st <= SUM; end
          end else col <= col + 1'b1;
        end
        default: st <= IDLE;
      endcase
    end
  end

  logic unused;
  assign unused = sq_busy;
endmodule
