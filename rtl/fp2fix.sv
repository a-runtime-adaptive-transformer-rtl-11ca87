// fp2fix: IEEE-754 single precision to fx_t (Q7.8) converter.
//
// The accelerator's external memory holds 32-bit floats; every word loaded
// from it passes through this converter before it is written to an on-chip
// buffer. The conversion takes three clock cycles, as the source's load
// pipeline budgets (float-to-fixed, 3 cc), and accepts one word per cycle.
//   stage 1: unpack sign, exponent, 24-bit mantissa; work out shift amount
//   stage 2: shift the mantissa to 8 fraction bits (truncating), flag overflow
//   stage 3: negate for a negative sign and saturate to the fx_t range
// Zero and subnormal inputs give 0; infinities and values too large for
// Q7.8 saturate; a NaN gives 0. Truncation toward zero is this design's
// choice of rounding.
module fp2fix
  import adaptor_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  logic [31:0] in_fp,
  output logic        out_valid,
  output fx_t         out_fx
);
  // stage 1 registers
  logic        v1, s1, zero1, big1, nan1;
  logic [23:0] m1;
  logic signed [9:0] sh1;   // left shift amount (negative: right shift)
  // stage 2 registers
  logic        v2, s2, ovf2, nan2;
  logic [31:0] mag2;
  // stage 3
  logic        v3;
  fx_t         o3;

  logic [7:0] e_in;
  assign e_in = in_fp[30:23];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; s1 <= 1'b0; zero1 <= 1'b0; big1 <= 1'b0; nan1 <= 1'b0;
      m1 <= '0; sh1 <= '0;
      v2 <= 1'b0; s2 <= 1'b0; ovf2 <= 1'b0; nan2 <= 1'b0; mag2 <= '0;
      v3 <= 1'b0; o3 <= '0;
    end else begin
      // stage 1: value = m * 2^(e-127-23); in Q.8 units m * 2^(e-142)
      v1    <= in_valid;
      s1    <= in_fp[31];
      zero1 <= (e_in == 8'd0);
      big1  <= (e_in == 8'hFF);
      nan1  <= (e_in == 8'hFF) && (in_fp[22:0] != '0);
      m1    <= {1'b1, in_fp[22:0]};
      sh1   <= 10'(signed'({2'b00, e_in})) - 10'sd142;
      // stage 2
      v2   <= v1;
      s2   <= s1;
      nan2 <= nan1;
      if (zero1) begin
        mag2 <= '0; ovf2 <= 1'b0;
      end else if (big1 || sh1 > 10'sd7) begin
        mag2 <= '0; ovf2 <= 1'b1;          // >= 2^31 in Q.8 units
      end else if (sh1 >= 0) begin
        mag2 <= 32'(m1) << sh1; ovf2 <= 1'b0;
      end else if (sh1 < -10'sd24) begin
        mag2 <= '0; ovf2 <= 1'b0;
      end else begin
        mag2 <= 32'(m1) >> (-sh1); ovf2 <= 1'b0;
      end
      // stage 3
      v3 <= v2;
      if (nan2)                                    o3 <= '0;
      else if (ovf2 || mag2 > 32'(FX_MAX))         o3 <= s2 ? ((ovf2 || mag2 > 32'h8000) ? FX_MIN : fx_t'(-signed'(33'(mag2)))) : FX_MAX;
      else                                         o3 <= s2 ? fx_t'(-signed'(33'(mag2))) : fx_t'(mag2);
    end
  end

  assign out_valid = v3;
  assign out_fx    = o3;
endmodule
