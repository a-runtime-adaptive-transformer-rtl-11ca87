// gelu: GeLU activation, GELU(x) = x * Phi(x) = x/2 * (1 + erf(x/sqrt(2))),
// for one Q7.8 value, combinational.
//
// Phi, the standard normal distribution function, is held in a 129-entry
// table over [-4, 4] in steps of 1/16 (Q.16 values, 17 bits), and linearly
// interpolated between entries with the 4 low fraction bits of x. Then
// y = (x * Phi) >>> 16, rounded toward minus infinity. For x >= 4 the
// result is x, for x < -4 it is 0 (the true value there is above -0.0003,
// below one output step). The source names GeLU as one of the activation
// functions its activation unit realises in LUTs, with no detail; the table
// and interpolation are this design's choices. The encoder layer built in
// adaptor_top uses ReLU, as the source's FFN does; this unit is provided
// for models that use GeLU and is not wired into the top.
// Interface: x in, y out, Q7.8. Timing: combinational.
module gelu
  import adaptor_pkg::*;
(
  input  fx_t x,
  output fx_t y
);
  localparam logic [16:0] PHI [129] = '{
      17'd2, 17'd3, 17'd3, 17'd5, 17'd6, 17'd7, 17'd9, 17'd12,
      17'd15, 17'd19, 17'd24, 17'd30, 17'd38, 17'd47, 17'd58, 17'd72,
      17'd88, 17'd108, 17'd132, 17'd161, 17'd195, 17'd236, 17'd284, 17'd341,
      17'd407, 17'd485, 17'd575, 17'd680, 17'd801, 17'd941, 17'd1101, 17'd1283,
      17'd1491, 17'd1726, 17'd1992, 17'd2291, 17'd2625, 17'd2999, 17'd3413, 17'd3872,
      17'd4378, 17'd4934, 17'd5542, 17'd6205, 17'd6924, 17'd7701, 17'd8539, 17'd9437,
      17'd10398, 17'd11420, 17'd12503, 17'd13648, 17'd14852, 17'd16114, 17'd17432, 17'd18801,
      17'd20220, 17'd21684, 17'd23189, 17'd24729, 17'd26299, 17'd27894, 17'd29508, 17'd31135,
      17'd32768, 17'd34401, 17'd36028, 17'd37642, 17'd39237, 17'd40807, 17'd42347, 17'd43852,
      17'd45316, 17'd46735, 17'd48104, 17'd49422, 17'd50684, 17'd51888, 17'd53033, 17'd54116,
      17'd55138, 17'd56099, 17'd56997, 17'd57835, 17'd58612, 17'd59331, 17'd59994, 17'd60602,
      17'd61158, 17'd61664, 17'd62123, 17'd62537, 17'd62911, 17'd63245, 17'd63544, 17'd63810,
      17'd64045, 17'd64253, 17'd64435, 17'd64595, 17'd64735, 17'd64856, 17'd64961, 17'd65051,
      17'd65129, 17'd65195, 17'd65252, 17'd65300, 17'd65341, 17'd65375, 17'd65404, 17'd65428,
      17'd65448, 17'd65464, 17'd65478, 17'd65489, 17'd65498, 17'd65506, 17'd65512, 17'd65517,
      17'd65521, 17'd65524, 17'd65527, 17'd65529, 17'd65530, 17'd65531, 17'd65533, 17'd65533,
      17'd65534
  };

  logic [10:0] u;        // x + 4.0 in Q.8, 0 .. 2047 inside the table range
  logic [6:0]  idx;
  logic [3:0]  fr;
  logic signed [18:0] p0, p1, phi;
  logic signed [35:0] prod;

  always_comb begin
    u    = 11'(int'(x) + 1024);
    idx  = u[10:4];
    fr   = u[3:0];
    p0   = 19'(PHI[8'(idx)]);
    p1   = 19'(PHI[8'(idx) + 8'd1]);
    phi  = p0 + 19'(((p1 - p0) * 19'(fr)) >>> 4);
    prod = 36'(x) * 36'(phi);
    if (x >= fx_t'(1024))       y = x;
    else if (x < fx_t'(-1024))  y = '0;
    else                        y = fx_t'(prod >>> 16);
  end
endmodule
