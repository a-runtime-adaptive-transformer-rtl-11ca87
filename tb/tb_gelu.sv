// tb_gelu: sweeps every Q7.8 input from -8.0 to 8.0 and 2000 random inputs
// over the whole range, comparing the GeLU unit with x * Phi(x) computed in
// real arithmetic (erf from the Abramowitz-Stegun 7.1.26 approximation,
// error below 2e-7). The output must be within 2 LSB (2/256) of the real
// value; GELU(0) = 0 and GELU(x) = x for large x are checked exactly.
module tb_gelu;
  import adaptor_pkg::*;
  int checks = 0, failures = 0;
  fx_t x, y;
  gelu dut (.*);

  function automatic real erf_r(real z);
    real t, s, r;
    s = (z < 0) ? -1.0 : 1.0;
    z = (z < 0) ? -z : z;
    t = 1.0 / (1.0 + 0.3275911 * z);
    r = 1.0 - (((((1.061405429 * t - 1.453152027) * t) + 1.421413741) * t - 0.284496736) * t
               + 0.254829592) * t * $exp(-z * z);
    return s * r;
  endfunction

  task automatic one(input int v);
    real xr, er, yr;
    x = fx_t'(v); #1;
    xr = real'(v) / 256.0;
    er = xr * 0.5 * (1.0 + erf_r(xr / $sqrt(2.0)));
    yr = real'(y) / 256.0;
    checks++;
    if (yr - er > 2.0 / 256 || er - yr > 2.0 / 256) begin
      failures++;
      if (failures < 10) $display("gelu(%f) = %f, expected %f", xr, yr, er);
    end
  endtask

  initial begin
    #1000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish;
  end

  initial begin
    for (int v = -2048; v <= 2048; v++) one(v);
    for (int n = 0; n < 2000; n++) one(int'($urandom_range(0, 65535)) - 32768);
    x = 0; #1; checks++; if (y != 0) failures++;
    x = 16'sd5000; #1; checks++; if (y != 16'sd5000) failures++;
    x = -16'sd32768; #1; checks++; if (y != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
