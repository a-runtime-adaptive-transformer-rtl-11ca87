// tb_layer_norm: residual add and layer normalisation of random rows for two
// widths (12 and 16 of 16). Every output is compared bit-exactly with the
// integer model (tb_ref_pkg::ln_row); with gamma = 1 and beta = 0 each row
// must also come out with mean near 0 and variance near 1. The run must
// stay within seq_len * (3*d + 180) cycles and each element must be written
// once.
module tb_layer_norm;
  import adaptor_pkg::*;
  import tb_ref_pkg::*;
  localparam int D = 16, SLM = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic        g_we, be_we, start, busy, done, o_we;
  logic [15:0] seq_len, d_model, p_idx, in_row, in_col, o_row, o_col;
  fx_t         p_data, in_a, in_b, o_data;

  layer_norm #(.D(D)) dut (.*);

  int A [SLM][D];
  int B [SLM][D];
  int G [D];
  int BE [D];
  int OUT [SLM][D];
  int seen [SLM][D];

  assign in_a = fx_t'(A[in_row % SLM][in_col % D]);
  assign in_b = fx_t'(B[in_row % SLM][in_col % D]);

  always @(posedge clk) if (rst_n && o_we) begin
    OUT[o_row % SLM][o_col % D] = int'(o_data);
    seen[o_row % SLM][o_col % D]++;
  end

  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int widths [2] = '{12, 16};
    g_we = 0; be_we = 0; start = 0; seq_len = 0; d_model = 0; p_idx = 0; p_data = 0;
    repeat (3) @(posedge clk); rst_n = 1; @(posedge clk);
    for (int r = 0; r < 2; r++) begin
      int n, cyc;
      n = widths[r];
      foreach (A[i, j]) A[i][j] = $urandom_range(0, 2047) - 1024;
      foreach (B[i, j]) B[i][j] = $urandom_range(0, 1023) - 256;
      A[1] = '{default: 200}; B[1] = '{default: 56};        // constant row: variance 0
      foreach (G[j]) G[j] = (r == 0) ? 256 : $urandom_range(0, 511) - 128;
      foreach (BE[j]) BE[j] = (r == 0) ? 0 : $urandom_range(0, 511) - 256;
      foreach (seen[i, j]) seen[i][j] = 0;
      for (int j = 0; j < n; j++) begin
        g_we <= 1; p_idx <= 16'(j); p_data <= fx_t'(G[j]); @(posedge clk);
        g_we <= 0; be_we <= 1; p_data <= fx_t'(BE[j]); @(posedge clk);
        be_we <= 0;
      end
      seq_len <= 16'(SLM - 1); d_model <= 16'(n); start <= 1; @(posedge clk); start <= 0; cyc = 0;
      while (!done) begin @(posedge clk); cyc++; end
      @(posedge clk);
      checks++;
      if (cyc > (SLM - 1) * (3 * n + 180)) begin failures++; $display("LN took %0d", cyc); end
      for (int i = 0; i < SLM - 1; i++) begin
        int a [], b [], g [], be [], o [];
        real m, v;
        a = new[n]; b = new[n]; g = new[n]; be = new[n];
        for (int j = 0; j < n; j++) begin a[j] = A[i][j]; b[j] = B[i][j]; g[j] = G[j]; be[j] = BE[j]; end
        ln_row(a, b, g, be, o);
        m = 0; v = 0;
        for (int j = 0; j < n; j++) begin
          checks += 2;
          if (seen[i][j] != 1) begin failures++; $display("LN(%0d,%0d) seen %0d", i, j, seen[i][j]); end
          if (OUT[i][j] != o[j]) begin failures++; $display("LN[%0d][%0d] %0d exp %0d", i, j, OUT[i][j], o[j]); end
          m += real'(OUT[i][j]) / 256.0;
        end
        m /= n;
        for (int j = 0; j < n; j++) v += (real'(OUT[i][j]) / 256.0 - m) ** 2;
        v /= n;
        if (r == 0) begin
          checks++;
          if (m > 0.05 || m < -0.05 || (i != 1 && (v > 1.1 || v < 0.9)) || (i == 1 && v != 0.0)) begin
            failures++; $display("row %0d mean %f var %f", i, m, v);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
