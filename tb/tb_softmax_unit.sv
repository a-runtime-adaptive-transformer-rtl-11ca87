// tb_softmax_unit: row-wise softmax on random score matrices of two sizes.
// Each output is compared bit-exactly with the integer model
// (tb_ref_pkg::softmax_row) and, with a tolerance of 6/256, with a
// real-valued softmax; each row must sum to about 1. The run time must stay
// within seq_len * (3*seq_len + 44) cycles.
module tb_softmax_unit;
  import adaptor_pkg::*;
  import tb_ref_pkg::*;
  localparam int SL = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic         s_we, start, busy, done;
  logic [15:0]  seq_len, s_row, s_col, p_raddr;
  fx_t          s_data;
  fx_t [SL-1:0] p_rdata;

  softmax_unit #(.SL(SL)) dut (.*);

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int S [SL][SL];
    int sizes [3] = '{8, 5, 1};
    s_we = 0; start = 0; seq_len = 0; s_row = 0; s_col = 0; s_data = 0; p_raddr = 0;
    repeat (3) @(posedge clk); rst_n = 1; @(posedge clk);
    for (int r = 0; r < 3; r++) begin
      int n, cyc, range;
      n = sizes[r];
      range = (r == 0) ? 2048 : 256;   // wide (up to +-4.0) and narrow rows
      foreach (S[i, j]) S[i][j] = $urandom_range(0, 2 * range) - range;
      if (r == 0) S[0][0] = 32767;      // saturated maximum in one row
      for (int i = 0; i < n; i++) for (int j = 0; j < n; j++) begin
        s_we <= 1; s_row <= 16'(i); s_col <= 16'(j); s_data <= fx_t'(S[i][j]); @(posedge clk);
      end
      s_we <= 0; seq_len <= 16'(n); start <= 1; @(posedge clk); start <= 0; cyc = 0;
      while (!done) begin @(posedge clk); cyc++; end
      checks++;
      if (cyc > n * (3 * n + 44) || cyc < 3 * n * n) begin failures++; $display("softmax took %0d", cyc); end
      for (int i = 0; i < n; i++) begin
        int s [], p [];
        real m, tot, psum;
        s = new[n];
        for (int j = 0; j < n; j++) s[j] = S[i][j];
        softmax_row(s, p);
        m = -1.0e9; tot = 0.0; psum = 0.0;
        for (int j = 0; j < n; j++) if (real'(s[j]) / 256.0 > m) m = real'(s[j]) / 256.0;
        for (int j = 0; j < n; j++) tot += $exp(real'(s[j]) / 256.0 - m);
        p_raddr = 16'(i); #1;
        for (int j = 0; j < n; j++) begin
          real pr, er;
          pr = real'(p_rdata[j]) / 256.0;
          er = $exp(real'(s[j]) / 256.0 - m) / tot;
          psum += pr;
          checks += 2;
          if (int'(p_rdata[j]) != p[j]) begin failures++; $display("P[%0d][%0d] %0d exp %0d", i, j, p_rdata[j], p[j]); end
          if (pr - er > 6.0 / 256 || er - pr > 6.0 / 256) begin failures++; $display("P[%0d][%0d] %f real %f", i, j, pr, er); end
        end
        checks++;
        if (psum > 1.0 + real'(n) / 256.0 + 0.02 || psum < 1.0 - real'(n) / 256.0 - 0.02) begin
          failures++; $display("row %0d sums to %f", i, psum);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
