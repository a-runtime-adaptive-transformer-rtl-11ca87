// tb_qk_pm: score module for two head sizes; every streamed score is
// compared with the integer model dot(Q_i, K_j) scaled by 1/sqrt(d_k), each
// (i, j) must appear once, and the real-valued scale must be close to
// 1/sqrt(d_k). The scan takes seq_len^2 cycles after the scale set-up.
module tb_qk_pm;
  import adaptor_pkg::*;
  import tb_ref_pkg::*;
  localparam int DK = 8, SLM = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic         start, busy, done, s_we;
  logic [15:0]  seq_len, dk, q_raddr, k_raddr, s_row, s_col;
  fx_t [DK-1:0] q_rdata, k_rdata;
  fx_t          s_data;

  qk_pm #(.DK(DK)) dut (.*);

  int Q [SLM][DK];
  int K [SLM][DK];
  int seen [SLM][SLM];
  int nsl, ndk, inv;

  always_comb for (int k = 0; k < DK; k++) begin
    q_rdata[k] = fx_t'(Q[q_raddr % SLM][k]);
    k_rdata[k] = fx_t'(K[k_raddr % SLM][k]);
  end

  always @(posedge clk) if (rst_n && s_we) begin
    longint dot;
    int e;
    dot = 0;
    for (int k = 0; k < ndk; k++) dot += longint'(Q[s_row][k]) * K[s_col][k];
    e = score(dot, inv);
    seen[s_row][s_col]++;
    checks++;
    if (int'(s_data) != e) begin failures++; $display("S[%0d][%0d] %0d exp %0d", s_row, s_col, s_data, e); end
  end

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int sizes [2][2];
    sizes = '{'{7, 4}, '{8, 6}};
    start = 0; seq_len = 0; dk = 0;
    repeat (3) @(posedge clk); rst_n = 1; @(posedge clk);
    for (int r = 0; r < 2; r++) begin
      int cyc, first_we;
      real sc;
      nsl = sizes[r][0]; ndk = sizes[r][1];
      inv = score_scale(ndk);
      sc = real'(inv) / 256.0;
      checks++;
      if (sc - 1.0 / $sqrt(real'(ndk)) > 0.01 || 1.0 / $sqrt(real'(ndk)) - sc > 0.01) begin
        failures++; $display("scale %f", sc);
      end
      foreach (Q[i, k]) Q[i][k] = (k < ndk) ? $urandom_range(0, 1023) - 512 : 12345;
      foreach (K[i, k]) K[i][k] = (k < ndk) ? $urandom_range(0, 1023) - 512 : -777;
      foreach (seen[i, j]) seen[i][j] = 0;
      seq_len <= 16'(nsl); dk <= 16'(ndk); start <= 1; @(posedge clk); start <= 0;
      cyc = 0; first_we = -1;
      while (!done) begin @(posedge clk); cyc++; if (s_we && first_we < 0) first_we = cyc; end
      for (int i = 0; i < nsl; i++) for (int j = 0; j < nsl; j++) begin
        checks++;
        if (seen[i][j] != 1) begin failures++; $display("score (%0d,%0d) seen %0d", i, j, seen[i][j]); end
      end
      checks++;
      if (cyc - first_we + 1 != nsl * nsl + 2) begin failures++; $display("scan %0d cycles", cyc - first_we + 1); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
