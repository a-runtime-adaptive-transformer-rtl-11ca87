// tb_sv_pm: attention output O = P V of one head for two sizes. Every
// streamed (row, column, value) is compared with the integer model, each
// element must appear exactly once, and a run must take seq_len*d_k + 2
// cycles from start to done (one output per clock).
module tb_sv_pm;
  import adaptor_pkg::*;
  import tb_ref_pkg::*;
  localparam int SL = 8, DKM = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic         start, busy, done, o_we;
  logic [15:0]  seq_len, dk, p_raddr, vt_raddr, o_row, o_col;
  fx_t [SL-1:0] p_rdata, vt_rdata;
  fx_t          o_data;

  sv_pm #(.SL(SL)) dut (.*);

  int P [SL][SL];
  int VT [DKM][SL];
  int seen [SL][DKM];
  int nsl;

  always_comb for (int k = 0; k < SL; k++) begin
    p_rdata[k]  = fx_t'(P[p_raddr % SL][k]);
    vt_rdata[k] = fx_t'(VT[vt_raddr % DKM][k]);
  end

  always @(posedge clk) if (rst_n && o_we) begin
    longint dot;
    dot = 0;
    for (int k = 0; k < nsl; k++) dot += longint'(P[o_row][k]) * VT[o_col][k];
    seen[o_row][o_col]++;
    checks++;
    if (int'(o_data) != acc2fx(dot)) begin failures++; $display("O[%0d][%0d] %0d exp %0d", o_row, o_col, o_data, acc2fx(dot)); end
  end

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int sizes [2][2];
    sizes = '{'{6, 5}, '{8, 8}};
    start = 0; seq_len = 0; dk = 0;
    repeat (3) @(posedge clk); rst_n = 1; @(posedge clk);
    for (int r = 0; r < 2; r++) begin
      int cyc, ndk;
      nsl = sizes[r][0]; ndk = sizes[r][1];
      foreach (P[i, k]) P[i][k] = (k < nsl) ? $urandom_range(0, 256) : 999;
      foreach (VT[j, k]) VT[j][k] = (k < nsl) ? $urandom_range(0, 4095) - 2048 : 999;
      foreach (seen[i, j]) seen[i][j] = 0;
      seq_len <= 16'(nsl); dk <= 16'(ndk); start <= 1; @(posedge clk); start <= 0; cyc = 0;
      while (!done) begin @(posedge clk); cyc++; end
      checks++;
      if (cyc != nsl * ndk + 2) begin failures++; $display("sv took %0d", cyc); end
      for (int i = 0; i < SL; i++) for (int j = 0; j < DKM; j++) begin
        checks++;
        if (seen[i][j] != ((i < nsl && j < ndk) ? 1 : 0)) begin failures++; $display("O(%0d,%0d) seen %0d", i, j, seen[i][j]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
