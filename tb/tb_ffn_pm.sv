// tb_ffn_pm: a tiled linear layer Y = X W^T with 2 input tiles x 2 output
// tiles (KT=4, JT=8, 16 outputs), run twice with fresh data so that 'first'
// must clear the old sums. The result is read two columns at a time
// (YW=2) and compared with the integer model; each tile must take
// seq_len*JT + 2 cycles.
module tb_ffn_pm;
  import adaptor_pkg::*;
  import tb_ref_pkg::*;
  localparam int SL = 8, KT = 4, JT = 8, DOUT = 16, YW = 2;
  localparam int NSL = 5, NIN = 8, NOUT = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic         w_we, start, first, busy, done;
  logic [15:0]  seq_len, w_j, w_k, col_base, x_row, y_row, y_col;
  fx_t          w_data;
  fx_t [KT-1:0] x_rdata;
  fx_t [YW-1:0] y_rdata;
  int           rt;

  ffn_pm #(.SL(SL), .KT(KT), .JT(JT), .DOUT(DOUT), .YW(YW)) dut (.*);

  int X [NSL][NIN];
  int W [NOUT][NIN];

  always_comb for (int k = 0; k < KT; k++) x_rdata[k] = fx_t'(X[x_row % NSL][rt * KT + k]);

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    w_we = 0; start = 0; first = 0; seq_len = 16'(NSL); w_j = 0; w_k = 0; w_data = 0;
    col_base = 0; y_row = 0; y_col = 0; rt = 0;
    repeat (3) @(posedge clk); rst_n = 1; @(posedge clk);
    for (int pass = 0; pass < 2; pass++) begin
      foreach (X[i, k]) X[i][k] = $urandom_range(0, 2047) - 1024;
      foreach (W[j, k]) W[j][k] = $urandom_range(0, 511) - 256;
      if (pass == 1) X[0] = '{32767, 32767, 32767, 32767, 32767, 32767, 32767, 32767};
      if (pass == 1) W[0] = '{32767, 32767, 32767, 32767, 32767, 32767, 32767, 32767};
      for (int ct = 0; ct < NOUT / JT; ct++)
        for (int r = 0; r < NIN / KT; r++) begin
          int cyc;
          for (int j = 0; j < JT; j++) for (int k = 0; k < KT; k++) begin
            w_we <= 1; w_j <= 16'(j); w_k <= 16'(k); w_data <= fx_t'(W[ct * JT + j][r * KT + k]);
            @(posedge clk);
          end
          w_we <= 0; rt = r;
          start <= 1; first <= (r == 0); col_base <= 16'(ct * JT); @(posedge clk); start <= 0;
          cyc = 0;
          while (!done) begin @(posedge clk); cyc++; end
          checks++;
          if (cyc != NSL * JT + 2) begin failures++; $display("tile took %0d", cyc); end
        end
      for (int i = 0; i < NSL; i++)
        for (int c = 0; c < NOUT; c += YW) begin
          y_row = 16'(i); y_col = 16'(c); #1;
          for (int r = 0; r < YW; r++) begin
            longint s;
            s = 0;
            for (int k = 0; k < NIN; k++) s += longint'(X[i][k]) * W[c + r][k];
            checks++;
            if (int'(y_rdata[r]) != acc2fx(s)) begin
              failures++; $display("Y[%0d][%0d] %0d exp %0d", i, c + r, y_rdata[r], acc2fx(s));
            end
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
