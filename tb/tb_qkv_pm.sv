// tb_qkv_pm: one head's Q/K/V projection over three column tiles, twice
// (the second pass checks that the first tile restarts the accumulation),
// compared element by element with an integer model, plus the tile latency
// of seq_len*d_k + 2 cycles from start to done.
module tb_qkv_pm;
  import adaptor_pkg::*;
  import tb_ref_pkg::*;
  localparam int SL = 8, DK = 8, TS = 4;
  localparam int NSL = 6, NDK = 5, ND = 12, NT = ND / TS;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic         w_we, b_we, start, first_tile, last_tile, busy, done;
  logic [1:0]   w_sel, b_sel;
  logic [15:0]  w_row, w_col, b_idx, x_row, q_raddr, k_raddr, vt_raddr;
  fx_t          w_data, b_data;
  fx_t [TS-1:0] x_rdata;
  fx_t [DK-1:0] q_rdata, k_rdata;
  fx_t [SL-1:0] vt_rdata;
  int           tile;

  qkv_pm #(.SL(SL), .DK(DK), .TS(TS)) dut (
    .clk, .rst_n, .seq_len(16'(NSL)), .dk(16'(NDK)), .w_we, .w_sel, .w_row, .w_col, .w_data,
    .b_we, .b_sel, .b_idx, .b_data, .start, .first_tile, .last_tile, .busy, .done,
    .x_row, .x_rdata, .q_raddr, .q_rdata, .k_raddr, .k_rdata, .vt_raddr, .vt_rdata);

  int X [NSL][ND];
  int W [3][NDK][ND];
  int B [3][NDK];

  always_comb for (int j = 0; j < TS; j++) x_rdata[j] = fx_t'(X[x_row % NSL][tile * TS + j]);

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    w_we = 0; b_we = 0; start = 0; first_tile = 0; last_tile = 0; tile = 0;
    w_sel = 0; b_sel = 0; w_row = 0; w_col = 0; b_idx = 0; w_data = 0; b_data = 0;
    q_raddr = 0; k_raddr = 0; vt_raddr = 0;
    repeat (3) @(posedge clk); rst_n = 1; @(posedge clk);
    for (int pass = 0; pass < 2; pass++) begin
      foreach (X[i, c]) X[i][c] = $urandom_range(0, 1023) - 512;
      foreach (W[m, k, c]) W[m][k][c] = $urandom_range(0, 255) - 128;
      foreach (B[m, k]) B[m][k] = $urandom_range(0, 511) - 256;
      for (int m = 0; m < 3; m++) for (int k = 0; k < NDK; k++) begin
        b_we <= 1; b_sel <= 2'(m); b_idx <= 16'(k); b_data <= fx_t'(B[m][k]); @(posedge clk);
      end
      b_we <= 0;
      for (int t = 0; t < NT; t++) begin
        int cyc;
        for (int m = 0; m < 3; m++) for (int k = 0; k < NDK; k++) for (int j = 0; j < TS; j++) begin
          w_we <= 1; w_sel <= 2'(m); w_row <= 16'(k); w_col <= 16'(j);
          w_data <= fx_t'(W[m][k][t * TS + j]); @(posedge clk);
        end
        w_we <= 0; tile = t;
        start <= 1; first_tile <= (t == 0); last_tile <= (t == NT - 1);
        @(posedge clk); start <= 0; cyc = 0;
        while (!done) begin @(posedge clk); cyc++; end
        checks++;
        if (cyc != NSL * NDK + 2) begin failures++; $display("tile latency %0d", cyc); end
      end
      for (int i = 0; i < NSL; i++) begin
        q_raddr = 16'(i); k_raddr = 16'(i); #1;
        for (int k = 0; k < NDK; k++) begin
          longint s [3];
          int e [3];
          for (int m = 0; m < 3; m++) begin
            s[m] = 0;
            for (int c = 0; c < ND; c++) s[m] += longint'(X[i][c]) * W[m][k][c];
            e[m] = sat16(longint'(acc2fx(s[m])) + B[m][k]);
          end
          vt_raddr = 16'(k); #1;
          checks += 3;
          if (int'(q_rdata[k]) != e[0]) begin failures++; $display("Q[%0d][%0d] %0d exp %0d", i, k, q_rdata[k], e[0]); end
          if (int'(k_rdata[k]) != e[1]) begin failures++; $display("K[%0d][%0d] %0d exp %0d", i, k, k_rdata[k], e[1]); end
          if (int'(vt_rdata[i]) != e[2]) begin failures++; $display("V[%0d][%0d] %0d exp %0d", i, k, vt_rdata[i], e[2]); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
