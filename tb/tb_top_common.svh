// tb_top_common.svh: shared body of the two accelerator-level testbenches
// (included inside the testbench module after the DUT and memory are
// declared). It provides AXI4-Lite register access, generation of the input
// sequence and of every layer's parameters in external memory (as IEEE
// floats of exact Q7.8 values), an independent integer model of the
// encoder stack, result comparison, and counters that show each mechanism
// of the accelerator was exercised.

  int checks = 0, failures = 0;

  // ---------------------------------------------------------- mechanism counters
  int n_qkv_tiles = 0, n_f1_tiles = 0, n_f2_tiles = 0, n_f3_tiles = 0;
  int n_softmax = 0, n_ln = 0, n_relu_clamps = 0, n_runs = 0, n_reconfig = 0;
  int n_rvalid_gaps = 0;
  logic [15:0] last_dk = '0, last_d = '0;

  always @(posedge clk) begin
    if (dut.qkv_go) n_qkv_tiles++;
    if (dut.f1_go) n_f1_tiles++;
    if (dut.f2_go) n_f2_tiles++;
    if (dut.f3_go) n_f3_tiles++;
    if (dut.sm_go) n_softmax++;
    if (dut.ln_dn) n_ln++;
    if (dut.f3_bz)
      for (int k = 0; k < $size(dut.f3_x); k++)
        if (dut.f3_x[k] == 0 && dut.f2_y[k] != 0) n_relu_clamps++;
    if (dut.u_load.busy && !m_rvalid) n_rvalid_gaps++;
  end

  // ---------------------------------------------------------- AXI4-Lite access
  task automatic reg_wr(input logic [7:0] a, input logic [31:0] v);
    s_awaddr <= a; s_awvalid <= 1; s_wdata <= v; s_wvalid <= 1; s_wstrb <= 4'hF;
    do @(posedge clk); while (!s_awready);
    s_awvalid <= 0; s_wvalid <= 0;
    do @(posedge clk); while (!s_bvalid);
  endtask

  task automatic reg_rd(input logic [7:0] a, output logic [31:0] v);
    s_araddr <= a; s_arvalid <= 1;
    do @(posedge clk); while (!s_arready);
    s_arvalid <= 0;
    do @(posedge clk); while (!s_rvalid);
    v = s_rdata;
  endtask

  function automatic int rnd(int lo, int hi);
    return lo + int'($urandom_range(0, hi - lo));
  endfunction

  // ---------------------------------------------------------- model helpers
  // Y[i][o] = bias_opt(sat(acc2fx(sum_c A[i][c] * W[o][c]) + b[o])), W at mem word base
  function automatic void lin(input int A[], input int n, input int kin, input int kout,
                              input int W[], input int b[], input bit relu, output int Y[]);
    Y = new[n * kout];
    for (int i = 0; i < n; i++)
      for (int o = 0; o < kout; o++) begin
        longint s;
        int v;
        s = 0;
        for (int c = 0; c < kin; c++) s += longint'(A[i * kin + c]) * W[o * kin + c];
        v = sat16(longint'(acc2fx(s)) + b[o]);
        Y[i * kout + o] = (relu && v < 0) ? 0 : v;
      end
  endfunction

  function automatic void put(input int base, input int v[]);
    foreach (v[k]) u_mem.mem[base + k] = fx2fp(v[k]);
  endfunction

  function automatic void fill(output int v[], input int n, input int lo, input int hi);
    v = new[n];
    foreach (v[k]) v[k] = rnd(lo, hi);
  endfunction

  // one encoder layer of the model, parameters written at word 'base'
  function automatic void model_layer(inout int X[], input int n, input int d, input int hh,
                                      input int hid, input int base);
    int dk, inv;
    int WQ[], WK[], WV[], BQ[], BK[], BV[], WO[], BO[], G1[], BE1[], W1[], B1[], W2[], B2[], G2[], BE2[];
    int Q[], K[], V[], ATT[], F1[], L1[], HH[], F3[];
    int o;
    dk = d / hh;
    inv = score_scale(dk);
    fill(WQ, d * d, -64, 64); fill(WK, d * d, -64, 64); fill(WV, d * d, -64, 64);
    fill(BQ, d, -128, 128); fill(BK, d, -128, 128); fill(BV, d, -128, 128);
    fill(WO, d * d, -64, 64); fill(BO, d, -128, 128);
    fill(G1, d, 192, 320); fill(BE1, d, -64, 64);
    fill(W1, hid * d, -64, 64); fill(B1, hid, -192, 64);
    fill(W2, d * hid, -48, 48); fill(B2, d, -128, 128);
    fill(G2, d, 192, 320); fill(BE2, d, -64, 64);
    o = base;
    put(o, WQ); o += d * d; put(o, WK); o += d * d; put(o, WV); o += d * d;
    put(o, BQ); o += d; put(o, BK); o += d; put(o, BV); o += d;
    put(o, WO); o += d * d; put(o, BO); o += d; put(o, G1); o += d; put(o, BE1); o += d;
    put(o, W1); o += hid * d; put(o, B1); o += hid; put(o, W2); o += hid * d;
    put(o, B2); o += d; put(o, G2); o += d; put(o, BE2);
    // attention
    lin(X, n, d, d, WQ, BQ, 0, Q);
    lin(X, n, d, d, WK, BK, 0, K);
    lin(X, n, d, d, WV, BV, 0, V);
    ATT = new[n * d];
    for (int h = 0; h < hh; h++)
      for (int i = 0; i < n; i++) begin
        int s[], p[];
        s = new[n];
        for (int j = 0; j < n; j++) begin
          longint dot;
          dot = 0;
          for (int k = 0; k < dk; k++) dot += longint'(Q[i * d + h * dk + k]) * K[j * d + h * dk + k];
          s[j] = score(dot, inv);
        end
        softmax_row(s, p);
        for (int k = 0; k < dk; k++) begin
          longint acc;
          acc = 0;
          for (int j = 0; j < n; j++) acc += longint'(p[j]) * V[j * d + h * dk + k];
          ATT[i * d + h * dk + k] = acc2fx(acc);
        end
      end
    // FFN1 + LN1, FFN2 + ReLU, FFN3 + LN2
    lin(ATT, n, d, d, WO, BO, 0, F1);
    L1 = new[n * d];
    for (int i = 0; i < n; i++) begin
      int a[], b[], r[];
      a = new[d]; b = new[d];
      for (int c = 0; c < d; c++) begin a[c] = X[i * d + c]; b[c] = F1[i * d + c]; end
      ln_row(a, b, G1, BE1, r);
      for (int c = 0; c < d; c++) L1[i * d + c] = r[c];
    end
    lin(L1, n, d, hid, W1, B1, 1, HH);
    lin(HH, n, hid, d, W2, B2, 0, F3);
    for (int i = 0; i < n; i++) begin
      int a[], b[], r[];
      a = new[d]; b = new[d];
      for (int c = 0; c < d; c++) begin a[c] = L1[i * d + c]; b[c] = F3[i * d + c]; end
      ln_row(a, b, G2, BE2, r);
      for (int c = 0; c < d; c++) X[i * d + c] = r[c];
    end
  endfunction

  // ---------------------------------------------------------- one accelerator run
  task automatic run_case(input int n, input int d, input int hh, input int hid, input int nl);
    int X[];
    int in_w, wt_w, lsz, cyc;
    logic [31:0] v;
    in_w = 0;
    wt_w = n * d + 16;
    lsz  = 4 * d * d + 2 * hid * d + 9 * d + hid;
    fill(X, n * d, -512, 512);
    put(in_w, X);
    for (int l = 0; l < nl; l++) model_layer(X, n, d, hh, hid, wt_w + l * lsz);
    reg_wr(8'h04, 32'(n));
    reg_wr(8'h08, 32'(hh));
    reg_wr(8'h0C, 32'(nl));
    reg_wr(8'h10, 32'd0);
    reg_wr(8'h14, 32'(d));
    reg_wr(8'h18, 32'(hid));
    reg_wr(8'h1C, 32'(d));
    reg_wr(8'h20, 32'(in_w * 4));
    reg_wr(8'h24, 32'(wt_w * 4));
    reg_wr(8'h00, 32'd1);
    cyc = 0;
    while (!irq_done) begin @(posedge clk); cyc++; end
    n_runs++;
    if (last_d != 0 && (dut.d != last_d || dut.dk != last_dk)) n_reconfig++;
    last_d = dut.d; last_dk = dut.dk;
    repeat (2) @(posedge clk);
    reg_rd(8'h00, v);
    checks++;
    if (v != 32'h2) begin failures++; $display("status %h after run", v); end
    reg_rd(8'h28, v);
    checks++;
    if (v > 32'(cyc) || v + 40 < 32'(cyc)) begin failures++; $display("CYCLES %0d, measured %0d", v, cyc); end
    $display("run n=%0d d=%0d heads=%0d hidden=%0d layers=%0d: %0d cycles", n, d, hh, hid, nl, v);
    for (int i = 0; i < n; i++)
      for (int c = 0; c < d; c++) begin
        res_row = 16'(i); res_col = 16'(c); #1;
        checks++;
        if (int'(res_data) != X[i * d + c]) begin
          failures++;
          if (failures < 20) $display("out[%0d][%0d] %0d expected %0d", i, c, res_data, X[i * d + c]);
        end
      end
  endtask

  task automatic check_mechanisms(input int min_runs, input bit need_stalls = 1'b1);
    int m [string];
    m["qkv tiles"] = n_qkv_tiles; m["ffn1 tiles"] = n_f1_tiles; m["ffn2 tiles"] = n_f2_tiles;
    m["ffn3 tiles"] = n_f3_tiles; m["softmax"] = n_softmax; m["layer norms"] = n_ln;
    m["relu clamps"] = n_relu_clamps;
    if (need_stalls) m["memory stalls"] = u_mem.stall_cycles + n_rvalid_gaps;
    m["runs"] = n_runs >= min_runs ? n_runs : 0;
    if (min_runs > 1) m["runtime reconfigurations"] = n_reconfig;
    foreach (m[k]) begin
      $display("mechanism %s: %0d", k, m[k]);
      checks++;
      if (m[k] == 0) begin failures++; $display("mechanism %s never happened", k); end
    end
  endtask
