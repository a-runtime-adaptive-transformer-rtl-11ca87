// adaptor_top: runtime-adaptive transformer encoder accelerator.
//
// The accelerator runs a stack of transformer encoder layers whose shape
// (sequence length, heads, embedding and hidden dimension, layer count) is
// written into registers at run time, on hardware whose tile sizes and
// maximum dimensions are fixed at synthesis. One encoder layer is
//   A   = concat_h softmax(Q_h K_h^T / sqrt(d_k)) V_h,  Q_h = X W_Q,h + b_q,h ...
//   L1  = LN1(X + A W_O + b_O)                   (FFN1, then LN)
//   H   = ReLU(L1 W_1 + b_1)                     (FFN2)
//   X'  = LN2(L1 + H W_2 + b_2)                  (FFN3, then LN)
// and X' is written back over X, so the next layer reads its input from the
// same buffer. Every processing module starts only after the previous one
// has finished; within a module all work is pipelined at one result per
// clock with a wide unrolled dot product, as in the source.
//
// Blocks: cfg_regs (AXI4-Lite registers), load_unit (AXI4 read master plus
// float-to-fixed conversion, shared by all loads), H_MAX attention heads
// each made of qkv_pm, qk_pm, softmax_unit and sv_pm, three ffn_pm
// instances (FFN1, FFN2, FFN3), bias_add instances for the FFN biases and
// ReLU, and one layer_norm unit used for both normalisations. The
// controller below sequences them.
//
// Sequence per layer (state names in brackets):
//   [LX]   layer 0 only: load X (seq_len x d) from IN_ADDR
//   [LB]   load b_q, b_k, b_v of every active head
//   for each of d/TS_MHA attention tiles t:
//     [LW]  load the d_k x TS_MHA tile t of W_Q, W_K, W_V of every head
//     [QKV] all heads accumulate X[:, tile t] x W tile
//   [QK] [SM] [SV]   scores, softmax, S x V; heads run in parallel
//   [LBO]  load b_O;  for each output tile ct, input tile rt: [LW1] [F1]
//   [LG1] [LBE1] load LN1 gamma/beta; [LN1] -> L1 buffer
//   [LB1]  load b_1;  tiles of W_1: [LW2] [F2]
//   [LB2]  load b_2;  tiles of W_2: [LW3] [F3] (input: ReLU(FFN2 + b_1))
//   [LG2] [LBE2] [LN2] -> X buffer;  next layer or done
// Parameter layout in external memory (32-bit floats, one block per layer,
// starting at WT_ADDR, matrices stored [output][input] row-major):
//   W_Q W_K W_V (d x d each), b_q b_k b_v (d), W_O (d x d), b_O, gamma1,
//   beta1 (d), W_1 (hidden x d), b_1 (hidden), W_2 (d x hidden), b_2,
//   gamma2, beta2 (d).
// This layout, the single shared AXI read port and the result read port
// are this design's choices. Runtime limits: seq_len <= SL, d_model <= D
// and a multiple of TS_FFN (hence of TS_MHA), heads <= H with
// d_model/heads <= DK, hidden <= HID and a multiple of 4*TS_FFN.
// The decoder-layer count and the output count registers are stored but
// not used: the source gives no hardware for decoder layers.
module adaptor_top
  import adaptor_pkg::*;
#(
  parameter int SL      = SL_MAX,
  parameter int D       = D_MAX,
  parameter int H       = H_MAX,
  parameter int DK      = DK_MAX,
  parameter int HID     = HID_MAX,
  parameter int TSM     = TS_MHA,
  parameter int TSF     = TS_FFN,
  parameter int MAX_OUT = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  // AXI4-Lite control slave
  input  logic [7:0]  s_awaddr,
  input  logic        s_awvalid,
  output logic        s_awready,
  input  logic [31:0] s_wdata,
  input  logic [3:0]  s_wstrb,
  input  logic        s_wvalid,
  output logic        s_wready,
  output logic [1:0]  s_bresp,
  output logic        s_bvalid,
  input  logic        s_bready,
  input  logic [7:0]  s_araddr,
  input  logic        s_arvalid,
  output logic        s_arready,
  output logic [31:0] s_rdata,
  output logic [1:0]  s_rresp,
  output logic        s_rvalid,
  input  logic        s_rready,
  // AXI4 read master to external memory
  output logic [31:0] m_araddr,
  output logic [7:0]  m_arlen,
  output logic [2:0]  m_arsize,
  output logic [1:0]  m_arburst,
  output logic        m_arvalid,
  input  logic        m_arready,
  input  logic [31:0] m_rdata,
  input  logic [1:0]  m_rresp,
  input  logic        m_rlast,
  input  logic        m_rvalid,
  output logic        m_rready,
  // completion and result read port
  output logic        irq_done,
  input  logic [15:0] res_row,
  input  logic [15:0] res_col,
  output fx_t         res_data
);
  localparam int TSF4 = 4 * TSF;

  typedef enum logic [4:0] {
    S_IDLE, S_LX, S_LB, S_LW, S_QKV, S_QK, S_SM, S_SV,
    S_LBO, S_LW1, S_F1, S_LG1, S_LBE1, S_LN1,
    S_LB1, S_LW2, S_F2, S_LB2, S_LW3, S_F3, S_LG2, S_LBE2, S_LN2,
    S_NEXT
  } st_t;

  // ---------------------------------------------------------------- config
  cfg_t        cfg;
  logic        go, busy, done_p;
  logic [31:0] cycles;

  cfg_regs u_regs (
    .clk, .rst_n,
    .s_awaddr, .s_awvalid, .s_awready, .s_wdata, .s_wstrb, .s_wvalid, .s_wready,
    .s_bresp, .s_bvalid, .s_bready, .s_araddr, .s_arvalid, .s_arready,
    .s_rdata, .s_rresp, .s_rvalid, .s_rready,
    .cfg, .start(go), .busy, .done_pulse(done_p), .cycles);

  // ---------------------------------------------------------------- state
  st_t         st;
  logic        ph;                  // 0: issue the step, 1: wait for it
  logic [15:0] sl, d, hh, dk, hid, nlay;
  logic [15:0] nt_m, nt_f, nt_h;    // tile counts
  logic [15:0] hd, mm, t, rt, ct, layer;
  logic [31:0] lbase;               // byte address of this layer's parameters
  logic [31:0] d2, hd_sz;

  // element offsets inside a layer's parameter block
  logic [31:0] o_wq, o_bq, o_wo, o_bo, o_g1, o_be1, o_w1, o_b1, o_w2, o_b2, o_g2, o_be2, o_end;
  always_comb begin
    o_wq  = 32'd0;
    o_bq  = 3 * d2;
    o_wo  = o_bq + 3 * 32'(d);
    o_bo  = o_wo + d2;
    o_g1  = o_bo + 32'(d);
    o_be1 = o_g1 + 32'(d);
    o_w1  = o_be1 + 32'(d);
    o_b1  = o_w1 + hd_sz;
    o_w2  = o_b1 + 32'(hid);
    o_b2  = o_w2 + hd_sz;
    o_g2  = o_b2 + 32'(d);
    o_be2 = o_g2 + 32'(d);
    o_end = o_be2 + 32'(d);
  end

  // ---------------------------------------------------------------- loader
  logic        ld_start, ld_busy, ld_done, ld_we;
  logic [31:0] ld_off, ld_base, ld_stride;
  logic [15:0] ld_rows, ld_cols, ld_row, ld_col;
  fx_t         ld_data;
  logic        is_load;

  always_comb begin
    is_load = 1'b1;
    ld_off = '0; ld_rows = 16'd1; ld_cols = d; ld_stride = 32'(d);
    ld_base = '0;
    case (st)
      S_LX:  begin ld_rows = sl; end
      S_LB:  begin ld_off = o_bq + 32'(mm) * 32'(d) + 32'(hd) * 32'(dk); ld_cols = dk; end
      S_LW:  begin ld_off = o_wq + 32'(mm) * d2 + 32'(hd) * 32'(dk) * 32'(d) + 32'(t) * TSM;
                   ld_rows = dk; ld_cols = 16'(TSM); end
      S_LBO: ld_off = o_bo;
      S_LW1: begin ld_off = o_wo + 32'(ct) * TSF * 32'(d) + 32'(rt) * TSF;
                   ld_rows = 16'(TSF); ld_cols = 16'(TSF); end
      S_LG1: ld_off = o_g1;
      S_LBE1: ld_off = o_be1;
      S_LB1: begin ld_off = o_b1; ld_cols = hid; end
      S_LW2: begin ld_off = o_w1 + 32'(ct) * TSF4 * 32'(d) + 32'(rt) * TSF;
                   ld_rows = 16'(TSF4); ld_cols = 16'(TSF); end
      S_LB2: ld_off = o_b2;
      S_LW3: begin ld_off = o_w2 + 32'(ct) * TSF * 32'(hid) + 32'(rt) * TSF4;
                   ld_rows = 16'(TSF); ld_cols = 16'(TSF4); ld_stride = 32'(hid); end
      S_LG2: ld_off = o_g2;
      S_LBE2: ld_off = o_be2;
      default: is_load = 1'b0;
    endcase
    ld_base = (st == S_LX) ? cfg.in_addr : lbase + {ld_off[29:0], 2'b00};
  end

  load_unit #(.MAX_OUT(MAX_OUT)) u_load (
    .clk, .rst_n, .start(ld_start), .base(ld_base), .rows(ld_rows), .cols(ld_cols),
    .stride(ld_stride), .busy(ld_busy), .done(ld_done),
    .m_araddr, .m_arlen, .m_arsize, .m_arburst, .m_arvalid, .m_arready,
    .m_rdata, .m_rresp, .m_rlast, .m_rvalid, .m_rready,
    .wr_en(ld_we), .wr_row(ld_row), .wr_col(ld_col), .wr_data(ld_data));

  // ---------------------------------------------------------------- buffers
  fx_t xin  [SL][D];    // layer input, and output of LN2
  fx_t att  [SL][D];    // concatenated attention heads
  fx_t l1   [SL][D];    // output of LN1
  fx_t bo   [D];
  fx_t b1   [HID];
  fx_t b2   [D];

  // ---------------------------------------------------------------- heads
  logic [H-1:0] h_act;
  logic         qkv_go, qk_go, sm_go, sv_go;
  logic [H-1:0] qkv_dn, qk_dn, sm_dn, sv_dn;
  logic [15:0]  x_row [H];
  fx_t [TSM-1:0] x_tile;
  logic         sv_we  [H];
  logic [15:0]  sv_row [H];
  logic [15:0]  sv_col [H];
  fx_t          sv_dat [H];

  always_comb begin
    for (int j = 0; j < TSM; j++) x_tile[j] = xin[x_row[0]][32'(t) * TSM + j];
  end

  for (genvar g = 0; g < H; g++) begin : g_head
    logic         busy_qkv, busy_qk, busy_sm, busy_sv;
    logic [15:0]  q_a, k_a, vt_a, p_a, vt_a2;
    fx_t [DK-1:0] q_d, k_d;
    fx_t [SL-1:0] vt_d, p_d;
    logic         s_we;
    logic [15:0]  s_row, s_col;
    fx_t          s_dat;

    assign h_act[g] = (16'(g) < hh);

    qkv_pm #(.SL(SL), .DK(DK), .TS(TSM)) u_qkv (
      .clk, .rst_n, .seq_len(sl), .dk,
      .w_we(ld_we && st == S_LW && hd == 16'(g)), .w_sel(mm[1:0]), .w_row(ld_row),
      .w_col(ld_col), .w_data(ld_data),
      .b_we(ld_we && st == S_LB && hd == 16'(g)), .b_sel(mm[1:0]), .b_idx(ld_col),
      .b_data(ld_data),
      .start(qkv_go && h_act[g]), .first_tile(t == 0), .last_tile(t == nt_m - 1'b1),
      .busy(busy_qkv), .done(qkv_dn[g]),
      .x_row(x_row[g]), .x_rdata(x_tile),
      .q_raddr(q_a), .q_rdata(q_d), .k_raddr(k_a), .k_rdata(k_d),
      .vt_raddr(vt_a), .vt_rdata(vt_d));

    qk_pm #(.DK(DK)) u_qk (
      .clk, .rst_n, .seq_len(sl), .dk, .start(qk_go && h_act[g]),
      .busy(busy_qk), .done(qk_dn[g]),
      .q_raddr(q_a), .q_rdata(q_d), .k_raddr(k_a), .k_rdata(k_d),
      .s_we, .s_row, .s_col, .s_data(s_dat));

    softmax_unit #(.SL(SL)) u_sm (
      .clk, .rst_n, .seq_len(sl), .s_we, .s_row, .s_col, .s_data(s_dat),
      .start(sm_go && h_act[g]), .busy(busy_sm), .done(sm_dn[g]),
      .p_raddr(p_a), .p_rdata(p_d));

    sv_pm #(.SL(SL)) u_sv (
      .clk, .rst_n, .seq_len(sl), .dk, .start(sv_go && h_act[g]),
      .busy(busy_sv), .done(sv_dn[g]),
      .p_raddr(p_a), .p_rdata(p_d), .vt_raddr(vt_a), .vt_rdata(vt_d),
      .o_we(sv_we[g]), .o_row(sv_row[g]), .o_col(sv_col[g]), .o_data(sv_dat[g]));

    logic unused_h;
    assign unused_h = ^{busy_qkv, busy_qk, busy_sm, busy_sv, vt_a2};
    assign vt_a2 = '0;
  end

  // ---------------------------------------------------------------- FFN
  logic          f1_go, f2_go, f3_go, f1_dn, f2_dn, f3_dn, f1_bz, f2_bz, f3_bz;
  logic [15:0]   f1_xr, f2_xr, f3_xr;
  fx_t [TSF-1:0] f1_x, f2_x;
  fx_t [TSF4-1:0] f3_x, f2_y;
  fx_t [0:0]     f1_y, f3_y;
  logic [15:0]   ln_row, ln_col;
  logic          ln_go, ln_dn, ln_bz, ln_owe;
  logic [15:0]   ln_orow, ln_ocol;
  fx_t           ln_odat, ln_a, ln_b, f1_yb, f3_yb;
  logic [15:0]   f2_ycol;

  always_comb begin
    for (int k = 0; k < TSF; k++) begin
      f1_x[k] = att[f1_xr][32'(rt) * TSF + k];
      f2_x[k] = l1[f2_xr][32'(rt) * TSF + k];
    end
  end
  assign f2_ycol = 16'(32'(rt) * TSF4);

  for (genvar k = 0; k < TSF4; k++) begin : g_relu
    bias_add u_ba3 (.in_v(f2_y[k]), .bias(b1[32'(rt) * TSF4 + k]), .relu_en(1'b1), .out_v(f3_x[k]));
  end

  ffn_pm #(.SL(SL), .KT(TSF), .JT(TSF), .DOUT(D), .YW(1)) u_ffn1 (
    .clk, .rst_n, .seq_len(sl),
    .w_we(ld_we && st == S_LW1), .w_j(ld_row), .w_k(ld_col), .w_data(ld_data),
    .start(f1_go), .first(rt == 0), .col_base(16'(32'(ct) * TSF)), .busy(f1_bz), .done(f1_dn),
    .x_row(f1_xr), .x_rdata(f1_x), .y_row(ln_row), .y_col(ln_col), .y_rdata(f1_y));

  ffn_pm #(.SL(SL), .KT(TSF), .JT(TSF4), .DOUT(HID), .YW(TSF4)) u_ffn2 (
    .clk, .rst_n, .seq_len(sl),
    .w_we(ld_we && st == S_LW2), .w_j(ld_row), .w_k(ld_col), .w_data(ld_data),
    .start(f2_go), .first(rt == 0), .col_base(16'(32'(ct) * TSF4)), .busy(f2_bz), .done(f2_dn),
    .x_row(f2_xr), .x_rdata(f2_x), .y_row(f3_xr), .y_col(f2_ycol), .y_rdata(f2_y));

  ffn_pm #(.SL(SL), .KT(TSF4), .JT(TSF), .DOUT(D), .YW(1)) u_ffn3 (
    .clk, .rst_n, .seq_len(sl),
    .w_we(ld_we && st == S_LW3), .w_j(ld_row), .w_k(ld_col), .w_data(ld_data),
    .start(f3_go), .first(rt == 0), .col_base(16'(32'(ct) * TSF)), .busy(f3_bz), .done(f3_dn),
    .x_row(f3_xr), .x_rdata(f3_x), .y_row(ln_row), .y_col(ln_col), .y_rdata(f3_y));

  // FFN1 / FFN3 output biases, then residual + LN
  bias_add u_ba_o (.in_v(f1_y[0]), .bias(bo[ln_col]), .relu_en(1'b0), .out_v(f1_yb));
  bias_add u_ba_2 (.in_v(f3_y[0]), .bias(b2[ln_col]), .relu_en(1'b0), .out_v(f3_yb));
  assign ln_a = (st == S_LN2) ? l1[ln_row][ln_col] : xin[ln_row][ln_col];
  assign ln_b = (st == S_LN2) ? f3_yb : f1_yb;

  layer_norm #(.D(D)) u_ln (
    .clk, .rst_n, .seq_len(sl), .d_model(d),
    .g_we(ld_we && (st == S_LG1 || st == S_LG2)), .be_we(ld_we && (st == S_LBE1 || st == S_LBE2)),
    .p_idx(ld_col), .p_data(ld_data),
    .start(ln_go), .busy(ln_bz), .done(ln_dn),
    .in_row(ln_row), .in_col(ln_col), .in_a(ln_a), .in_b(ln_b),
    .o_we(ln_owe), .o_row(ln_orow), .o_col(ln_ocol), .o_data(ln_odat));

  // ---------------------------------------------------------------- buffer writes
  always_ff @(posedge clk) begin
    if (ld_we && st == S_LX)  xin[ld_row][ld_col] <= ld_data;
    if (ld_we && st == S_LBO) bo[ld_col] <= ld_data;
    if (ld_we && st == S_LB1) b1[ld_col] <= ld_data;
    if (ld_we && st == S_LB2) b2[ld_col] <= ld_data;
    for (int g = 0; g < H; g++)
      if (sv_we[g]) att[sv_row[g]][32'(g) * 32'(dk) + 32'(sv_col[g])] <= sv_dat[g];
    if (ln_owe && st == S_LN1) l1[ln_orow][ln_ocol]  <= ln_odat;
    if (ln_owe && st == S_LN2) xin[ln_orow][ln_ocol] <= ln_odat;
  end

  assign res_data = xin[res_row][res_col];

  // ---------------------------------------------------------------- controller
  logic step_done;
  always_comb begin
    case (st)
      S_QKV:   step_done = qkv_dn[0];
      S_QK:    step_done = qk_dn[0];
      S_SM:    step_done = sm_dn[0];
      S_SV:    step_done = sv_dn[0];
      S_F1:    step_done = f1_dn;
      S_F2:    step_done = f2_dn;
      S_F3:    step_done = f3_dn;
      S_LN1, S_LN2: step_done = ln_dn;
      default: step_done = ld_done;
    endcase
  end

  logic issue;
  assign issue    = (st != S_IDLE) && (st != S_NEXT) && !ph;
  assign ld_start = issue && is_load;
  assign qkv_go   = issue && st == S_QKV;
  assign qk_go    = issue && st == S_QK;
  assign sm_go    = issue && st == S_SM;
  assign sv_go    = issue && st == S_SV;
  assign f1_go    = issue && st == S_F1;
  assign f2_go    = issue && st == S_F2;
  assign f3_go    = issue && st == S_F3;
  assign ln_go    = issue && (st == S_LN1 || st == S_LN2);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; ph <= 1'b0; busy <= 1'b0; done_p <= 1'b0; cycles <= '0;
      sl <= '0; d <= '0; hh <= '0; dk <= '0; hid <= '0; nlay <= '0;
      nt_m <= '0; nt_f <= '0; nt_h <= '0; d2 <= '0; hd_sz <= '0;
      hd <= '0; mm <= '0; t <= '0; rt <= '0; ct <= '0; layer <= '0; lbase <= '0;
    end else begin
      done_p <= 1'b0;
      if (busy) cycles <= cycles + 1'b1;
      if (issue) ph <= 1'b1;
      if (st == S_IDLE) begin
        if (go) begin
          sl <= cfg.seq_len; d <= cfg.d_model; hh <= cfg.heads; hid <= cfg.hidden;
          dk <= cfg.d_model / cfg.heads; nlay <= cfg.layers_enc;
          nt_m <= cfg.d_model / 16'(TSM); nt_f <= cfg.d_model / 16'(TSF);
          nt_h <= cfg.hidden / 16'(TSF4);
          d2 <= 32'(cfg.d_model) * 32'(cfg.d_model);
          hd_sz <= 32'(cfg.hidden) * 32'(cfg.d_model);
          lbase <= cfg.wt_addr; layer <= '0; hd <= '0; mm <= '0; t <= '0; rt <= '0; ct <= '0;
          busy <= 1'b1; cycles <= '0; ph <= 1'b0;
          st <= S_LX;
        end
      end else if (st == S_NEXT) begin
        if (layer == nlay - 1'b1) begin
          st <= S_IDLE; busy <= 1'b0; done_p <= 1'b1;
        end else begin
          layer <= layer + 1'b1;
          lbase <= lbase + {o_end[29:0], 2'b00};
          st <= S_LB;
        end
      end else if (ph && step_done) begin
        ph <= 1'b0;
        case (st)
          S_LX: st <= S_LB;
          S_LB, S_LW: begin                         // walk heads x {Q, K, V}
            if (mm == 2) begin
              mm <= '0;
              if (hd == hh - 1'b1) begin hd <= '0; st <= (st == S_LB) ? S_LW : S_QKV; end
              else hd <= hd + 1'b1;
            end else mm <= mm + 1'b1;
          end
          S_QKV: if (t == nt_m - 1'b1) begin t <= '0; st <= S_QK; end
                 else begin t <= t + 1'b1; st <= S_LW; end
          S_QK:  st <= S_SM;
          S_SM:  st <= S_SV;
          S_SV:  st <= S_LBO;
          S_LBO: st <= S_LW1;
          S_LW1: st <= S_F1;
          S_F1, S_F2, S_F3: begin                   // output tile ct, input tile rt
            if (rt == ((st == S_F3) ? nt_h : nt_f) - 1'b1) begin
              rt <= '0;
              if (ct == ((st == S_F2) ? nt_h : nt_f) - 1'b1) begin
                ct <= '0;
                st <= (st == S_F1) ? S_LG1 : (st == S_F2) ? S_LB2 : S_LG2;
              end else begin
                ct <= ct + 1'b1;
                st <= (st == S_F1) ? S_LW1 : (st == S_F2) ? S_LW2 : S_LW3;
              end
            end else begin
              rt <= rt + 1'b1;
              st <= (st == S_F1) ? S_LW1 : (st == S_F2) ? S_LW2 : S_LW3;
            end
          end
          S_LG1:  st <= S_LBE1;
          S_LBE1: st <= S_LN1;
          S_LN1:  st <= S_LB1;
          S_LB1:  st <= S_LW2;
          S_LW2:  st <= S_F2;
          S_LB2:  st <= S_LW3;
          S_LW3:  st <= S_F3;
          S_LG2:  st <= S_LBE2;
          S_LBE2: st <= S_LN2;
          S_LN2:  st <= S_NEXT;
          default: st <= S_IDLE;
        endcase
      end
    end
  end

  assign irq_done = done_p;

  // all active heads run in lock step: head 0's done stands for all
  assert property (@(posedge clk) disable iff (!rst_n) qkv_dn[0] |-> ((qkv_dn & h_act) == h_act));
  assert property (@(posedge clk) disable iff (!rst_n) sv_dn[0]  |-> ((sv_dn & h_act) == h_act));

  logic unused;
  assign unused = ^{ld_busy, f1_bz, f2_bz, f3_bz, ln_bz, qk_dn, sm_dn, cfg.layers_dec, cfg.n_out,
                    o_wq[0], ld_off[31:30], o_end[31:30]};
endmodule
