// tb_load_unit: loads 2-D blocks of floats through the AXI read port from a
// behavioural memory with random stalls, and checks that every (row, col)
// of the block arrives exactly once with the right converted value. A
// second run without stalls checks the one-word-per-clock rate:
// rows*cols + memory latency + converter depth + a few cycles.
module tb_load_unit;
  import adaptor_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic        start, busy, done;
  logic [31:0] base, stride;
  logic [15:0] rows, cols;
  logic [31:0] m_araddr, m_rdata;
  logic [7:0]  m_arlen;
  logic [2:0]  m_arsize;
  logic [1:0]  m_arburst, m_rresp, m_rresp2;
  logic        m_arvalid, m_arready, m_rlast, m_rvalid, m_rready;
  logic        m_arready2, m_rlast2, m_rvalid2;
  logic [31:0] m_rdata2;
  logic        wr_en;
  logic [15:0] wr_row, wr_col;
  fx_t         wr_data;
  logic        stalls;

  logic        a_ready, a_valid, a_last, b_ready, b_valid, b_last;
  logic [31:0] a_data, b_data;
  logic [1:0]  a_resp, b_resp;

  load_unit #(.MAX_OUT(8)) dut (
    .clk, .rst_n, .start, .base, .rows, .cols, .stride, .busy, .done,
    .m_araddr, .m_arlen, .m_arsize, .m_arburst, .m_arvalid, .m_arready,
    .m_rdata, .m_rresp, .m_rlast, .m_rvalid, .m_rready,
    .wr_en, .wr_row, .wr_col, .wr_data);

  tb_axi_mem #(.WORDS(4096), .LAT(4), .STALLS(1)) mem_a (
    .clk, .araddr(m_araddr), .arlen(m_arlen), .arvalid(m_arvalid && stalls), .arready(a_ready),
    .rdata(a_data), .rresp(a_resp), .rlast(a_last), .rvalid(a_valid), .rready(m_rready && stalls));
  tb_axi_mem #(.WORDS(4096), .LAT(4), .STALLS(0)) mem_b (
    .clk, .araddr(m_araddr), .arlen(m_arlen), .arvalid(m_arvalid && !stalls), .arready(b_ready),
    .rdata(b_data), .rresp(b_resp), .rlast(b_last), .rvalid(b_valid), .rready(m_rready && !stalls));

  assign m_arready = stalls ? a_ready : b_ready;
  assign m_rvalid  = stalls ? a_valid : b_valid;
  assign m_rdata   = stalls ? a_data  : b_data;
  assign m_rresp   = stalls ? a_resp  : b_resp;
  assign m_rlast   = stalls ? a_last  : b_last;

  int vals [4096];
  int seen [64][64];

  always @(posedge clk) if (rst_n && wr_en) begin
    int a;
    a = (base >> 2) + wr_row * stride + wr_col;
    seen[wr_row][wr_col]++;
    checks++;
    if (int'(wr_data) != vals[a]) begin
      failures++;
      $display("load (%0d,%0d): got %0d expected %0d", wr_row, wr_col, wr_data, vals[a]);
    end
  end

  task automatic run(input int b, input int r, input int c, input int s, output int cyc);
    for (int i = 0; i < 64; i++) for (int j = 0; j < 64; j++) seen[i][j] = 0;
    base <= 32'(b * 4); rows <= 16'(r); cols <= 16'(c); stride <= 32'(s); start <= 1;
    @(posedge clk); start <= 0;
    cyc = 1;
    while (!done) begin @(posedge clk); cyc++; end
    for (int i = 0; i < r; i++) for (int j = 0; j < c; j++) begin
      checks++;
      if (seen[i][j] != 1) begin failures++; $display("element (%0d,%0d) written %0d times", i, j, seen[i][j]); end
    end
  endtask

  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int cyc;
    start = 0; base = 0; rows = 0; cols = 0; stride = 0; stalls = 1;
    for (int a = 0; a < 4096; a++) begin
      vals[a] = $urandom_range(0, 65535) - 32768;
      mem_a.mem[a] = fx2fp(vals[a]);
      mem_b.mem[a] = fx2fp(vals[a]);
    end
    repeat (3) @(posedge clk); rst_n = 1; @(posedge clk);
    run(100, 5, 7, 11, cyc);
    run(7, 1, 40, 40, cyc);
    run(1000, 20, 33, 50, cyc);
    stalls = 0;
    @(posedge clk);
    run(16, 32, 32, 64, cyc);
    // 1024 words, 4 cycles memory latency, 3 converter stages
    checks++;
    if (cyc > 1024 + 12) begin failures++; $display("throughput: %0d cycles for 1024 words", cyc); end
    $display("no-stall load of 1024 words: %0d cycles", cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
