// tb_cfg_regs: AXI4-Lite writes and read-back of every register, the start
// pulse, start ignored while busy, the sticky done flag and the cycle count.
module tb_cfg_regs;
  import adaptor_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [7:0]  s_awaddr, s_araddr;
  logic        s_awvalid, s_awready, s_wvalid, s_wready, s_bvalid, s_bready;
  logic        s_arvalid, s_arready, s_rvalid, s_rready;
  logic [31:0] s_wdata, s_rdata;
  logic [3:0]  s_wstrb;
  logic [1:0]  s_bresp, s_rresp;
  cfg_t        cfg;
  logic        start, busy, done_pulse;
  logic [31:0] cycles;
  int          starts = 0;

  cfg_regs dut (.*);

  always @(posedge clk) if (rst_n && start) starts++;

  task automatic wr(input logic [7:0] a, input logic [31:0] v);
    s_awaddr <= a; s_awvalid <= 1; s_wdata <= v; s_wvalid <= 1; s_wstrb <= 4'hF;
    do @(posedge clk); while (!(s_awready));
    s_awvalid <= 0; s_wvalid <= 0;
    do @(posedge clk); while (!s_bvalid);
  endtask

  task automatic rd(input logic [7:0] a, output logic [31:0] v);
    s_araddr <= a; s_arvalid <= 1;
    do @(posedge clk); while (!s_arready);
    s_arvalid <= 0;
    do @(posedge clk); while (!s_rvalid);
    v = s_rdata;
  endtask

  task automatic chk(input string what, input logic [31:0] got, input logic [31:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("%s: got %h expected %h", what, got, exp); end
  endtask

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [31:0] v;
    logic [31:0] vals [10];
    s_awvalid = 0; s_wvalid = 0; s_arvalid = 0; s_bready = 1; s_rready = 1;
    s_awaddr = 0; s_araddr = 0; s_wdata = 0; s_wstrb = 0;
    busy = 0; done_pulse = 0; cycles = 32'd12345;
    repeat (3) @(posedge clk); rst_n = 1;
    vals = '{0, 64, 12, 12, 0, 768, 3072, 2, 32'h1000_0000, 32'h2000_0000};
    for (int r = 1; r < 10; r++) wr(8'(4*r), vals[r]);
    for (int r = 1; r < 10; r++) begin
      rd(8'(4*r), v);
      chk($sformatf("reg %0d", r), v, (r >= 8) ? vals[r] : {16'd0, vals[r][15:0]});
    end
    chk("cfg.seq_len", 32'(cfg.seq_len), 64);
    chk("cfg.heads", 32'(cfg.heads), 12);
    chk("cfg.layers_enc", 32'(cfg.layers_enc), 12);
    chk("cfg.d_model", 32'(cfg.d_model), 768);
    chk("cfg.hidden", 32'(cfg.hidden), 3072);
    chk("cfg.n_out", 32'(cfg.n_out), 2);
    chk("cfg.in_addr", cfg.in_addr, 32'h1000_0000);
    chk("cfg.wt_addr", cfg.wt_addr, 32'h2000_0000);
    rd(8'h28, v); chk("cycles", v, 12345);
    // start
    wr(8'h00, 1); repeat (2) @(posedge clk);
    chk("one start pulse", 32'(starts), 1);
    busy = 1;
    rd(8'h00, v); chk("status busy", v, 32'h1);
    wr(8'h00, 1); repeat (2) @(posedge clk);   // ignored while busy
    chk("start ignored while busy", 32'(starts), 1);
    @(posedge clk); busy <= 0; done_pulse <= 1; @(posedge clk); done_pulse <= 0;
    rd(8'h00, v); chk("status done", v, 32'h2);
    rd(8'h00, v); chk("done sticky", v, 32'h2);
    wr(8'h00, 1); repeat (2) @(posedge clk);
    chk("second start", 32'(starts), 2);
    rd(8'h00, v); chk("done cleared by start", v, 32'h0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
