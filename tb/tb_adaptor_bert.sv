// tb_adaptor_bert: the accelerator at its full synthesis sizes (no
// parameter overrides) running one encoder layer of the BERT-base attention
// shape the design was sized for: embedding 768, 12 heads of 64, with a
// short sequence (8) and hidden width 1024 instead of 3072 to keep the run
// near two minutes (with 3072 it also passes, in 7.4 million cycles and
// about 200 s of simulation). All 3.9 million parameter words of the layer
// stream through the load unit (memory without stalls here to keep the
// simulation short; stalls are covered by the other accelerator
// testbenches). The output is compared element by element with the integer
// model of tb_top_common.svh. The attention and FFN1 loops run at full
// length: 12 attention tiles and 6 x 6 FFN1 tiles; FFN2 and FFN3 run 6 x 2
// and 2 x 6 tiles.
module tb_adaptor_bert;
  import adaptor_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [7:0]  s_awaddr, s_araddr;
  logic        s_awvalid, s_awready, s_wvalid, s_wready, s_bvalid, s_bready;
  logic        s_arvalid, s_arready, s_rvalid, s_rready;
  logic [31:0] s_wdata, s_rdata;
  logic [3:0]  s_wstrb;
  logic [1:0]  s_bresp, s_rresp;
  logic [31:0] m_araddr, m_rdata;
  logic [7:0]  m_arlen;
  logic [2:0]  m_arsize;
  logic [1:0]  m_arburst, m_rresp;
  logic        m_arvalid, m_arready, m_rlast, m_rvalid, m_rready;
  logic        irq_done;
  logic [15:0] res_row, res_col;
  fx_t         res_data;

  adaptor_top dut (.*);

  tb_axi_mem #(.WORDS(4000000), .LAT(4), .STALLS(1'b0)) u_mem (
    .clk, .araddr(m_araddr), .arlen(m_arlen), .arvalid(m_arvalid), .arready(m_arready),
    .rdata(m_rdata), .rresp(m_rresp), .rlast(m_rlast), .rvalid(m_rvalid), .rready(m_rready));

  `include "tb_top_common.svh"

  initial begin
    #2000000000; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    s_awvalid = 0; s_wvalid = 0; s_arvalid = 0; s_bready = 1; s_rready = 1;
    s_awaddr = 0; s_araddr = 0; s_wdata = 0; s_wstrb = 0; res_row = 0; res_col = 0;
    repeat (3) @(posedge clk); rst_n = 1; @(posedge clk);
    run_case(8, 768, 12, 1024, 1);
    checks++;
    if (n_qkv_tiles != 12 || n_f1_tiles != 36 || n_f2_tiles != 12 || n_f3_tiles != 12) begin
      failures++;
      $display("tile counts %0d %0d %0d %0d", n_qkv_tiles, n_f1_tiles, n_f2_tiles, n_f3_tiles);
    end
    check_mechanisms(1, 1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
