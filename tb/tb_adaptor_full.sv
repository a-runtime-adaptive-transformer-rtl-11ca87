// tb_adaptor_full: the accelerator at its full synthesis sizes (SL=128,
// D=768, H=12, DK=96, HID=3072, tiles 64/128, no parameter overrides), run
// with small register settings so that simulation stays short: one layer of
// sequence length 4, embedding 128, two heads of 64 and hidden width 512,
// then a reconfigured run with 4 heads of 32. Results are compared with the
// integer model of tb_top_common.svh and the same mechanism counters are
// checked (one FFN tile per layer at these sizes, so tiling shows up in the
// attention projection: 128/64 = 2 tiles).
module tb_adaptor_full;
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

  tb_axi_mem #(.WORDS(262144), .LAT(6), .STALLS(1'b1)) u_mem (
    .clk, .araddr(m_araddr), .arlen(m_arlen), .arvalid(m_arvalid), .arready(m_arready),
    .rdata(m_rdata), .rresp(m_rresp), .rlast(m_rlast), .rvalid(m_rvalid), .rready(m_rready));

  `include "tb_top_common.svh"

  initial begin
    #200000000; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    s_awvalid = 0; s_wvalid = 0; s_arvalid = 0; s_bready = 1; s_rready = 1;
    s_awaddr = 0; s_araddr = 0; s_wdata = 0; s_wstrb = 0; res_row = 0; res_col = 0;
    repeat (3) @(posedge clk); rst_n = 1; @(posedge clk);
    run_case(4, 128, 2, 512, 1);   // 2 heads of 64
    run_case(3, 128, 4, 512, 1);   // reconfigured: 4 heads of 32
    check_mechanisms(2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
