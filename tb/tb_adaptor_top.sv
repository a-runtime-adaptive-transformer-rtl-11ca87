// tb_adaptor_top: end-to-end test of the accelerator at reduced synthesis
// sizes (SL=8, D=32, H=4, DK=16, HID=128, tiles 4/8). Three runs with
// different register settings, including a two-layer stack, are checked
// element by element against an integer model of the encoder (tb_top_common.svh).
// External memory responds with random stalls. Counters confirm that
// tiling, several layers, runtime reconfiguration, softmax, layer norm,
// ReLU clamping and memory stalls all happened.
module tb_adaptor_top;
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

  adaptor_top #(.SL(8), .D(32), .H(4), .DK(16), .HID(128), .TSM(4), .TSF(8)) dut (.*);

  tb_axi_mem #(.WORDS(65536), .LAT(6), .STALLS(1'b1)) u_mem (
    .clk, .araddr(m_araddr), .arlen(m_arlen), .arvalid(m_arvalid), .arready(m_arready),
    .rdata(m_rdata), .rresp(m_rresp), .rlast(m_rlast), .rvalid(m_rvalid), .rready(m_rready));

  `include "tb_top_common.svh"

  initial begin
    #50000000; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    s_awvalid = 0; s_wvalid = 0; s_arvalid = 0; s_bready = 1; s_rready = 1;
    s_awaddr = 0; s_araddr = 0; s_wdata = 0; s_wstrb = 0; res_row = 0; res_col = 0;
    repeat (3) @(posedge clk); rst_n = 1; @(posedge clk);
    run_case(6, 32, 4, 64, 2);     // 4 heads of 8, two layers
    run_case(8, 16, 2, 32, 1);     // reconfigured: 2 heads of 8, one layer
    run_case(5, 32, 2, 128, 1);    // 2 heads of 16, full hidden width
    check_mechanisms(3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
