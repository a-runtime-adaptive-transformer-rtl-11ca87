// tb_axi_mem: behavioural AXI4 read-only memory standing in for the
// external DRAM/HBM. Single-beat reads, in-order responses after a fixed
// LAT-cycle delay, optional random back-pressure on ARREADY and random
// gaps on RVALID. Contents are written by the testbench through mem[].
module tb_axi_mem #(
  parameter int WORDS  = 1024,
  parameter int LAT    = 4,
  parameter bit STALLS = 1'b1
) (
  input  logic        clk,
  input  logic [31:0] araddr,
  input  logic [7:0]  arlen,
  input  logic        arvalid,
  output logic        arready,
  output logic [31:0] rdata,
  output logic [1:0]  rresp,
  output logic        rlast,
  output logic        rvalid,
  input  logic        rready
);
  logic [31:0] mem [WORDS];
  logic [31:0] q_data [$];
  int          q_due  [$];
  int          now = 0;
  int          reads = 0;
  int          stall_cycles = 0;

  assign rresp = 2'b00;
  assign rlast = rvalid;

  initial begin
    arready = 1'b0; rvalid = 1'b0; rdata = '0;
  end

  always @(posedge clk) begin
    now <= now + 1;
    if (arvalid && arready) begin
      if (araddr[31:2] >= WORDS) $error("tb_axi_mem: address %h out of range", araddr);
      if (arlen != 0) $error("tb_axi_mem: burst length %0d not supported", arlen);
      q_data.push_back(mem[araddr[31:2] % WORDS]);
      q_due.push_back(now + LAT);
      reads <= reads + 1;
    end
    if (rvalid && rready) begin
      void'(q_data.pop_front());
      void'(q_due.pop_front());
    end
    if (arvalid && !arready) stall_cycles <= stall_cycles + 1;
    arready <= STALLS ? ($urandom_range(0, 3) != 0) : 1'b1;
  end

  always @(negedge clk) begin
    if (q_data.size() > 0 && q_due[0] <= now && (!STALLS || $urandom_range(0, 4) != 0)) begin
      rvalid = 1'b1; rdata = q_data[0];
    end else begin
      rvalid = 1'b0;
    end
  end
endmodule
