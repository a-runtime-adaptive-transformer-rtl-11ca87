// cfg_regs: AXI4-Lite slave with the accelerator's runtime configuration.
//
// The host processor programs the transformer topology here and starts the
// accelerator without any re-synthesis. The seven topology registers are
// the ones the source lists (Sequence, Heads, Layers_enc, Layers_dec,
// Embeddings, Hidden, Out). The control/status word, the two base-address
// registers and the cycle counter are this design's own additions: the
// accelerator needs to know where its data lies and the host needs a
// start/done handshake. Register map (32-bit words, byte addresses):
//   0x00 CTRL    write bit0=1: start (one-cycle pulse)  read: bit0 busy, bit1 done
//   0x04 Sequence     0x08 Heads      0x0C Layers_enc   0x10 Layers_dec
//   0x14 Embeddings   0x18 Hidden     0x1C Out
//   0x20 IN_ADDR (byte address of the input matrix)
//   0x24 WT_ADDR (byte address of layer 0's parameter block)
//   0x28 CYCLES  (read only: clock cycles of the last run)
// done is sticky: set by the accelerator's done pulse, cleared by a start.
// Writes and reads each complete in two cycles; one transaction of each kind
// is handled at a time; WSTRB is ignored (full-word writes only).
module cfg_regs
  import adaptor_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // AXI4-Lite slave
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
  // to / from the accelerator
  output cfg_t        cfg,
  output logic        start,
  input  logic        busy,
  input  logic        done_pulse,
  input  logic [31:0] cycles
);
  logic done_flag;
  logic wr_fire, rd_fire;

  // accept a write when address and data are both present and no response is pending
  assign s_awready = s_awvalid && s_wvalid && !s_bvalid;
  assign s_wready  = s_awready;
  assign wr_fire   = s_awready;
  assign s_arready = s_arvalid && !s_rvalid;
  assign rd_fire   = s_arready;
  assign s_bresp   = 2'b00;
  assign s_rresp   = 2'b00;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg        <= '0;
      start      <= 1'b0;
      done_flag  <= 1'b0;
      s_bvalid   <= 1'b0;
      s_rvalid   <= 1'b0;
      s_rdata    <= '0;
    end else begin
      start <= 1'b0;
      if (done_pulse) done_flag <= 1'b1;
      if (s_bvalid && s_bready) s_bvalid <= 1'b0;
      if (s_rvalid && s_rready) s_rvalid <= 1'b0;
      if (wr_fire) begin
        s_bvalid <= 1'b1;
        case (s_awaddr[7:2])
          6'h00: if (s_wdata[0] && !busy) begin start <= 1'b1; done_flag <= 1'b0; end
          6'h01: cfg.seq_len    <= s_wdata[15:0];
          6'h02: cfg.heads      <= s_wdata[15:0];
          6'h03: cfg.layers_enc <= s_wdata[15:0];
          6'h04: cfg.layers_dec <= s_wdata[15:0];
          6'h05: cfg.d_model    <= s_wdata[15:0];
          6'h06: cfg.hidden     <= s_wdata[15:0];
          6'h07: cfg.n_out      <= s_wdata[15:0];
          6'h08: cfg.in_addr    <= s_wdata;
          6'h09: cfg.wt_addr    <= s_wdata;
          default: ;
        endcase
      end
      if (rd_fire) begin
        s_rvalid <= 1'b1;
        case (s_araddr[7:2])
          6'h00: s_rdata <= {30'd0, done_flag, busy};
          6'h01: s_rdata <= {16'd0, cfg.seq_len};
          6'h02: s_rdata <= {16'd0, cfg.heads};
          6'h03: s_rdata <= {16'd0, cfg.layers_enc};
          6'h04: s_rdata <= {16'd0, cfg.layers_dec};
          6'h05: s_rdata <= {16'd0, cfg.d_model};
          6'h06: s_rdata <= {16'd0, cfg.hidden};
          6'h07: s_rdata <= {16'd0, cfg.n_out};
          6'h08: s_rdata <= cfg.in_addr;
          6'h09: s_rdata <= cfg.wt_addr;
          6'h0A: s_rdata <= cycles;
          default: s_rdata <= 32'hDEAD_BEEF;
        endcase
      end
    end
  end

  // AXI rule: a response stays valid until it is accepted
  property p_bvalid_hold;
    @(posedge clk) disable iff (!rst_n) (s_bvalid && !s_bready) |=> s_bvalid;
  endproperty
  assert property (p_bvalid_hold);
  property p_rvalid_hold;
    @(posedge clk) disable iff (!rst_n) (s_rvalid && !s_rready) |=> (s_rvalid && $stable(s_rdata));
  endproperty
  assert property (p_rvalid_hold);

  logic unused_wstrb;
  assign unused_wstrb = ^s_wstrb;
endmodule
