// load_unit: AXI4 read master that moves one 2-D block of parameters or
// activations from external memory into an on-chip buffer.
//
// The source has three families of loaders (weights, inputs, biases), each
// a pair of nested loops with the inner loop pipelined at one word per
// cycle, reading 32-bit floats over an AXI master port and converting them
// to fixed point. This unit is that loop nest in hardware, shared by all
// three families: the controller gives it a base byte address, a number of
// rows and columns and the row stride (in words) of the block in memory;
// the unit reads word (r, c) from base + 4*(r*stride + c) and emits
// (r, c, value) on its write port, where the controller routes it to the
// right buffer (an attention head's W_Q/W_K/W_V tile, an FFN weight tile,
// the input BRAM, a bias register file or the LN gamma/beta registers).
// Interface: start pulse with the descriptor; done pulses one cycle after
// the last word is written. AXI side: single-beat INCR reads (ARLEN=0),
// up to MAX_OUT outstanding, in-order responses, RREADY always high, so a
// block streams at one word per clock once the memory latency is covered.
// Every word spends three cycles in fp2fix before its write. Serving all
// three families from one AXI port, one block at a time, is this design's
// choice; the source gives each family its own unit and ports.
module load_unit
  import adaptor_pkg::*;
#(
  parameter int MAX_OUT = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  // descriptor
  input  logic        start,
  input  logic [31:0] base,
  input  logic [15:0] rows,
  input  logic [15:0] cols,
  input  logic [31:0] stride,
  output logic        busy,
  output logic        done,
  // AXI4 read master
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
  // buffer write port
  output logic        wr_en,
  output logic [15:0] wr_row,
  output logic [15:0] wr_col,
  output fx_t         wr_data
);
  localparam int OW = $clog2(MAX_OUT+1);

  logic [15:0] ar_row, ar_col, r_row, r_col, n_rows, n_cols;
  logic [31:0] row_base, stride_b;
  logic        issuing;
  logic [OW-1:0] outstanding;
  logic        ar_fire, r_fire, r_last_elem;

  // side band travelling with the converter pipeline
  logic [15:0] sb_row [3];
  logic [15:0] sb_col [3];
  logic [2:0]  sb_last;

  logic fx_valid;
  fx_t  fx_data;

  assign m_arlen   = 8'd0;
  assign m_arsize  = 3'b010;
  assign m_arburst = 2'b01;
  assign m_araddr  = row_base + {14'd0, ar_col, 2'b00};
  assign m_arvalid = issuing && (outstanding < OW'(MAX_OUT));
  assign m_rready  = 1'b1;
  assign ar_fire   = m_arvalid && m_arready;
  assign r_fire    = m_rvalid && m_rready;
  assign r_last_elem = (r_row == n_rows - 1'b1) && (r_col == n_cols - 1'b1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ar_row <= '0; ar_col <= '0; r_row <= '0; r_col <= '0;
      n_rows <= '0; n_cols <= '0; row_base <= '0; stride_b <= '0;
      issuing <= 1'b0; outstanding <= '0; busy <= 1'b0; done <= 1'b0;
      for (int s = 0; s < 3; s++) begin sb_row[s] <= '0; sb_col[s] <= '0; end
      sb_last <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        ar_row <= '0; ar_col <= '0; r_row <= '0; r_col <= '0;
        n_rows <= rows; n_cols <= cols;
        row_base <= base; stride_b <= {stride[29:0], 2'b00};
        issuing <= (rows != 0) && (cols != 0);
        busy <= (rows != 0) && (cols != 0);
        done <= (rows == 0) || (cols == 0);
      end else begin
        // address channel: walk the block row by row
        if (ar_fire) begin
          if (ar_col == n_cols - 1'b1) begin
            ar_col <= '0;
            ar_row <= ar_row + 1'b1;
            row_base <= row_base + stride_b;
            if (ar_row == n_rows - 1'b1) issuing <= 1'b0;
          end else begin
            ar_col <= ar_col + 1'b1;
          end
        end
        // data channel: responses arrive in order
        if (r_fire) begin
          if (r_col == n_cols - 1'b1) begin
            r_col <= '0;
            r_row <= r_row + 1'b1;
          end else begin
            r_col <= r_col + 1'b1;
          end
        end
        case ({ar_fire, r_fire})
          2'b10:   outstanding <= outstanding + 1'b1;
          2'b01:   outstanding <= outstanding - 1'b1;
          default: ;
        endcase
        if (fx_valid && sb_last[2]) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
      sb_row[0] <= r_row;     sb_col[0] <= r_col;     sb_last[0] <= r_fire && r_last_elem;
      sb_row[1] <= sb_row[0]; sb_col[1] <= sb_col[0]; sb_last[1] <= sb_last[0];
      sb_row[2] <= sb_row[1]; sb_col[2] <= sb_col[1]; sb_last[2] <= sb_last[1];
    end
  end

  fp2fix u_cvt (
    .clk, .rst_n,
    .in_valid (r_fire && busy),
    .in_fp    (m_rdata),
    .out_valid(fx_valid),
    .out_fx   (fx_data)
  );

  assign wr_en   = fx_valid;
  assign wr_row  = sb_row[2];
  assign wr_col  = sb_col[2];
  assign wr_data = fx_data;

  // a response is only expected for a request that was issued
  assert property (@(posedge clk) disable iff (!rst_n) r_fire |-> (outstanding != 0 || ar_fire));

  logic unused;
  assign unused = ^{m_rresp, m_rlast};
endmodule
