// seq_div: unsigned restoring divider, one quotient bit per clock.
//
// start with dividend/divisor loads the operands; W cycles later done pulses
// for one cycle with quotient = floor(dividend / divisor). A zero divisor
// returns all ones. Used for the few divisions per row that the softmax and
// layer-normalisation units need (the attention scale, 1/sum, mean,
// variance and 1/std), so a small serial divider is enough; the source only
// says that division is done in LUT logic and takes several cycles.
module seq_div #(
  parameter int W = 32
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [W-1:0] dividend,
  input  logic [W-1:0] divisor,
  output logic         busy,
  output logic         done,
  output logic [W-1:0] quotient
);
  logic [W-1:0]   q, d;
  logic [W:0]     r;
  logic [$clog2(W+1)-1:0] cnt;
  logic [W:0]     r_sh, r_sub;

  always_comb begin
    r_sh  = {r[W-1:0], q[W-1]};
    r_sub = r_sh - {1'b0, d};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q <= '0; d <= '0; r <= '0; cnt <= '0; busy <= 1'b0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        q <= dividend; d <= divisor; r <= '0;
        cnt <= ($clog2(W+1))'(W); busy <= 1'b1;
      end else if (busy) begin
        if (!r_sub[W]) begin
          r <= r_sub;
          q <= {q[W-2:0], 1'b1};
        end else begin
          r <= r_sh;
          q <= {q[W-2:0], 1'b0};
        end
        cnt <= cnt - 1'b1;
        if (cnt == 1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  assign quotient = q;
endmodule
