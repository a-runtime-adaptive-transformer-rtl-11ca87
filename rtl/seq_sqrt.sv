// seq_sqrt: unsigned integer square root, one result bit per clock.
//
// start loads a 2W-bit radicand; W cycles later done pulses for one cycle
// and root = floor(sqrt(radicand)). Restoring digit-by-digit method: each
// step brings down two radicand bits and tries the trial divisor 4r+1.
// Used by the layer-normalisation unit (sqrt of variance + epsilon) and the
// score unit (sqrt of d_k). The square-root method is this design's choice.
module seq_sqrt #(
  parameter int W = 16
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic [2*W-1:0] radicand,
  output logic           busy,
  output logic           done,
  output logic [W-1:0]   root
);
  logic [2*W-1:0] a;
  logic [W+1:0]   rem;
  logic [W-1:0]   res;
  logic [$clog2(W+1)-1:0] cnt;
  logic [W+1:0]   rem_sh, trial;

  always_comb begin
    rem_sh = {rem[W-1:0], a[2*W-1 -: 2]};
    trial  = {res, 2'b01};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a <= '0; rem <= '0; res <= '0; cnt <= '0; busy <= 1'b0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        a <= radicand; rem <= '0; res <= '0;
        cnt <= ($clog2(W+1))'(W); busy <= 1'b1;
      end else if (busy) begin
        a <= {a[2*W-3:0], 2'b00};
        if (rem_sh >= trial) begin
          rem <= rem_sh - trial;
          res <= {res[W-2:0], 1'b1};
        end else begin
          rem <= rem_sh;
          res <= {res[W-2:0], 1'b0};
        end
        cnt <= cnt - 1'b1;
        if (cnt == 1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  assign root = res;
endmodule
