// tb_fp2fix: checks the float-to-Q7.8 converter on exact values, truncated
// fractions, saturation, zero, subnormal, NaN and infinity, and that every
// result appears exactly three cycles after its input, one per clock.
module tb_fp2fix;
  import adaptor_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic        in_valid;
  logic [31:0] in_fp;
  logic        out_valid;
  fx_t         out_fx;
  fp2fix dut (.*);

  int exp_q[$];
  logic [2:0] vpipe;

  task automatic push(logic [31:0] f, int expect_v);
    in_valid <= 1'b1; in_fp <= f; exp_q.push_back(expect_v);
    @(posedge clk);
  endtask

  // checker: output valid must follow input valid by exactly 3 cycles
  always @(posedge clk) begin
    if (rst_n) begin
      vpipe <= {vpipe[1:0], in_valid};
      if (out_valid !== vpipe[2]) begin failures++; $display("latency mismatch"); end
      if (out_valid) begin
        int e;
        e = exp_q.pop_front();
        checks++;
        if (int'(out_fx) != e) begin
          failures++;
          $display("fp2fix: got %0d expected %0d", out_fx, e);
        end
      end
    end
  end

  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    in_valid = 0; in_fp = 0; vpipe = 0;
    repeat (3) @(posedge clk); rst_n = 1; @(posedge clk);
    // exact Q7.8 values
    for (int n = 0; n < 300; n++) begin
      int v;
      v = $urandom_range(0, 65535) - 32768;
      push(fx2fp(v), v);
    end
    push(fx2fp(1), 1); push(fx2fp(-32768), -32768); push(fx2fp(32767), 32767);
    push(32'h3E99999A, 76);            // 0.3 -> floor(76.8)
    push(32'hBE99999A, -76);           // -0.3 -> -76 (toward zero)
    push(32'h3F800000, 256);           // 1.0
    push(32'h49742400, 32767);         // 1e6 saturates
    push(32'hC9742400, -32768);        // -1e6 saturates
    push(32'h43000000, 32767);         // 128.0 just out of range
    push(32'hC3000000, -32768);        // -128.0 fits exactly
    push(32'h3727C5AC, 0);             // 1e-5 truncates to 0
    push(32'h00000001, 0);             // subnormal
    push(32'h80000000, 0);             // -0
    push(32'h7F800000, 32767);         // +inf
    push(32'hFF800000, -32768);        // -inf
    push(32'h7FC00000, 0);             // NaN
    in_valid <= 1'b0;
    repeat (6) @(posedge clk);
    if (exp_q.size() != 0) begin failures++; $display("missing outputs"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
