// tb_bias_add: checks bias addition, saturation at both ends and ReLU on
// 2000 random operand pairs plus directed cases around zero and at both
// saturation limits, against an integer model.
module tb_bias_add;
  import adaptor_pkg::*;
  import tb_ref_pkg::*;
  int checks = 0, failures = 0;
  fx_t in_v, bias, out_v;
  logic relu_en;
  bias_add dut (.*);

  initial begin
    #1000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish;
  end

  initial begin
    int da [14] = '{-2, -1, 0, 1, 2, -3, 32767, -32768, 32767, -32768, 100, -100, 30000, -30000};
    int db [14] = '{0, 0, 0, 0, 0, 2, 1, -1, 32767, -32768, -101, 99, 5000, -5000};
    for (int n = 0; n < 2000 + 28; n++) begin
      int a, b, e;
      a = $urandom_range(0, 65535) - 32768;
      b = (n % 3 == 0) ? ($urandom_range(0, 65535) - 32768) : ($urandom_range(0, 1023) - 512);
      relu_en = n[0];
      if (n >= 2000) begin a = da[(n - 2000) / 2]; b = db[(n - 2000) / 2]; end
      in_v = fx_t'(a); bias = fx_t'(b);
      #1;
      e = sat16(a + b);
      if (relu_en && e < 0) e = 0;
      checks++;
      if (int'(out_v) != e) begin
        failures++;
        if (failures < 10) $display("bias_add %0d + %0d relu=%0d: got %0d expected %0d", a, b, relu_en, out_v, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
