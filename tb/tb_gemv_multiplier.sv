// tb_gemv_multiplier: random 128-bit operand pairs; every FP16 lane product
// must equal the correctly rounded product of the two lane values.
module tb_gemv_multiplier;
  import tb_util_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [127:0] w, x, p;

  gemv_multiplier dut (.w, .x, .p);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 3000; t++) begin
      for (int l = 0; l < 8; l++) begin
        w[16*l +: 16] = rand_fp16(8, 22);
        x[16*l +: 16] = rand_fp16(8, 22);
      end
      @(negedge clk);
      for (int l = 0; l < 8; l++) begin
        logic [15:0] r;
        r = real_to_fp16(fp16_to_real(w[16*l +: 16]) * fp16_to_real(x[16*l +: 16]));
        checks++;
        if (p[16*l +: 16] !== r) begin
          failures++;
          if (failures < 10) $display("FAIL lane %0d: %h*%h = %h, want %h", l, w[16*l +: 16], x[16*l +: 16], p[16*l +: 16], r);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
