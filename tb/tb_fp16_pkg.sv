// tb_fp16_pkg: self-check of the binary16 functions against real-number
// references. mul and add must be bit exact (round to nearest even from the
// exact double result); exp and recip must be within a relative tolerance;
// gt must agree with real comparison.
module tb_fp16_pkg;
  import fp16_pkg::*;
  import tb_util_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #1 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  initial begin
    logic [15:0] a, b, r, ref16;
    real ra, rb, rr, err;
    // directed
    chk(fp16_mul(16'h3C00, 16'h4000) == 16'h4000, "1*2");
    chk(fp16_add(16'h3C00, 16'h3C00) == 16'h4000, "1+1");
    chk(fp16_add(16'h4200, 16'hC200) == 16'h0000, "3-3");
    chk(fp16_exp(16'h0000) == 16'h3C00, "exp0");
    chk(fp16_recip(16'h4000) == 16'h3800, "1/2");
    chk(fp16_gt(16'h3C00, 16'hBC00), "1>-1");
    chk(!fp16_gt(16'h8000, 16'h0000), "-0 not > 0");
    for (int i = 0; i < 20000; i++) begin
      a = rand_fp16(5, 25);
      b = rand_fp16(5, 25);
      ra = fp16_to_real(a);
      rb = fp16_to_real(b);
      ref16 = real_to_fp16(ra * rb);
      r = fp16_mul(a, b);
      chk(r == ref16, $sformatf("mul %h*%h=%h exp %h", a, b, r, ref16));
      ref16 = real_to_fp16(ra + rb);
      r = fp16_add(a, b);
      chk(r == ref16, $sformatf("add %h+%h=%h exp %h", a, b, r, ref16));
      chk(fp16_gt(a, b) == (ra > rb), $sformatf("gt %h %h", a, b));
      // exp over the range softmax uses (inputs <= 0) and small positives
      a = rand_fp16(5, 18);
      if (fp16_to_real(a) > 2.0) a[15] = 1'b1;
      ra = fp16_to_real(a);
      rr = $exp(ra);
      if (rr > 6.2e-5) begin
        r = fp16_exp(a);
        err = (fp16_to_real(r) - rr) / rr;
        if (err < 0) err = -err;
        chk(err < 2.0e-3, $sformatf("exp %h -> %h (%f vs %f)", a, r, fp16_to_real(r), rr));
      end
      b = rand_fp16(2, 28);
      rb = fp16_to_real(b);
      r = fp16_recip(b);
      rr = 1.0 / rb;
      if (rr < 65000.0 && (rr > 6.2e-5 || rr < -6.2e-5)) begin
        chk(r == real_to_fp16(rr), $sformatf("recip %h -> %h", b, r));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
