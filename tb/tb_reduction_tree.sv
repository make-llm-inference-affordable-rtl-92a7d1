// tb_reduction_tree: N = 64. (1) small integers, whose sum is exact in FP16,
// must add up exactly; (2) random values must match a reference that adds
// pairs level by level with correct rounding at each node.
module tb_reduction_tree;
  import tb_util_pkg::*;
  localparam int N = 64;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [16*N-1:0] in_vec;
  logic [15:0]     sum;

  reduction_tree #(.N(N)) dut (.in_vec, .sum);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input logic [15:0] want, input string what);
    checks++;
    if (sum !== want) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %h want %h", what, sum, want);
    end
  endtask

  initial begin
    real r [N];
    int  acc;
    for (int t = 0; t < 500; t++) begin
      acc = 0;
      for (int i = 0; i < N; i++) begin
        int v;
        v = int'($urandom % 33) - 16;
        acc += v;
        in_vec[16*i +: 16] = real_to_fp16(real'(v));
      end
      @(negedge clk);
      chk(real_to_fp16(real'(acc)), "integers");
    end
    for (int t = 0; t < 500; t++) begin
      for (int i = 0; i < N; i++) begin
        in_vec[16*i +: 16] = rand_fp16(10, 20);
        r[i] = fp16_to_real(in_vec[16*i +: 16]);
      end
      for (int w = N / 2; w >= 1; w = w / 2)
        for (int i = 0; i < w; i++) r[i] = fp16_to_real(real_to_fp16(r[2*i] + r[2*i+1]));
      @(negedge clk);
      chk(real_to_fp16(r[0]), "random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
