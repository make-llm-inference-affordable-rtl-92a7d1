// tb_activation_unit: N = 256 (the full size). ReLU must be exact and take
// 1 cycle; softmax must match a real-number reference within 1% relative
// (plus 2e-4 absolute) error, sum to about 1, take 5 cycles, and zero the
// elements at or past len.
module tb_activation_unit;
  import tb_util_pkg::*;
  localparam int N = 256;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, start, op_softmax, busy, done;
  logic [8:0] len;
  logic [16*N-1:0] in_vec, out_vec;

  activation_unit #(.N(N)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 15) $display("FAIL %s", what);
    end
  endtask

  task automatic run(input bit sm, input int n, output int lat);
    @(negedge clk);
    start = 1; op_softmax = sm; len = 9'(n);
    @(negedge clk);
    start = 0;
    lat = 1;
    while (!done) begin
      @(negedge clk);
      lat++;
    end
  endtask

  initial begin
    int lat, n;
    real x [N], ref_y [N], mx, s, y, tot;
    rst_n = 0; start = 0; op_softmax = 0; len = 0; in_vec = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      n = (t % 4 == 0) ? N : 1 + int'($urandom % N);
      for (int i = 0; i < N; i++) begin
        in_vec[16*i +: 16] = rand_fp16(9, 17);   // |x| in [2^-6, 8)
        x[i] = fp16_to_real(in_vec[16*i +: 16]);
      end
      // ReLU
      run(1'b0, n, lat);
      chk(lat == 1, $sformatf("relu latency %0d", lat));
      for (int i = 0; i < N; i++)
        chk(out_vec[16*i +: 16] == ((i < n && x[i] > 0.0) ? in_vec[16*i +: 16] : 16'h0),
            $sformatf("relu elem %0d", i));
      // softmax
      run(1'b1, n, lat);
      chk(lat == 5, $sformatf("softmax latency %0d", lat));
      mx = -1.0e9;
      for (int i = 0; i < n; i++) if (x[i] > mx) mx = x[i];
      s = 0.0;
      for (int i = 0; i < n; i++) s += $exp(x[i] - mx);
      tot = 0.0;
      for (int i = 0; i < N; i++) begin
        y = fp16_to_real(out_vec[16*i +: 16]);
        tot += y;
        if (i < n) begin
          real r, err;
          r = $exp(x[i] - mx) / s;
          err = y - r;
          if (err < 0) err = -err;
          chk(err <= 0.01 * r + 2.0e-4, $sformatf("softmax n=%0d elem %0d: %f vs %f", n, i, y, r));
        end else begin
          chk(out_vec[16*i +: 16] == 16'h0, $sformatf("softmax mask elem %0d", i));
        end
      end
      chk(tot > 0.97 && tot < 1.03, $sformatf("softmax sum %f", tot));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
