// tb_gemv_unit: 4 multipliers, 8 accumulator entries. Two neurons are
// interleaved beat by beat into different accumulator entries, with small
// integer operands so every sum is exact in FP16. Each result must equal
// the integer dot product, carry its tag, and appear exactly 3 cycles after
// the neuron's last beat; beats are issued back to back (one per cycle).
module tb_gemv_unit;
  import tb_util_pkg::*;
  localparam int NM = 4;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n;
  logic in_valid, first, last, out_valid, busy;
  logic [128*NM-1:0] w_row, x_row;
  logic [2:0]  acc_idx;
  logic [31:0] tag, out_tag;
  logic [15:0] out_data;
  int cyc = 0;
  int exp_val[$], exp_tag[$], exp_cyc[$];

  gemv_unit #(.NUM_MULT(NM), .ACC_ENTRIES(8)) dut (.*);

  always @(posedge clk) cyc++;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // scoreboard
  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      checks++;
      if (exp_val.size() == 0) begin
        failures++;
        $display("FAIL unexpected result");
      end else begin
        if (out_data !== real_to_fp16(real'(exp_val[0])) || out_tag !== exp_tag[0] ||
            cyc != exp_cyc[0]) begin
          failures++;
          if (failures < 10)
            $display("FAIL tag %0d: got %h (tag %0d, cyc %0d) want %0d (tag %0d, cyc %0d)",
                     exp_tag[0], out_data, out_tag, cyc, exp_val[0], exp_tag[0], exp_cyc[0]);
        end
        void'(exp_val.pop_front()); void'(exp_tag.pop_front()); void'(exp_cyc.pop_front());
      end
    end
  end

  initial begin
    int acc [2];
    int nb, tg;
    rst_n = 0; in_valid = 0; first = 0; last = 0; acc_idx = 0; tag = 0;
    w_row = '0; x_row = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    tg = 0;
    for (int n = 0; n < 200; n++) begin
      nb = 1 + int'($urandom % 4);
      acc = '{0, 0};
      for (int b = 0; b < nb; b++) begin
        for (int s = 0; s < 2; s++) begin
          int d;
          @(negedge clk);
          d = 0;
          for (int k = 0; k < NM * 8; k++) begin
            int wv, xv;
            wv = int'($urandom % 7) - 3;
            xv = int'($urandom % 7) - 3;
            d += wv * xv;
            w_row[16*k +: 16] = real_to_fp16(real'(wv));
            x_row[16*k +: 16] = real_to_fp16(real'(xv));
          end
          acc[s] += d;
          in_valid = 1;
          acc_idx  = 3'(2 * (n % 4) + s);
          first    = (b == 0);
          last     = (b == nb - 1);
          tag      = tg + s;
          if (last) begin
            exp_val.push_back(acc[s]);
            exp_tag.push_back(tg + s);
            exp_cyc.push_back(cyc + 1 + 3);   // beat taken at the next edge
          end
        end
      end
      tg += 2;
      if ($urandom % 3 == 0) begin
        @(negedge clk);
        in_valid = 0;
      end
    end
    @(negedge clk);
    in_valid = 0;
    repeat (10) @(negedge clk);
    checks++;
    if (exp_val.size() != 0 || busy) begin
      failures++;
      $display("FAIL %0d results missing", exp_val.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
