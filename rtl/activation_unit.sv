// activation_unit: the non-linear function unit of an NDP core.
//
// It applies ReLU or softmax to a vector of up to N FP16 values (element i
// in bits 16*i+15 : 16*i, the first len elements valid).
//
// ReLU uses the comparator against zero and finishes one cycle after start.
// Softmax runs as a five-stage sequence, one stage per cycle:
//   MAX  comparator tree finds the largest valid element m (in the cycle
//        the vector is taken)
//   EXP  N subtractors and N exponentiation units form e_i = exp(x_i - m)
//   SUM  adder tree forms s = sum of e_i (pairwise, fixed order)
//   DIV  the single divider forms r = 1/s
//   MUL  N multipliers form y_i = e_i * r
// done pulses for one cycle with out_vec valid 5 cycles after start for
// softmax. Subtracting the maximum keeps every exponent <= 1, so the sum
// cannot overflow for N <= 256. Elements at or past len come out as 0.
// start is taken only when busy is low.
//
// From the source architecture: N = 256 exponentiation, addition and
// multiplication units, a comparator tree, an adder tree and one divider,
// and the max / adders / exponentials / adder tree / divider / multipliers
// chain drawn for softmax. The one-stage-per-cycle schedule, the length
// masking and the use of the divider for one reciprocal are this design's
// choices.
module activation_unit #(
  parameter int N = 256
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  logic                  op_softmax,   // 0: ReLU, 1: softmax
  input  logic [$clog2(N):0]    len,
  input  logic [16*N-1:0]       in_vec,
  output logic                  busy,
  output logic                  done,
  output logic [16*N-1:0]       out_vec
);
  import fp16_pkg::*;

  typedef enum logic [2:0] {S_IDLE, S_EXP, S_SUM, S_DIV, S_MUL} state_e;
  state_e state;

  logic [15:0]        v   [N];
  logic [15:0]        e   [N];
  logic [N-1:0]       valid_q;
  logic [15:0]        mx_q, sum_q, rcp_q;
  logic [15:0]        mx_c, sum_c;
  logic [15:0]        red [N];

  // comparator tree on the incoming vector (max over valid elements;
  // invalid ones enter as -inf)
  always_comb begin
    for (int i = 0; i < N; i++) red[i] = (i < int'(len)) ? in_vec[16*i +: 16] : 16'hFC00;
    for (int w = N / 2; w >= 1; w = w / 2) begin
      for (int i = 0; i < w; i++) red[i] = fp16_max(red[2*i], red[2*i+1]);
    end
    mx_c = red[0];
  end

  // adder tree over the exponentials (invalid ones are 0)
  logic [15:0] sred [N];
  always_comb begin
    for (int i = 0; i < N; i++) sred[i] = e[i];
    for (int w = N / 2; w >= 1; w = w / 2) begin
      for (int i = 0; i < w; i++) sred[i] = fp16_add(sred[2*i], sred[2*i+1]);
    end
    sum_c = sred[0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          if (op_softmax) state <= S_EXP;
          else done <= 1'b1;
        end
        S_EXP: state <= S_SUM;
        S_SUM: state <= S_DIV;
        S_DIV: state <= S_MUL;
        S_MUL: begin
          state <= S_IDLE;
          done  <= 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    unique case (state)
      S_IDLE: if (start) begin
        mx_q <= mx_c;
        for (int i = 0; i < N; i++) begin
          valid_q[i] <= (i < int'(len));
          v[i]       <= in_vec[16*i +: 16];
          // ReLU result: the comparator against zero selects x or 0
          out_vec[16*i +: 16] <= ((i < int'(len)) && fp16_gt(in_vec[16*i +: 16], FP16_ZERO))
                                 ? in_vec[16*i +: 16] : FP16_ZERO;
        end
      end
      S_EXP: for (int i = 0; i < N; i++) e[i] <= valid_q[i] ? fp16_exp(fp16_add(v[i], fp16_neg(mx_q))) : FP16_ZERO;
      S_SUM: sum_q <= sum_c;
      S_DIV: rcp_q <= fp16_recip(sum_q);
      S_MUL: for (int i = 0; i < N; i++) out_vec[16*i +: 16] <= fp16_mul(e[i], rcp_q);
      default: ;
    endcase
  end

  assign busy = (state != S_IDLE);
endmodule
