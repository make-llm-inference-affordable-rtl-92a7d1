// gemv_unit: the GEMV engine of an NDP core.
//
// Each input beat carries NUM_MULT weight words (read from the DIMM's DRAM)
// and NUM_MULT activation words (read from the core buffer). Multiplier k
// multiplies weight word k by activation word k lane by lane (eight FP16
// products); a reduction tree adds all NUM_MULT*8 products into one FP16
// partial sum; the accumulator adds that partial sum to accumulator entry
// acc_idx, or overwrites the entry when first is set. When last is set the
// finished sum leaves on out_data together with the beat's tag.
//
// Pipeline: stage 1 registers the products, stage 2 the tree sum, stage 3
// the accumulator. One beat per cycle, result 3 cycles after the beat.
// Consecutive beats to the same entry are handled without stalls because
// the accumulator is read and written in the same stage.
//
// From the source architecture: 256 multipliers, 128-bit operands of eight
// FP16 values, a reduction-tree accumulator that adds partial sums with data
// dependencies. This design's choices: all products of a beat belong to one
// output neuron, ACC_ENTRIES FP16 accumulator registers, the 3-stage
// pipeline and the tag.
module gemv_unit #(
  parameter int NUM_MULT    = 256,
  parameter int ACC_ENTRIES = 256,
  parameter int TAG_W       = 32
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           in_valid,
  input  logic [128*NUM_MULT-1:0]        w_row,
  input  logic [128*NUM_MULT-1:0]        x_row,
  input  logic [$clog2(ACC_ENTRIES)-1:0] acc_idx,
  input  logic                           first,
  input  logic                           last,
  input  logic [TAG_W-1:0]               tag,
  output logic                           out_valid,
  output logic [15:0]                    out_data,
  output logic [TAG_W-1:0]               out_tag,
  output logic                           busy
);
  import fp16_pkg::*;
  localparam int AW = $clog2(ACC_ENTRIES);

  typedef struct packed {
    logic [AW-1:0]    idx;
    logic             first;
    logic             last;
    logic [TAG_W-1:0] tag;
  } meta_t;

  logic [128*NUM_MULT-1:0] prod, prod_q;
  logic [15:0]             tree_sum, sum_q;
  logic                    v1, v2;
  meta_t                   m1, m2;
  logic [15:0]             acc [ACC_ENTRIES];
  logic [15:0]             acc_new;

  for (genvar k = 0; k < NUM_MULT; k++) begin : g_mul
    gemv_multiplier #(.LANES(8)) u_mul (
      .w(w_row[128*k +: 128]), .x(x_row[128*k +: 128]), .p(prod[128*k +: 128]));
  end

  reduction_tree #(.N(NUM_MULT*8)) u_tree (.in_vec(prod_q), .sum(tree_sum));

  assign acc_new = m2.first ? sum_q : fp16_add(acc[m2.idx], sum_q);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1        <= 1'b0;
      v2        <= 1'b0;
      out_valid <= 1'b0;
    end else begin
      v1        <= in_valid;
      v2        <= v1;
      out_valid <= v2 && m2.last;
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      prod_q <= prod;
      m1     <= '{idx: acc_idx, first: first, last: last, tag: tag};
    end
    if (v1) begin
      sum_q <= tree_sum;
      m2    <= m1;
    end
    if (v2) begin
      acc[m2.idx] <= acc_new;
      out_data    <= acc_new;
      out_tag     <= m2.tag;
    end
  end

  assign busy = v1 | v2 | out_valid;
endmodule
