// gemv_multiplier: one multiplier of the GEMV unit.
//
// It takes a 128-bit weight word and a 128-bit activation word, each holding
// eight FP16 values (lane i in bits 16*i+15 : 16*i), and returns the eight
// lane products as a 128-bit word. Purely combinational; the GEMV unit
// registers the result.
//
// The source architecture gives 128-bit operands and eight FP16 values per
// multiplier computed at the same time. It also calls the multiplier
// bit-serial; this design instead uses eight parallel FP16 multipliers so
// that one word pair is consumed per cycle.
module gemv_multiplier #(
  parameter int LANES = 8
) (
  input  logic [16*LANES-1:0] w,
  input  logic [16*LANES-1:0] x,
  output logic [16*LANES-1:0] p
);
  import fp16_pkg::*;
  for (genvar i = 0; i < LANES; i++) begin : g_lane
    assign p[16*i +: 16] = fp16_mul(w[16*i +: 16], x[16*i +: 16]);
  end
endmodule
