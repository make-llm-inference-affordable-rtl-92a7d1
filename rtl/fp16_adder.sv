// fp16_adder: one combinational binary16 adder (sum = a + b), the node of
// the GEMV reduction tree. Rounding and special values follow fp16_pkg.
module fp16_adder (
  input  logic [15:0] a,
  input  logic [15:0] b,
  output logic [15:0] sum
);
  import fp16_pkg::*;
  assign sum = fp16_add(a, b);
endmodule
