// ndp_buffer: the 256 KB buffer of an NDP core.
//
// It holds the layer activations the GEMV unit multiplies with weights and
// the results the GEMV and activation units produce. The storage is
// NUM_BANKS x ROWS words of 128 bits (8 FP16 values). Word address a lives
// in bank a % NUM_BANKS, row a / NUM_BANKS, so one row read returns
// NUM_BANKS consecutive words: exactly one operand word for each GEMV
// multiplier.
//
// Ports: a combinational row read (rd_row -> rd_data, word k of the row in
// bits 128*k+127 : 128*k) and one synchronous word write with a per-FP16
// lane enable. Defaults: 256 banks x 64 rows x 16 B = 256 KB.
//
// The 256 KB size is from the source architecture; the banked organisation
// and the port set are this design's choices. In silicon this array is an
// SRAM macro.
module ndp_buffer #(
  parameter int NUM_BANKS = 256,
  parameter int ROWS      = 64
) (
  input  logic                               clk,
  input  logic [$clog2(ROWS)-1:0]            rd_row,
  output logic [128*NUM_BANKS-1:0]           rd_data,
  input  logic                               wr_en,
  input  logic [$clog2(NUM_BANKS*ROWS)-1:0]  wr_addr,
  input  logic [7:0]                         wr_lane_en,
  input  logic [127:0]                       wr_data
);
  localparam int WORDS = NUM_BANKS * ROWS;

  logic [127:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (wr_en) begin
      for (int l = 0; l < 8; l++) begin
        if (wr_lane_en[l]) mem[wr_addr][16*l +: 16] <= wr_data[16*l +: 16];
      end
    end
  end

  for (genvar b = 0; b < NUM_BANKS; b++) begin : g_bank
    assign rd_data[128*b +: 128] = mem[int'(rd_row) * NUM_BANKS + b];
  end
endmodule
