// hermes_pkg: shared constants and types of the NDP-DIMM array.
//
// Sizes that come from the source architecture: 256 GEMV multipliers per
// NDP core, eight FP16 values (128 bits) per multiplier, a 256 KB core
// buffer, 256-wide activation unit, eight NDP-DIMMs, and a DIMM-link of
// 8 lanes x 25 Gb/s, which at the 1 GHz core clock is 200 bits per cycle.
// The command encoding, the flit layout and the accumulator count are this
// design's own choices.
package hermes_pkg;

  localparam int WORD_W    = 128;            // one multiplier operand, 8 x FP16
  localparam int LANES     = 8;              // FP16 values per word
  localparam int FLIT_W    = 200;            // 8 lanes x 25 bit per 1 GHz cycle
  localparam int ID_W      = 4;              // DIMM id width (up to 16 DIMMs)
  localparam int ADDR_W    = 32;             // local DRAM word (16 B) address
  localparam int BUF_WADDR_W = 14;           // 256 KB / 16 B = 16384 words
  localparam int ACC_W     = 8;              // 256 accumulator entries

  // NDP commands sent by the host through the memory command interface
  typedef enum logic [2:0] {
    OP_BUF_WR  = 3'd0,  // write one 128-bit word into the core buffer
    OP_BUF_RD  = 3'd1,  // read one 128-bit word of the core buffer
    OP_MAC     = 3'd2,  // one GEMV beat: weight row x buffer row into an accumulator
    OP_RELU    = 3'd3,  // ReLU over up to 256 buffer elements, in place
    OP_SOFTMAX = 3'd4,  // softmax over up to 256 buffer elements, in place
    OP_MERGE   = 3'd5,  // add a word of GPU partial results into the buffer
    OP_MIGRATE = 3'd6   // send local DRAM words to another DIMM over the DIMM-link
  } op_e;

  typedef struct packed {
    op_e                    op;
    logic [ADDR_W-1:0]      dram_addr;  // MAC: weight row; MIGRATE: first source word
    logic [ADDR_W-1:0]      dst_addr;   // MIGRATE: first destination word; MAC: result buffer word
    logic [BUF_WADDR_W-1:0] buf_addr;   // word address; MAC: row = buf_addr / NUM_MULT
    logic [2:0]             lane;       // MAC: FP16 lane of buf_addr receiving the result
    logic [ACC_W-1:0]       acc_idx;    // MAC accumulator entry
    logic                   first;      // MAC: start a new sum
    logic                   last;       // MAC: write the sum to the buffer
    logic [15:0]            count;      // RELU/SOFTMAX: elements; MIGRATE: words
    logic [ID_W-1:0]        dst_dimm;   // MIGRATE destination
    logic [WORD_W-1:0]      data;       // BUF_WR / MERGE payload
  } cmd_t;

  typedef struct packed {
    logic [FLIT_W-WORD_W-ADDR_W-2*ID_W-2:0] pad;
    logic              last;
    logic [ID_W-1:0]   src;
    logic [ID_W-1:0]   dst;
    logic [ADDR_W-1:0] addr;
    logic [WORD_W-1:0] data;
  } flit_t;

endpackage
