// hermes_ndp_array: the NDP-DIMM side of the GPU + NDP-DIMM inference
// system: NUM_DIMMS NDP-DIMMs, each with one NDP core, joined by DIMM-links.
//
// The host scheduler sends every DIMM its own NDP command stream (cmd[i]):
// MACs for the cold neurons stored on that DIMM, softmax/ReLU, merges of
// the GPU's partial results, and neuron migrations. Neuron migrations
// travel over the DIMM-link chain: the bridge of DIMM i connects to DIMM
// i-1 and DIMM i+1, one 200-bit flit per cycle in each direction, and a
// flit passes each intermediate DIMM in one cycle. The chain ends are left
// unconnected.
//
// Each DIMM's local memory controller and DRAM are outside this module; the
// weight row port (wreq/wrsp) and the word port (lrd/lwr) of every core are
// brought out as arrays indexed by DIMM. All ports of one DIMM follow the
// timing of ndp_core.
//
// From the source architecture: eight NDP-DIMMs, one NDP core per DIMM,
// DIMM-links between neighbouring DIMMs. The chain wiring and the port
// arrays are this design's choices.
module hermes_ndp_array
  import hermes_pkg::*;
#(
  parameter int NUM_DIMMS   = 8,
  parameter int NUM_MULT    = 256,
  parameter int BUF_ROWS    = 64,
  parameter int ACC_ENTRIES = 256,
  parameter int ACT_N       = 256
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    cmd_valid     [NUM_DIMMS],
  input  cmd_t                    cmd           [NUM_DIMMS],
  output logic                    cmd_ready     [NUM_DIMMS],
  output logic                    rsp_valid     [NUM_DIMMS],
  output logic [WORD_W-1:0]       rsp_data      [NUM_DIMMS],
  output logic                    busy          [NUM_DIMMS],
  output logic                    wreq_valid    [NUM_DIMMS],
  output logic [ADDR_W-1:0]       wreq_addr     [NUM_DIMMS],
  input  logic                    wreq_ready    [NUM_DIMMS],
  input  logic                    wrsp_valid    [NUM_DIMMS],
  input  logic [128*NUM_MULT-1:0] wrsp_data     [NUM_DIMMS],
  output logic                    lrd_valid     [NUM_DIMMS],
  output logic [ADDR_W-1:0]       lrd_addr      [NUM_DIMMS],
  input  logic                    lrd_ready     [NUM_DIMMS],
  input  logic                    lrd_rsp_valid [NUM_DIMMS],
  input  logic [WORD_W-1:0]       lrd_rsp_data  [NUM_DIMMS],
  output logic                    lwr_valid     [NUM_DIMMS],
  output logic [ADDR_W-1:0]       lwr_addr      [NUM_DIMMS],
  output logic [WORD_W-1:0]       lwr_data      [NUM_DIMMS],
  input  logic                    lwr_ready     [NUM_DIMMS],
  output logic [31:0]             rx_words      [NUM_DIMMS]
);
  // link wires, index i = the link between DIMM i and DIMM i+1
  logic  rt_valid [NUM_DIMMS+1];   // rightward
  flit_t rt_flit  [NUM_DIMMS+1];
  logic  rt_ready [NUM_DIMMS+1];
  logic  lt_valid [NUM_DIMMS+1];   // leftward
  flit_t lt_flit  [NUM_DIMMS+1];
  logic  lt_ready [NUM_DIMMS+1];

  // open chain ends: nothing arrives, anything leaving is dropped
  assign rt_valid[0]         = 1'b0;
  assign rt_flit[0]          = '0;
  assign lt_ready[0]         = 1'b1;
  assign lt_valid[NUM_DIMMS] = 1'b0;
  assign lt_flit[NUM_DIMMS]  = '0;
  assign rt_ready[NUM_DIMMS] = 1'b1;

  for (genvar i = 0; i < NUM_DIMMS; i++) begin : g_dimm
    ndp_core #(
      .MY_ID(i), .NUM_MULT(NUM_MULT), .BUF_ROWS(BUF_ROWS),
      .ACC_ENTRIES(ACC_ENTRIES), .ACT_N(ACT_N)
    ) u_core (
      .clk, .rst_n,
      .cmd_valid(cmd_valid[i]), .cmd(cmd[i]), .cmd_ready(cmd_ready[i]),
      .rsp_valid(rsp_valid[i]), .rsp_data(rsp_data[i]), .busy(busy[i]),
      .wreq_valid(wreq_valid[i]), .wreq_addr(wreq_addr[i]), .wreq_ready(wreq_ready[i]),
      .wrsp_valid(wrsp_valid[i]), .wrsp_data(wrsp_data[i]),
      .lrd_valid(lrd_valid[i]), .lrd_addr(lrd_addr[i]), .lrd_ready(lrd_ready[i]),
      .lrd_rsp_valid(lrd_rsp_valid[i]), .lrd_rsp_data(lrd_rsp_data[i]),
      .lwr_valid(lwr_valid[i]), .lwr_addr(lwr_addr[i]), .lwr_data(lwr_data[i]),
      .lwr_ready(lwr_ready[i]),
      .l_in_valid(rt_valid[i]),    .l_in_flit(rt_flit[i]),    .l_in_ready(rt_ready[i]),
      .l_out_valid(lt_valid[i]),   .l_out_flit(lt_flit[i]),   .l_out_ready(lt_ready[i]),
      .r_in_valid(lt_valid[i+1]),  .r_in_flit(lt_flit[i+1]),  .r_in_ready(lt_ready[i+1]),
      .r_out_valid(rt_valid[i+1]), .r_out_flit(rt_flit[i+1]), .r_out_ready(rt_ready[i+1]),
      .rx_words(rx_words[i]));
  end
endmodule
