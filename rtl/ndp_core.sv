// ndp_core: the near-data processing core in the buffer chip of one
// NDP-DIMM.
//
// The host drives the core with NDP commands (cmd_t, valid/ready) sent
// through the DIMM's memory command interface. The core holds a 256 KB
// buffer (ndp_buffer), a 256-multiplier GEMV unit (gemv_unit), a 256-wide
// activation unit (activation_unit), and the DIMM-link controller and bridge
// (dimm_link_ctrl, dimm_link_bridge). Commands:
//   BUF_WR   write cmd.data to buffer word buf_addr                 (1 cycle)
//   BUF_RD   return buffer word buf_addr on rsp_data, 1 cycle later
//   MAC      request weight row dram_addr from local DRAM; when it
//            returns, multiply it with buffer row buf_addr/NUM_MULT and
//            accumulate into entry acc_idx (first: start, last: write
//            the FP16 sum to lane `lane` of buffer word dst_addr)
//   RELU     ReLU on the first count (<= ACT_N) elements of the vector at
//            word buf_addr, written in place
//   SOFTMAX  softmax on the same kind of vector, written in place
//   MERGE    add the eight FP16 values of cmd.data to buffer word
//            buf_addr (gathers the GPU's partial results)
//   MIGRATE  send count DRAM words from dram_addr to DIMM dst_dimm, word
//            dst_addr, over the DIMM-link; runs in the background
//
// MAC commands stream: one is taken per cycle while the weight port accepts
// and fewer than MQ_DEPTH rows are outstanding; rows must return in order.
// Every other command except MIGRATE waits (cmd_ready low) until all
// outstanding MACs have finished, so it sees their results; this is the
// core's only hazard rule. A MAC that reads a buffer row written by an
// earlier MAC's last beat must therefore be separated from it by a non-MAC
// command. RELU/SOFTMAX take 1 or 5 cycles in the activation unit, then
// write back ceil(count/8) words one per cycle. A vector is ACT_N elements
// starting at a word address that is a multiple of ACT_N/8 (buf_addr is
// rounded down to one), so it always lies in one buffer row.
//
// From the source architecture: one NDP core per DIMM with GEMV units,
// activation units and DIMM-link, MAC and softmax issued as NDP commands,
// GEMV fed from DRAM and the buffer, merging of GPU results on the DIMM
// side. The command set and encoding, the ordering rule and the ports to
// the local memory controller are this design's choices.
module ndp_core
  import hermes_pkg::*;
#(
  parameter int MY_ID       = 0,
  parameter int NUM_MULT    = 256,
  parameter int BUF_ROWS    = 64,
  parameter int ACC_ENTRIES = 256,
  parameter int ACT_N       = 256,
  parameter int MQ_DEPTH    = 8
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // host command port
  input  logic                      cmd_valid,
  input  cmd_t                      cmd,
  output logic                      cmd_ready,
  output logic                      rsp_valid,
  output logic [WORD_W-1:0]         rsp_data,
  output logic                      busy,
  // weight row port to the local memory controller
  output logic                      wreq_valid,
  output logic [ADDR_W-1:0]         wreq_addr,
  input  logic                      wreq_ready,
  input  logic                      wrsp_valid,
  input  logic [128*NUM_MULT-1:0]   wrsp_data,
  // word port to the local memory controller (DIMM-link traffic)
  output logic                      lrd_valid,
  output logic [ADDR_W-1:0]         lrd_addr,
  input  logic                      lrd_ready,
  input  logic                      lrd_rsp_valid,
  input  logic [WORD_W-1:0]         lrd_rsp_data,
  output logic                      lwr_valid,
  output logic [ADDR_W-1:0]         lwr_addr,
  output logic [WORD_W-1:0]         lwr_data,
  input  logic                      lwr_ready,
  // DIMM-link to the neighbours
  input  logic                      l_in_valid,
  input  flit_t                     l_in_flit,
  output logic                      l_in_ready,
  output logic                      l_out_valid,
  output flit_t                     l_out_flit,
  input  logic                      l_out_ready,
  input  logic                      r_in_valid,
  input  flit_t                     r_in_flit,
  output logic                      r_in_ready,
  output logic                      r_out_valid,
  output flit_t                     r_out_flit,
  input  logic                      r_out_ready,
  output logic [31:0]               rx_words
);
  import fp16_pkg::*;

  localparam int BUF_WORDS = NUM_MULT * BUF_ROWS;
  localparam int BAW       = $clog2(BUF_WORDS);     // buffer word address
  localparam int CW        = $clog2(NUM_MULT);      // word within a row
  localparam int RW        = $clog2(BUF_ROWS);      // row address
  localparam int AAW       = $clog2(ACC_ENTRIES);
  localparam int SLICE_W   = ACT_N / 8;             // words per activation vector
  localparam int TAG_W     = BAW + 3;

  initial assert (NUM_MULT >= 2 && NUM_MULT * 8 >= ACT_N && ACT_N % 8 == 0)
    else $error("ndp_core: unsupported NUM_MULT/ACT_N");

  typedef enum logic [1:0] {S_IDLE, S_ACT_RUN, S_ACT_WB} state_e;
  state_e state;

  typedef struct packed {
    logic [RW-1:0]    row;
    logic [AAW-1:0]   acc_idx;
    logic             first;
    logic             last;
    logic [TAG_W-1:0] tag;
  } mac_meta_t;

  // ---------------------------------------------------------------- buffer
  logic [RW-1:0]              buf_rd_row;
  logic [128*NUM_MULT-1:0]    buf_rd_data;
  logic                       buf_wr_en;
  logic [BAW-1:0]             buf_wr_addr;
  logic [7:0]                 buf_wr_lane_en;
  logic [127:0]               buf_wr_data;

  ndp_buffer #(.NUM_BANKS(NUM_MULT), .ROWS(BUF_ROWS)) u_buf (
    .clk, .rd_row(buf_rd_row), .rd_data(buf_rd_data), .wr_en(buf_wr_en),
    .wr_addr(buf_wr_addr), .wr_lane_en(buf_wr_lane_en), .wr_data(buf_wr_data));

  // command fields
  logic [BAW-1:0] c_word;
  logic [RW-1:0]  c_row;
  logic [CW-1:0]  c_col;
  logic [127:0]   c_rd_word;
  assign c_word    = cmd.buf_addr[BAW-1:0];
  assign c_row     = c_word[BAW-1:CW];
  assign c_col     = c_word[CW-1:0];
  assign c_rd_word = buf_rd_data[128*int'(c_col) +: 128];

  // ------------------------------------------------------- MAC meta queue
  mac_meta_t             mq [MQ_DEPTH];
  logic [$clog2(MQ_DEPTH)-1:0] mq_head, mq_tail;
  logic [$clog2(MQ_DEPTH+1)-1:0] mq_cnt;
  logic                  mac_issue;
  logic                  gemv_busy, gemv_out_valid;
  logic [15:0]           gemv_out_data;
  logic [TAG_W-1:0]      gemv_out_tag;
  logic                  drained;

  assign drained    = (mq_cnt == '0) && !gemv_busy;
  assign wreq_valid = cmd_valid && (cmd.op == OP_MAC) && (state == S_IDLE) &&
                      (int'(mq_cnt) < MQ_DEPTH);
  assign wreq_addr  = cmd.dram_addr;
  assign mac_issue  = wreq_valid && wreq_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mq_head <= '0;
      mq_tail <= '0;
      mq_cnt  <= '0;
    end else begin
      if (mac_issue) mq_tail <= mq_tail + 1'b1;
      if (wrsp_valid) mq_head <= mq_head + 1'b1;
      mq_cnt <= mq_cnt + ($bits(mq_cnt))'(mac_issue) - ($bits(mq_cnt))'(wrsp_valid);
    end
  end

  always_ff @(posedge clk) begin
    if (mac_issue)
      mq[mq_tail] <= '{row: c_row, acc_idx: cmd.acc_idx[AAW-1:0], first: cmd.first,
                       last: cmd.last, tag: {cmd.dst_addr[BAW-1:0], cmd.lane}};
  end

  gemv_unit #(.NUM_MULT(NUM_MULT), .ACC_ENTRIES(ACC_ENTRIES), .TAG_W(TAG_W)) u_gemv (
    .clk, .rst_n,
    .in_valid(wrsp_valid), .w_row(wrsp_data), .x_row(buf_rd_data),
    .acc_idx(mq[mq_head].acc_idx), .first(mq[mq_head].first), .last(mq[mq_head].last),
    .tag(mq[mq_head].tag),
    .out_valid(gemv_out_valid), .out_data(gemv_out_data), .out_tag(gemv_out_tag),
    .busy(gemv_busy));

  // ------------------------------------------------------ activation unit
  logic                 act_start, act_busy, act_done;
  logic [16*ACT_N-1:0]  act_out;
  logic [16*ACT_N-1:0]  act_in;
  logic [BAW-1:0]       act_base, wb_ptr;
  logic [$clog2(ACT_N):0] act_len;
  logic [$clog2(SLICE_W+1)-1:0] wb_left;
  logic [2:0]           wb_tail;            // valid lanes in the last word (0 = 8)
  logic [BAW-1:0]       slice_base;

  assign slice_base = c_word & ~BAW'(SLICE_W - 1);
  assign act_in     = buf_rd_data[128*int'(slice_base[CW-1:0]) +: 16*ACT_N];
  assign act_len    = (int'(cmd.count) > ACT_N) ? ($clog2(ACT_N)+1)'(ACT_N)
                                                 : ($clog2(ACT_N)+1)'(cmd.count);

  activation_unit #(.N(ACT_N)) u_act (
    .clk, .rst_n, .start(act_start), .op_softmax(cmd.op == OP_SOFTMAX), .len(act_len),
    .in_vec(act_in), .busy(act_busy), .done(act_done), .out_vec(act_out));

  // ---------------------------------------------------------- DIMM-link
  logic  link_start, link_busy;
  logic  tx_valid, tx_ready, rx_valid, rx_ready;
  flit_t tx_flit, rx_flit;

  dimm_link_ctrl #(.MY_ID(MY_ID)) u_link_ctrl (
    .clk, .rst_n,
    .start(link_start), .src_addr(cmd.dram_addr), .dst_addr(cmd.dst_addr),
    .count(cmd.count), .dst(cmd.dst_dimm), .send_busy(link_busy),
    .rd_valid(lrd_valid), .rd_addr(lrd_addr), .rd_ready(lrd_ready),
    .rd_rsp_valid(lrd_rsp_valid), .rd_rsp_data(lrd_rsp_data),
    .wr_valid(lwr_valid), .wr_addr(lwr_addr), .wr_data(lwr_data), .wr_ready(lwr_ready),
    .tx_valid, .tx_flit, .tx_ready, .rx_valid, .rx_flit, .rx_ready, .rx_words);

  dimm_link_bridge #(.MY_ID(MY_ID)) u_bridge (
    .clk, .rst_n,
    .l_in_valid, .l_in_flit, .l_in_ready, .r_in_valid, .r_in_flit, .r_in_ready,
    .inj_valid(tx_valid), .inj_flit(tx_flit), .inj_ready(tx_ready),
    .l_out_valid, .l_out_flit, .l_out_ready, .r_out_valid, .r_out_flit, .r_out_ready,
    .ej_valid(rx_valid), .ej_flit(rx_flit), .ej_ready(rx_ready));

  // ------------------------------------------------------- command accept
  always_comb begin
    cmd_ready = 1'b0;
    if (state == S_IDLE) begin
      unique case (cmd.op)
        OP_MAC:     cmd_ready = mac_issue;
        OP_MIGRATE: cmd_ready = !link_busy;
        default:    cmd_ready = drained;
      endcase
    end
  end

  logic fire;
  assign fire       = cmd_valid && cmd_ready;
  assign act_start  = fire && (cmd.op == OP_RELU || cmd.op == OP_SOFTMAX);
  assign link_start = fire && (cmd.op == OP_MIGRATE);

  // buffer read row: the oldest outstanding MAC, else the command
  assign buf_rd_row = (mq_cnt != '0) ? mq[mq_head].row : c_row;

  // buffer write port
  logic [127:0] merged;
  always_comb begin
    for (int l = 0; l < 8; l++)
      merged[16*l +: 16] = fp16_add(c_rd_word[16*l +: 16], cmd.data[16*l +: 16]);
  end

  always_comb begin
    buf_wr_en      = 1'b0;
    buf_wr_addr    = c_word;
    buf_wr_lane_en = 8'hFF;
    buf_wr_data    = cmd.data;
    if (gemv_out_valid) begin
      buf_wr_en      = 1'b1;
      buf_wr_addr    = gemv_out_tag[TAG_W-1:3];
      buf_wr_lane_en = 8'd1 << gemv_out_tag[2:0];
      buf_wr_data    = {8{gemv_out_data}};
    end else if (state == S_ACT_WB) begin
      buf_wr_en      = 1'b1;
      buf_wr_addr    = wb_ptr;
      buf_wr_lane_en = (wb_left == 1 && wb_tail != 3'd0) ? 8'((1 << wb_tail) - 1) : 8'hFF;
      buf_wr_data    = act_out[128*int'(BAW'(wb_ptr - act_base)) +: 128];
    end else if (fire && cmd.op == OP_BUF_WR) begin
      buf_wr_en      = 1'b1;
    end else if (fire && cmd.op == OP_MERGE) begin
      buf_wr_en      = 1'b1;
      buf_wr_data    = merged;
    end
  end

  // ------------------------------------------------------------ sequencing
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      rsp_valid <= 1'b0;
    end else begin
      rsp_valid <= fire && (cmd.op == OP_BUF_RD);
      unique case (state)
        S_IDLE:    if (act_start) state <= S_ACT_RUN;
        S_ACT_RUN: if (act_done) state <= S_ACT_WB;
        S_ACT_WB:  if (wb_left == 1) state <= S_IDLE;
        default:   state <= S_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (fire && cmd.op == OP_BUF_RD) rsp_data <= c_rd_word;
    if (act_start) begin
      act_base <= slice_base;
      wb_ptr   <= slice_base;
      wb_left  <= ($bits(wb_left))'((int'(act_len) + 7) / 8);
      wb_tail  <= act_len[2:0];
    end else if (state == S_ACT_WB) begin
      wb_ptr  <= wb_ptr + 1'b1;
      wb_left <= wb_left - 1'b1;
    end
  end

  assign busy = (state != S_IDLE) || !drained || link_busy || act_busy;

  a_wrsp_expected: assert property (@(posedge clk) disable iff (!rst_n)
                                    wrsp_valid |-> (mq_cnt != '0));
endmodule
