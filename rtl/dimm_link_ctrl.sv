// dimm_link_ctrl: the DIMM-link controller of one NDP-DIMM.
//
// It moves neuron weights between DIMMs. A send (start with src_addr,
// dst_addr, count, dst) reads count consecutive 128-bit words from local
// DRAM, starting at src_addr, and injects each into the bridge as a flit
// addressed to DIMM dst, word address dst_addr + k; the final flit carries
// last. On the receive side every flit ejected by the bridge is written to
// local DRAM at its address, and rx_words counts the words received.
//
// Timing: one read request per cycle while fewer than FIFO_DEPTH words are
// in flight or buffered, so with a DRAM port that answers every cycle the
// link carries one flit (200 bits = 25 B at 1 GHz) per cycle. Read data is
// assumed to return in request order. send_busy is high from start until
// the last flit has entered the bridge.
//
// From the source architecture: a controller per DIMM that, with the
// bridge, redistributes neurons over the DIMM-link. The transfer command,
// the DRAM ports and the FIFO are this design's choices.
module dimm_link_ctrl
  import hermes_pkg::*;
#(
  parameter int MY_ID      = 0,
  parameter int FIFO_DEPTH = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  // send command
  input  logic              start,
  input  logic [ADDR_W-1:0] src_addr,
  input  logic [ADDR_W-1:0] dst_addr,
  input  logic [15:0]       count,
  input  logic [ID_W-1:0]   dst,
  output logic              send_busy,
  // local DRAM read (send side)
  output logic              rd_valid,
  output logic [ADDR_W-1:0] rd_addr,
  input  logic              rd_ready,
  input  logic              rd_rsp_valid,
  input  logic [WORD_W-1:0] rd_rsp_data,
  // local DRAM write (receive side)
  output logic              wr_valid,
  output logic [ADDR_W-1:0] wr_addr,
  output logic [WORD_W-1:0] wr_data,
  input  logic              wr_ready,
  // bridge
  output logic              tx_valid,
  output flit_t             tx_flit,
  input  logic              tx_ready,
  input  logic              rx_valid,
  input  flit_t             rx_flit,
  output logic              rx_ready,
  output logic [31:0]       rx_words
);
  localparam int CW = $clog2(FIFO_DEPTH + 1);

  logic [ADDR_W-1:0] rd_ptr, wr_ptr;
  logic [15:0]       to_req, to_send;
  logic [ID_W-1:0]   dst_q;
  logic [CW-1:0]     inflight;           // requested words not yet sent
  logic [WORD_W-1:0] fifo [FIFO_DEPTH];
  logic [$clog2(FIFO_DEPTH)-1:0] head, tail;
  logic [CW-1:0]     fill;
  logic              req_fire, tx_fire;

  assign rd_valid  = (to_req != 16'd0) && (int'(inflight) < FIFO_DEPTH);
  assign rd_addr   = rd_ptr;
  assign req_fire  = rd_valid && rd_ready;
  assign tx_valid  = (fill != '0);
  assign tx_fire   = tx_valid && tx_ready;
  assign send_busy = (to_send != 16'd0);

  always_comb begin
    tx_flit      = '0;
    tx_flit.data = fifo[head];
    tx_flit.addr = wr_ptr;
    tx_flit.dst  = dst_q;
    tx_flit.src  = ID_W'(MY_ID);
    tx_flit.last = (to_send == 16'd1);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      to_req   <= '0;
      to_send  <= '0;
      inflight <= '0;
      fill     <= '0;
      head     <= '0;
      tail     <= '0;
    end else begin
      if (start && !send_busy) begin
        rd_ptr  <= src_addr;
        wr_ptr  <= dst_addr;
        to_req  <= count;
        to_send <= count;
        dst_q   <= dst;
      end else begin
        if (req_fire) begin
          rd_ptr <= rd_ptr + 1'b1;
          to_req <= to_req - 1'b1;
        end
        if (tx_fire) begin
          wr_ptr  <= wr_ptr + 1'b1;
          to_send <= to_send - 1'b1;
        end
      end
      inflight <= inflight + CW'(req_fire) - CW'(tx_fire);
      if (rd_rsp_valid) begin
        fifo[tail] <= rd_rsp_data;
        tail       <= tail + 1'b1;
      end
      if (tx_fire) head <= head + 1'b1;
      fill <= fill + CW'(rd_rsp_valid) - CW'(tx_fire);
    end
  end

  // receive side: straight into local DRAM
  assign wr_valid = rx_valid;
  assign wr_addr  = rx_flit.addr;
  assign wr_data  = rx_flit.data;
  assign rx_ready = wr_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rx_words <= '0;
    else if (rx_valid && wr_ready) rx_words <= rx_words + 1;
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
                                  rd_rsp_valid |-> (int'(fill) < FIFO_DEPTH));
endmodule
