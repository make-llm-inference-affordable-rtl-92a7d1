// tb_dimm_link_ctrl: two controllers, each looped back to itself (its flits
// are addressed to its own id and fed straight to its receive side), each
// with its own DRAM model. Instance 0 has a DRAM that is always ready:
// a 64-word send must finish in 64 cycles plus the read latency and copy
// every word. Instance 1 has a DRAM that drops ready at random: the copy
// must still be exact and complete.
module tb_dimm_link_ctrl;
  import hermes_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n;
  localparam int CNT = 64;

  logic              start [2];
  logic              send_busy [2];
  logic              rd_valid [2], rd_ready [2], rd_rsp_valid [2];
  logic [ADDR_W-1:0] rd_addr [2], wr_addr [2];
  logic [WORD_W-1:0] rd_rsp_data [2], wr_data [2];
  logic              wr_valid [2], wr_ready [2];
  logic              tx_valid [2], tx_ready [2];
  flit_t             tx_flit [2];
  logic [31:0]       rx_words [2];

  for (genvar i = 0; i < 2; i++) begin : g_inst
    logic wreq_ready_unused, wrsp_valid_unused;
    logic [127:0] wrsp_data_unused;
    dimm_link_ctrl #(.MY_ID(3)) u_ctrl (
      .clk, .rst_n, .start(start[i]), .src_addr(32'h100), .dst_addr(32'h800),
      .count(16'(CNT)), .dst(ID_W'(3)), .send_busy(send_busy[i]),
      .rd_valid(rd_valid[i]), .rd_addr(rd_addr[i]), .rd_ready(rd_ready[i]),
      .rd_rsp_valid(rd_rsp_valid[i]), .rd_rsp_data(rd_rsp_data[i]),
      .wr_valid(wr_valid[i]), .wr_addr(wr_addr[i]), .wr_data(wr_data[i]), .wr_ready(wr_ready[i]),
      .tx_valid(tx_valid[i]), .tx_flit(tx_flit[i]), .tx_ready(tx_ready[i]),
      .rx_valid(tx_valid[i]), .rx_flit(tx_flit[i]), .rx_ready(tx_ready[i]),
      .rx_words(rx_words[i]));
    tb_dimm_mem #(.NUM_MULT(1), .LAT(3), .STALL(i == 1)) u_mem (
      .clk, .wreq_valid(1'b0), .wreq_addr(32'd0), .wreq_ready(wreq_ready_unused),
      .wrsp_valid(wrsp_valid_unused), .wrsp_data(wrsp_data_unused),
      .lrd_valid(rd_valid[i]), .lrd_addr(rd_addr[i]), .lrd_ready(rd_ready[i]),
      .lrd_rsp_valid(rd_rsp_valid[i]), .lrd_rsp_data(rd_rsp_data[i]),
      .lwr_valid(wr_valid[i]), .lwr_addr(wr_addr[i]), .lwr_data(wr_data[i]),
      .lwr_ready(wr_ready[i]));
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    int cyc0, cyc1;
    logic [127:0] src [CNT];
    rst_n = 0; start = '{0, 0};
    for (int k = 0; k < CNT; k++) begin
      src[k] = {$urandom, $urandom, $urandom, $urandom};
      g_inst[0].u_mem.poke(32'h100 + k, src[k]);
      g_inst[1].u_mem.poke(32'h100 + k, src[k]);
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    start = '{1, 1};
    @(negedge clk);
    start = '{0, 0};
    cyc0 = 1;
    while (send_busy[0]) begin
      @(negedge clk);
      cyc0++;
    end
    cyc1 = cyc0;
    while (send_busy[1]) begin
      @(negedge clk);
      cyc1++;
    end
    repeat (5) @(negedge clk);
    $display("send of %0d words: %0d cycles (ready DRAM), %0d cycles (stalling DRAM)", CNT, cyc0, cyc1);
    chk(cyc0 <= CNT + 5 && cyc0 >= CNT, $sformatf("rate: %0d cycles", cyc0));
    for (int i = 0; i < 2; i++) begin
      chk(rx_words[i] == CNT, $sformatf("inst %0d rx_words %0d", i, rx_words[i]));
      for (int k = 0; k < CNT; k++) begin
        if (i == 0) chk(g_inst[0].u_mem.peek(32'h800 + k) == src[k], $sformatf("inst 0 word %0d", k));
        else        chk(g_inst[1].u_mem.peek(32'h800 + k) == src[k], $sformatf("inst 1 word %0d", k));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
