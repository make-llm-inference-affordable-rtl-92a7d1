// tb_ndp_core: one NDP core (id 1) with 4 multipliers, an 8-row buffer and a
// 32-element activation unit, driven through its command port against a
// DRAM model that stalls at random. Checks, against integer and real
// references computed here: buffer write/read, streamed MAC commands (GEMV
// results written back to the buffer), MERGE, ReLU, softmax, a neuron
// migration to itself and one to the right-hand neighbour (flits seen on
// the right link). Also counts the stalls of the weight port and the cycles
// a command waited for outstanding MACs; both must happen.
module tb_ndp_core;
  import hermes_pkg::*;
  import tb_util_pkg::*;
  localparam int NM = 4, ROWS = 8, ACTN = 32;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n;

  logic cmd_valid, cmd_ready, rsp_valid, busy;
  cmd_t cmd;
  logic [127:0] rsp_data;
  logic wreq_valid, wreq_ready, wrsp_valid;
  logic [31:0] wreq_addr, lrd_addr, lwr_addr, rx_words;
  logic [128*NM-1:0] wrsp_data;
  logic lrd_valid, lrd_ready, lrd_rsp_valid, lwr_valid, lwr_ready;
  logic [127:0] lrd_rsp_data, lwr_data;
  logic  l_in_ready, r_in_ready, l_out_valid, r_out_valid;
  flit_t l_out_flit, r_out_flit;

  ndp_core #(.MY_ID(1), .NUM_MULT(NM), .BUF_ROWS(ROWS), .ACC_ENTRIES(16), .ACT_N(ACTN)) dut (
    .clk, .rst_n, .cmd_valid, .cmd, .cmd_ready, .rsp_valid, .rsp_data, .busy,
    .wreq_valid, .wreq_addr, .wreq_ready, .wrsp_valid, .wrsp_data,
    .lrd_valid, .lrd_addr, .lrd_ready, .lrd_rsp_valid, .lrd_rsp_data,
    .lwr_valid, .lwr_addr, .lwr_data, .lwr_ready,
    .l_in_valid(1'b0), .l_in_flit('0), .l_in_ready,
    .l_out_valid, .l_out_flit, .l_out_ready(1'b1),
    .r_in_valid(1'b0), .r_in_flit('0), .r_in_ready,
    .r_out_valid, .r_out_flit, .r_out_ready(1'b1),
    .rx_words);

  tb_dimm_mem #(.NUM_MULT(NM), .LAT(4), .STALL(1'b1)) u_mem (.*);

  int drain_waits = 0;
  flit_t rflits[$];
  logic [127:0] last_rsp;
  always @(posedge clk) begin
    if (cmd_valid && !cmd_ready && cmd.op != OP_MAC && busy) drain_waits++;
    if (r_out_valid) rflits.push_back(r_out_flit);
    if (rsp_valid) last_rsp = rsp_data;
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
      if (failures < 15) $display("FAIL %s", what);
    end
  endtask

  // call at a negedge; returns at the negedge after the command was taken
  task automatic send(input cmd_t c);
    cmd_valid = 1;
    cmd = c;
    #1;
    while (!cmd_ready) begin
      @(negedge clk);
      #1;
    end
    @(negedge clk);
  endtask

  task automatic idle();
    cmd_valid = 0;
    cmd = '0;
  endtask

  task automatic rd(input int a, output logic [127:0] d);
    cmd_t c;
    c = '0; c.op = OP_BUF_RD; c.buf_addr = 14'(a);
    send(c);
    idle();
    d = rsp_data;
  endtask

  function automatic logic [127:0] pack_int(input int v [8]);
    logic [127:0] w;
    for (int l = 0; l < 8; l++) w[16*l +: 16] = real_to_fp16(real'(v[l]));
    return w;
  endfunction

  initial begin
    cmd_t c;
    int   xv [32][8];
    int   wv [16*NM][8];
    int   res [8];
    int   gpu [8];
    logic [127:0] d;
    real  x [ACTN], s, mx;
    rst_n = 0;
    idle();
    // weights: rows 0..15, word r*NM+k
    for (int a = 0; a < 16 * NM; a++) begin
      for (int l = 0; l < 8; l++) wv[a][l] = int'($urandom % 7) - 3;
      u_mem.poke(a, pack_int(wv[a]));
    end
    for (int a = 0; a < 12; a++) u_mem.poke(32'h40 + a, {$urandom, $urandom, $urandom, $urandom});
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // activations in rows 0..3 (words 0..15), softmax input in row 4
    for (int a = 0; a < 20; a++) begin
      for (int l = 0; l < 8; l++) xv[a][l] = int'($urandom % 7) - 3;
      c = '0; c.op = OP_BUF_WR; c.buf_addr = 14'(a); c.data = pack_int(xv[a]);
      send(c);
    end
    // MAC stream: neuron n uses weight rows 2n, 2n+1 and buffer rows n%4, (n+1)%4
    for (int n = 0; n < 8; n++) begin
      res[n] = 0;
      for (int b = 0; b < 2; b++) begin
        int xr;
        xr = (n + b) % 4;
        for (int k = 0; k < NM; k++)
          for (int l = 0; l < 8; l++) res[n] += wv[(2*n+b)*NM + k][l] * xv[xr*NM + k][l];
        c = '0; c.op = OP_MAC; c.dram_addr = 32'(2*n + b); c.buf_addr = 14'(xr * NM);
        c.acc_idx = 8'(n); c.first = (b == 0); c.last = (b == 1);
        c.dst_addr = 32'd24;   // result: word 24, lane n
        c.lane = 3'(n);
        send(c);
      end
    end
    idle();
    rd(24, d);
    for (int n = 0; n < 8; n++) begin
      chk(d[16*n +: 16] == real_to_fp16(real'(res[n])),
          $sformatf("MAC neuron %0d: %h want %0d", n, d[16*n +: 16], res[n]));
    end
    // MERGE GPU partial results into word 17
    for (int l = 0; l < 8; l++) gpu[l] = int'($urandom % 21) - 10;
    @(negedge clk);
    c = '0; c.op = OP_MERGE; c.buf_addr = 14'd17; c.data = pack_int(gpu);
    send(c);
    idle();
    rd(17, d);
    for (int l = 0; l < 8; l++)
      chk(d[16*l +: 16] == real_to_fp16(real'(xv[17][l] + gpu[l])), $sformatf("merge lane %0d", l));
    // ReLU on the first 12 elements of the vector at word 16 (words 16..19)
    @(negedge clk);
    c = '0; c.op = OP_RELU; c.buf_addr = 14'd16; c.count = 16'd12;
    send(c);
    idle();
    for (int a = 16; a < 20; a++) begin
      rd(a, d);
      for (int l = 0; l < 8; l++) begin
        int e, v;
        e = (a - 16) * 8 + l;
        v = (a == 17) ? xv[17][l] + gpu[l] : xv[a][l];
        if (e < 12 && v < 0) v = 0;
        chk(d[16*l +: 16] == real_to_fp16(real'(v)), $sformatf("relu word %0d lane %0d", a, l));
      end
    end
    // softmax over all 32 elements of words 16..19 (after the ReLU above)
    for (int a = 16; a < 20; a++) begin
      rd(a, d);
      for (int l = 0; l < 8; l++) x[(a-16)*8 + l] = fp16_to_real(d[16*l +: 16]);
    end
    @(negedge clk);
    c = '0; c.op = OP_SOFTMAX; c.buf_addr = 14'd16; c.count = 16'(ACTN);
    send(c);
    idle();
    mx = -1.0e9;
    for (int i = 0; i < ACTN; i++) if (x[i] > mx) mx = x[i];
    s = 0.0;
    for (int i = 0; i < ACTN; i++) s += $exp(x[i] - mx);
    for (int a = 16; a < 20; a++) begin
      rd(a, d);
      for (int l = 0; l < 8; l++) begin
        real y, r, err;
        y = fp16_to_real(d[16*l +: 16]);
        r = $exp(x[(a-16)*8 + l] - mx) / s;
        err = y - r;
        if (err < 0) err = -err;
        chk(err <= 0.01 * r + 2.0e-4, $sformatf("softmax %0d: %f vs %f", (a-16)*8 + l, y, r));
      end
    end
    // migrations: 6 words to this DIMM (id 1) at 0x900, 6 words to DIMM 2
    @(negedge clk);
    c = '0; c.op = OP_MIGRATE; c.dram_addr = 32'h40; c.dst_addr = 32'h900; c.count = 16'd6;
    c.dst_dimm = 4'd1;
    send(c);
    c.dram_addr = 32'h46; c.dst_addr = 32'hA00; c.dst_dimm = 4'd2;
    send(c);
    idle();
    repeat (60) @(negedge clk);
    chk(rx_words == 6, $sformatf("rx_words %0d", rx_words));
    for (int k = 0; k < 6; k++)
      chk(u_mem.peek(32'h900 + k) == u_mem.peek(32'h40 + k), $sformatf("self migrate word %0d", k));
    chk(rflits.size() == 6, $sformatf("%0d flits to the right", rflits.size()));
    for (int k = 0; k < rflits.size(); k++)
      chk(rflits[k].data == u_mem.peek(32'h46 + k) && rflits[k].addr == 32'hA00 + k &&
          rflits[k].dst == 4'd2 && rflits[k].src == 4'd1 && rflits[k].last == (k == 5),
          $sformatf("right flit %0d", k));
    chk(!busy, "idle at end");
    chk(u_mem.wreq_stalls > 0, "weight port never stalled");
    chk(drain_waits > 0, "no command waited for MACs to drain");
    $display("weight port stalls %0d, drain waits %0d", u_mem.wreq_stalls, drain_waits);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
