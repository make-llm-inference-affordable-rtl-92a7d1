// tb_hermes_ndp_array: end-to-end run of the NDP-DIMM array (4 DIMMs, 4
// multipliers per core, 32-element activation unit) driven by a host model.
//
// The host model plays the scheduler: 24 neurons of one FC layer (each one
// 32-value weight row, one GEMV beat) are split into hot neurons, which
// the "GPU" computes here in the testbench, and cold neurons, spread over
// the DIMMs with DIMM 0 deliberately overloaded. One token step: the input
// vector is written into every core buffer, each DIMM runs a MAC for each of
// its cold neurons, the GPU results are merged into DIMM 0, and ReLU runs in
// every DIMM. Then the window-based remapping (five tokens of neuron
// activity; DIMM pairs formed most-loaded with least-loaded; the most
// active neurons moved until the pair is balanced) issues MIGRATE commands
// over the DIMM-link, and a second token step runs on the new mapping.
// Every output is checked against an integer reference, and the most
// loaded DIMM's activity must go down.
//
// Mechanisms counted, each must occur: weight-port stalls, commands waiting
// for outstanding MACs, merges, ReLU, softmax, migrations, flits forwarded
// through an intermediate DIMM, and injection held back by through traffic.
module tb_hermes_ndp_array;
  import hermes_pkg::*;
  import tb_util_pkg::*;
  localparam int ND = 4, NM = 4, ROWS = 8, ACTN = 32, NN = 24;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n;

  logic              cmd_valid [ND], cmd_ready [ND], rsp_valid [ND], busy [ND];
  cmd_t              cmd [ND];
  logic [127:0]      rsp_data [ND];
  logic              wreq_valid [ND], wreq_ready [ND], wrsp_valid [ND];
  logic [31:0]       wreq_addr [ND], lrd_addr [ND], lwr_addr [ND], rx_words [ND];
  logic [128*NM-1:0] wrsp_data [ND];
  logic              lrd_valid [ND], lrd_ready [ND], lrd_rsp_valid [ND], lwr_valid [ND], lwr_ready [ND];
  logic [127:0]      lrd_rsp_data [ND], lwr_data [ND];

  hermes_ndp_array #(.NUM_DIMMS(ND), .NUM_MULT(NM), .BUF_ROWS(ROWS), .ACC_ENTRIES(16),
                     .ACT_N(ACTN)) dut (.*);

  for (genvar j = 0; j < ND; j++) begin : g_mem
    tb_dimm_mem #(.NUM_MULT(NM), .LAT(4), .STALL(1'b1)) u_mem (
      .clk, .wreq_valid(wreq_valid[j]), .wreq_addr(wreq_addr[j]), .wreq_ready(wreq_ready[j]),
      .wrsp_valid(wrsp_valid[j]), .wrsp_data(wrsp_data[j]),
      .lrd_valid(lrd_valid[j]), .lrd_addr(lrd_addr[j]), .lrd_ready(lrd_ready[j]),
      .lrd_rsp_valid(lrd_rsp_valid[j]), .lrd_rsp_data(lrd_rsp_data[j]),
      .lwr_valid(lwr_valid[j]), .lwr_addr(lwr_addr[j]), .lwr_data(lwr_data[j]),
      .lwr_ready(lwr_ready[j]));
  end

  // ------------------------------------------------------ event counters
  int n_drain_wait = 0, n_merge = 0, n_relu = 0, n_softmax = 0, n_migrate = 0;
  int n_forward = 0, n_inj_blocked = 0;
  always @(posedge clk) if (rst_n) begin
    for (int j = 0; j < ND; j++)
      if (cmd_valid[j] && !cmd_ready[j] && cmd[j].op != OP_MAC && cmd[j].op != OP_MIGRATE &&
          busy[j]) n_drain_wait++;
    if (dut.g_dimm[1].u_core.u_bridge.gnt_r[0]) n_forward++;
    if (dut.g_dimm[2].u_core.u_bridge.gnt_r[0]) n_forward++;
    if (dut.g_dimm[1].u_core.u_bridge.gnt_l[1]) n_forward++;
    if (dut.g_dimm[2].u_core.u_bridge.gnt_l[1]) n_forward++;
    if (dut.g_dimm[1].u_core.u_bridge.gnt_r[0] && dut.g_dimm[1].u_core.u_bridge.inj_valid &&
        dut.g_dimm[1].u_core.u_bridge.ti == 2'd1) n_inj_blocked++;
    if (dut.g_dimm[2].u_core.u_bridge.gnt_l[1] && dut.g_dimm[2].u_core.u_bridge.inj_valid &&
        dut.g_dimm[2].u_core.u_bridge.ti == 2'd0) n_inj_blocked++;
  end

  initial begin
    repeat (200000) @(posedge clk);
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

  // per-DIMM command streams, each driven at negedges
  cmd_t cq [ND][$];
  always @(negedge clk) begin
    for (int j = 0; j < ND; j++) begin
      if (cmd_valid[j] && cmd_ready_q[j]) void'(cq[j].pop_front());
    end
    for (int j = 0; j < ND; j++) begin
      cmd_valid[j] = (cq[j].size() > 0) && rst_n;
      cmd[j]       = (cq[j].size() > 0) ? cq[j][0] : '0;
    end
  end
  logic cmd_ready_q [ND];
  always @(posedge clk) for (int j = 0; j < ND; j++) cmd_ready_q[j] <= cmd_valid[j] && cmd_ready[j];

  task automatic wait_all();
    bit any;
    do begin
      @(negedge clk);
      any = 0;
      for (int j = 0; j < ND; j++) if (cq[j].size() > 0 || busy[j]) any = 1;
    end while (any);
    repeat (2) @(negedge clk);
  endtask

  task automatic push(input int j, input cmd_t c);
    cq[j].push_back(c);
    case (c.op)
      OP_MERGE:   n_merge++;
      OP_RELU:    n_relu++;
      OP_SOFTMAX: n_softmax++;
      OP_MIGRATE: n_migrate++;
      default: ;
    endcase
  endtask

  // ---------------------------------------------------------- host model
  int  wv [NN][32];
  int  xin [32];
  int  home [NN];        // -1: hot (GPU), else DIMM id
  int  lrow [NN];        // weight row in that DIMM's DRAM
  int  next_row [ND];
  int  act [NN];         // activations of each neuron over the window

  function automatic logic [127:0] pack8(input int v [8]);
    logic [127:0] w;
    for (int l = 0; l < 8; l++) w[16*l +: 16] = real_to_fp16(real'(v[l]));
    return w;
  endfunction

  function automatic int dot(input int i);
    int s;
    s = 0;
    for (int k = 0; k < 32; k++) s += wv[i][k] * xin[k];
    return s;
  endfunction

  task automatic store_neuron(input int i, input int j, input int r);
    int v [8];
    for (int k = 0; k < NM; k++) begin
      for (int l = 0; l < 8; l++) v[l] = wv[i][8*k + l];
      case (j)
        0: g_mem[0].u_mem.poke(r * NM + k, pack8(v));
        1: g_mem[1].u_mem.poke(r * NM + k, pack8(v));
        2: g_mem[2].u_mem.poke(r * NM + k, pack8(v));
        default: g_mem[3].u_mem.poke(r * NM + k, pack8(v));
      endcase
    end
  endtask

  // one token step: every neuron predicted active is computed where it lives
  task automatic token_step(input int step);
    cmd_t c;
    int   v [8];
    int   zero [8];
    for (int l = 0; l < 8; l++) zero[l] = 0;
    for (int k = 0; k < 32; k++) xin[k] = int'($urandom % 7) - 3;
    for (int j = 0; j < ND; j++) begin
      // input vector in row 0 (words 0..3), results in words 8..11 cleared
      for (int k = 0; k < NM; k++) begin
        for (int l = 0; l < 8; l++) v[l] = xin[8*k + l];
        c = '0; c.op = OP_BUF_WR; c.buf_addr = 14'(k); c.data = pack8(v);
        push(j, c);
      end
      for (int k = 0; k < NN / 8; k++) begin
        c = '0; c.op = OP_BUF_WR; c.buf_addr = 14'(8 + k); c.data = pack8(zero);
        push(j, c);
      end
    end
    // cold neurons: MAC on their DIMM
    for (int i = 0; i < NN; i++) begin
      if (home[i] >= 0) begin
        c = '0; c.op = OP_MAC; c.dram_addr = 32'(lrow[i]); c.buf_addr = 14'd0;
        c.acc_idx = 8'(i); c.first = 1'b1; c.last = 1'b1;
        c.dst_addr = 32'(8 + i / 8); c.lane = 3'(i % 8);
        push(home[i], c);
      end
    end
    // hot neurons: computed by the GPU, merged into DIMM 0
    for (int w = 0; w < NN / 8; w++) begin
      for (int l = 0; l < 8; l++) v[l] = (home[8*w + l] < 0) ? dot(8*w + l) : 0;
      c = '0; c.op = OP_MERGE; c.buf_addr = 14'(8 + w); c.data = pack8(v);
      push(0, c);
    end
    for (int j = 0; j < ND; j++) begin
      c = '0; c.op = OP_RELU; c.buf_addr = 14'd8; c.count = 16'(NN);
      push(j, c);
    end
    wait_all();
    // check: read back the result words of every DIMM
    for (int j = 0; j < ND; j++) begin
      for (int w = 0; w < NN / 8; w++) begin
        logic [127:0] d;
        c = '0; c.op = OP_BUF_RD; c.buf_addr = 14'(8 + w);
        push(j, c);
        wait_all();
        d = rsp_hold[j];
        for (int l = 0; l < 8; l++) begin
          int i, want;
          i = 8 * w + l;
          want = 0;
          if (home[i] == j || (home[i] < 0 && j == 0)) want = dot(i);
          if (want < 0) want = 0;
          chk(d[16*l +: 16] == real_to_fp16(real'(want)),
              $sformatf("step %0d DIMM %0d neuron %0d: %h want %0d", step, j, i, d[16*l +: 16], want));
        end
      end
    end
  endtask

  logic [127:0] rsp_hold [ND];
  always @(posedge clk) for (int j = 0; j < ND; j++) if (rsp_valid[j]) rsp_hold[j] <= rsp_data[j];

  function automatic void loads(output int z [ND]);
    for (int j = 0; j < ND; j++) z[j] = 0;
    for (int i = 0; i < NN; i++) if (home[i] >= 0) z[home[i]] += act[i];
  endfunction

  initial begin
    int z [ND], zb [ND], order [ND], max_before, max_after;
    int pct [ND+1] = '{90, 95, 60, 15, 3};
    cmd_t c;
    rst_n = 0;
    for (int j = 0; j < ND; j++) begin
      cmd_valid[j] = 0; cmd[j] = '0; next_row[j] = 0;
    end
    // weights and the initial (offline) mapping: neurons 0..3 hot on the GPU,
    // DIMM 0 holds 8 cold neurons, the others fewer
    for (int i = 0; i < NN; i++) for (int k = 0; k < 32; k++) wv[i][k] = int'($urandom % 5) - 2;
    for (int i = 0; i < NN; i++) begin
      if (i < 4) home[i] = -1;
      else if (i < 12) home[i] = 0;
      else home[i] = 1 + (i % 3);
      if (home[i] >= 0) begin
        lrow[i] = next_row[home[i]];
        next_row[home[i]]++;
        store_neuron(i, home[i], lrow[i]);
      end
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    token_step(0);

    // neuron activity over a window of 5 tokens: DIMM 0's neurons are the
    // most active, DIMM 3's the least (index 0 of pct: hot neurons)
    for (int i = 0; i < NN; i++) begin
      act[i] = 0;
      for (int t = 0; t < 5; t++) act[i] += ($urandom % 100) < pct[home[i] + 1];
    end
    loads(zb);
    max_before = 0;
    for (int j = 0; j < ND; j++) if (zb[j] > max_before) max_before = zb[j];
    // window-based remapping: sort DIMMs by load, pair first with last
    for (int j = 0; j < ND; j++) order[j] = j;
    for (int a = 0; a < ND; a++)
      for (int b = a + 1; b < ND; b++)
        if (zb[order[b]] > zb[order[a]]) begin
          int t;
          t = order[a]; order[a] = order[b]; order[b] = t;
        end
    for (int id = 0; id < ND / 2; id++) begin
      int hi, lo;
      hi = order[id];
      lo = order[ND - 1 - id];
      loads(z);
      forever begin
        int h, best;
        h = -1;
        best = 0;
        // the most active neuron on hi whose move still narrows the gap
        for (int i = 0; i < NN; i++)
          if (home[i] == hi && act[i] > best && 2 * act[i] <= z[hi] - z[lo] &&
              (z[hi] - z[lo] - 2 * act[i]) < (z[hi] - z[lo])) begin
            h = i;
            best = act[i];
          end
        if (h < 0) break;
        c = '0; c.op = OP_MIGRATE; c.dram_addr = 32'(lrow[h] * NM); c.count = 16'(NM);
        c.dst_dimm = 4'(lo); c.dst_addr = 32'(next_row[lo] * NM);
        push(hi, c);
        home[h] = lo;
        lrow[h] = next_row[lo];
        next_row[lo]++;
        z[hi] -= act[h];
        z[lo] += act[h];
      end
    end
    wait_all();
    repeat (40) @(negedge clk);    // let the last flits land
    loads(z);
    max_after = 0;
    for (int j = 0; j < ND; j++) if (z[j] > max_after) max_after = z[j];
    $display("window loads before: %0d %0d %0d %0d  after: %0d %0d %0d %0d",
             zb[0], zb[1], zb[2], zb[3], z[0], z[1], z[2], z[3]);
    chk(max_after < max_before, $sformatf("max DIMM load %0d -> %0d", max_before, max_after));
    token_step(1);

    // one softmax on DIMM 2's result vector: it must sum to about 1
    c = '0; c.op = OP_SOFTMAX; c.buf_addr = 14'd8; c.count = 16'(NN);
    push(2, c);
    wait_all();
    begin
      real tot;
      tot = 0.0;
      for (int w = 0; w < NN / 8; w++) begin
        c = '0; c.op = OP_BUF_RD; c.buf_addr = 14'(8 + w);
        push(2, c);
        wait_all();
        for (int l = 0; l < 8; l++) tot += fp16_to_real(rsp_hold[2][16*l +: 16]);
      end
      chk(tot > 0.97 && tot < 1.03, $sformatf("softmax sum %f", tot));
    end

    $display("weight stalls %0d %0d %0d %0d, drain waits %0d, merges %0d, relu %0d, softmax %0d, migrations %0d, forwarded flits %0d, injections held %0d",
             g_mem[0].u_mem.wreq_stalls, g_mem[1].u_mem.wreq_stalls, g_mem[2].u_mem.wreq_stalls,
             g_mem[3].u_mem.wreq_stalls, n_drain_wait, n_merge, n_relu, n_softmax, n_migrate,
             n_forward, n_inj_blocked);
    chk(g_mem[0].u_mem.wreq_stalls > 0, "no weight-port stall");
    chk(n_drain_wait > 0, "no drain wait");
    chk(n_merge > 0 && n_relu > 0 && n_softmax > 0, "merge/relu/softmax missing");
    chk(n_migrate > 0, "no migration");
    chk(n_forward > 0, "no flit forwarded through an intermediate DIMM");
    chk(n_inj_blocked > 0, "injection never held back by through traffic");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
