// tb_dimm_link_bridge: the bridge of DIMM 2 in an 8-DIMM chain. Random
// flits arrive from the left, from the right and from local injection, with
// random destinations consistent with their direction, while the three
// outputs drop ready at random. Every flit must leave on the port its
// destination selects, unchanged and in order per source; one flit per
// cycle must move through an output that is always ready; through traffic
// must win over injection.
module tb_dimm_link_bridge;
  import hermes_pkg::*;
  localparam int ME = 2;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n;
  logic  l_in_valid, r_in_valid, inj_valid, l_in_ready, r_in_ready, inj_ready;
  flit_t l_in_flit, r_in_flit, inj_flit;
  logic  l_out_valid, r_out_valid, ej_valid, l_out_ready, r_out_ready, ej_ready;
  flit_t l_out_flit, r_out_flit, ej_flit;
  int    sent = 0, got = 0, seq = 0, pri_seen = 0;
  flit_t expq [3][3][$];   // [source][output]

  dimm_link_bridge #(.MY_ID(ME)) dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int port_of(input flit_t f);
    if (int'(f.dst) < ME) return 0;
    if (int'(f.dst) > ME) return 1;
    return 2;
  endfunction

  function automatic flit_t mk(input int src);
    flit_t f;
    f = '0;
    f.data = {$urandom, $urandom, $urandom, $urandom};
    f.addr = seq;
    f.pad[1:0] = 2'(src);
    case (src)
      0: f.dst = ($urandom % 2) ? ID_W'(ME) : ID_W'(ME + 1 + $urandom % 5);   // from left
      1: f.dst = ($urandom % 2) ? ID_W'(ME) : ID_W'($urandom % ME);           // from right
      default: f.dst = ID_W'($urandom % 8);
    endcase
    seq++;
    return f;
  endfunction

  task automatic take(input int o, input flit_t f);
    int s;
    s = int'(f.pad[1:0]);
    checks++;
    got++;
    if (expq[s][o].size() == 0 || expq[s][o][0] !== f) begin
      failures++;
      if (failures < 10) $display("FAIL output %0d source %0d: unexpected flit", o, s);
    end else void'(expq[s][o].pop_front());
  endtask

  // sources and sinks, all changes at negedge
  logic random_ready;
  always @(negedge clk) begin
    if (rst_n) begin
      if (!l_in_valid || l_in_ready_q) begin l_in_valid <= ($urandom % 3) != 0; l_in_flit <= mk(0); end
      if (!r_in_valid || r_in_ready_q) begin r_in_valid <= ($urandom % 3) != 0; r_in_flit <= mk(1); end
      if (!inj_valid  || inj_ready_q)  begin inj_valid  <= ($urandom % 3) != 0; inj_flit  <= mk(2); end
      l_out_ready <= random_ready ? ($urandom % 4) != 0 : 1'b1;
      r_out_ready <= random_ready ? ($urandom % 4) != 0 : 1'b1;
      ej_ready    <= random_ready ? ($urandom % 4) != 0 : 1'b1;
    end
  end
  logic l_in_ready_q, r_in_ready_q, inj_ready_q;
  always @(posedge clk) begin
    l_in_ready_q <= l_in_valid && l_in_ready;
    r_in_ready_q <= r_in_valid && r_in_ready;
    inj_ready_q  <= inj_valid && inj_ready;
    if (rst_n) begin
      if (l_in_valid && l_in_ready) begin expq[0][port_of(l_in_flit)].push_back(l_in_flit); sent++; end
      if (r_in_valid && r_in_ready) begin expq[1][port_of(r_in_flit)].push_back(r_in_flit); sent++; end
      if (inj_valid && inj_ready)   begin expq[2][port_of(inj_flit)].push_back(inj_flit); sent++; end
      if (l_out_valid && l_out_ready) take(0, l_out_flit);
      if (r_out_valid && r_out_ready) take(1, r_out_flit);
      if (ej_valid && ej_ready)       take(2, ej_flit);
      // priority: injection must not take the right output from a waiting left flit
      if (l_in_valid && port_of(l_in_flit) == 1 && inj_valid && port_of(inj_flit) == 1 &&
          (!r_out_valid || r_out_ready)) begin
        pri_seen++;
        checks++;
        if (!l_in_ready || inj_ready) begin
          failures++;
          $display("FAIL priority");
        end
      end
    end
  end

  initial begin
    int moved, t0;
    rst_n = 0;
    l_in_valid = 0; r_in_valid = 0; inj_valid = 0;
    l_in_flit = '0; r_in_flit = '0; inj_flit = '0;
    l_out_ready = 1; r_out_ready = 1; ej_ready = 1;
    random_ready = 1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (3000) @(negedge clk);
    // rate: with all outputs ready, the right output moves a flit every cycle
    random_ready = 0;
    repeat (20) @(negedge clk);
    moved = 0;
    for (int c = 0; c < 200; c++) begin
      @(posedge clk);
      if (r_out_valid && r_out_ready) moved++;
    end
    // stop sources and drain
    @(negedge clk);
    force l_in_valid = 0; force r_in_valid = 0; force inj_valid = 0;
    repeat (20) @(negedge clk);
    checks++;
    if (sent != got) begin
      failures++;
      $display("FAIL sent %0d got %0d", sent, got);
    end
    checks++;
    if (pri_seen == 0) begin
      failures++;
      $display("FAIL priority case never happened");
    end
    checks++;
    if (moved < 100) begin
      failures++;
      $display("FAIL only %0d flits in 200 cycles on the right output", moved);
    end
    $display("flits %0d, priority cases %0d, right-output flits in 200 cycles %0d", got, pri_seen, moved);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
