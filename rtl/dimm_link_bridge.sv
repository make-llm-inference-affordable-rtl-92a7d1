// dimm_link_bridge: the DIMM-link router of one NDP-DIMM.
//
// The DIMMs form a chain: DIMM i is linked to DIMM i-1 on its left and DIMM
// i+1 on its right, and each link carries one flit per direction per cycle.
// A flit whose destination id is below MY_ID travels left, one above MY_ID
// travels right, and one equal to MY_ID is ejected to the local DIMM-link
// controller. The controller injects flits through inj.
//
// Every channel uses valid/ready: a flit moves when both are high, and a
// valid flit must stay unchanged until it moves. Each output (left, right,
// eject) has a one-flit register, so a hop takes one cycle and each output
// moves one flit per cycle. When two sources want the same output, traffic
// already on the chain wins over local injection, and for the eject output
// left beats right beats local.
//
// From the source architecture: bidirectional point-to-point links between
// DIMMs, 8 lanes of 25 Gb/s (200 bits per 1 GHz cycle, the flit width), a
// bridge per DIMM. The chain topology, the flow control and the priority
// order are this design's choices.
module dimm_link_bridge
  import hermes_pkg::*;
#(
  parameter int MY_ID = 0
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  l_in_valid,
  input  flit_t l_in_flit,
  output logic  l_in_ready,
  input  logic  r_in_valid,
  input  flit_t r_in_flit,
  output logic  r_in_ready,
  input  logic  inj_valid,
  input  flit_t inj_flit,
  output logic  inj_ready,
  output logic  l_out_valid,
  output flit_t l_out_flit,
  input  logic  l_out_ready,
  output logic  r_out_valid,
  output flit_t r_out_flit,
  input  logic  r_out_ready,
  output logic  ej_valid,
  output flit_t ej_flit,
  input  logic  ej_ready
);
  typedef enum logic [1:0] {P_L = 2'd0, P_R = 2'd1, P_E = 2'd2} port_e;

  function automatic port_e route(input flit_t f);
    if (int'(f.dst) < MY_ID) return P_L;
    if (int'(f.dst) > MY_ID) return P_R;
    return P_E;
  endfunction

  port_e       tl, tr, ti;
  logic        can_l, can_r, can_e;
  logic [2:0]  gnt_l, gnt_r, gnt_e;   // one-hot source: {inj, r_in, l_in}

  assign tl = route(l_in_flit);
  assign tr = route(r_in_flit);
  assign ti = route(inj_flit);

  assign can_l = !l_out_valid || l_out_ready;
  assign can_r = !r_out_valid || r_out_ready;
  assign can_e = !ej_valid    || ej_ready;

  always_comb begin
    gnt_l = '0;
    gnt_r = '0;
    gnt_e = '0;
    // left output: through traffic from the right, then injection
    if (can_l) begin
      if (r_in_valid && tr == P_L)      gnt_l = 3'b010;
      else if (inj_valid && ti == P_L)  gnt_l = 3'b100;
    end
    // right output: through traffic from the left, then injection
    if (can_r) begin
      if (l_in_valid && tl == P_R)      gnt_r = 3'b001;
      else if (inj_valid && ti == P_R)  gnt_r = 3'b100;
    end
    // eject: left, right, local
    if (can_e) begin
      if (l_in_valid && tl == P_E)      gnt_e = 3'b001;
      else if (r_in_valid && tr == P_E) gnt_e = 3'b010;
      else if (inj_valid && ti == P_E)  gnt_e = 3'b100;
    end
  end

  assign l_in_ready = gnt_r[0] | gnt_e[0];
  assign r_in_ready = gnt_l[1] | gnt_e[1];
  assign inj_ready  = gnt_l[2] | gnt_r[2] | gnt_e[2];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      l_out_valid <= 1'b0;
      r_out_valid <= 1'b0;
      ej_valid    <= 1'b0;
    end else begin
      if (can_l) l_out_valid <= |gnt_l;
      if (can_r) r_out_valid <= |gnt_r;
      if (can_e) ej_valid    <= |gnt_e;
    end
  end

  always_ff @(posedge clk) begin
    if (|gnt_l) l_out_flit <= gnt_l[1] ? r_in_flit : inj_flit;
    if (|gnt_r) r_out_flit <= gnt_r[0] ? l_in_flit : inj_flit;
    if (|gnt_e) ej_flit    <= gnt_e[0] ? l_in_flit : (gnt_e[1] ? r_in_flit : inj_flit);
  end

  // a flit offered on a channel must be held until it is taken
  property p_hold(logic v, logic r, flit_t f);
    @(posedge clk) disable iff (!rst_n) (v && !r) |=> (v && $stable(f));
  endproperty
  a_l_out_hold: assert property (p_hold(l_out_valid, l_out_ready, l_out_flit));
  a_r_out_hold: assert property (p_hold(r_out_valid, r_out_ready, r_out_flit));
  a_ej_hold:    assert property (p_hold(ej_valid, ej_ready, ej_flit));
endmodule
