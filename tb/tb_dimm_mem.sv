// tb_dimm_mem: behavioural model of one DIMM's local memory controller and
// DRAM, for the testbenches. Not synthesizable design content.
//
// Storage is a sparse array of 128-bit words (unwritten words read as 0).
// Weight row port: a request for row r returns words r*NUM_MULT ..
// r*NUM_MULT+NUM_MULT-1 as one beat, LAT cycles after it is accepted, in
// order. Word port: reads return one word LAT cycles later; writes are
// stored at once. With STALL set, the ready outputs drop at random, about
// one cycle in four, to exercise back-pressure.
module tb_dimm_mem #(
  parameter int NUM_MULT = 4,
  parameter int LAT      = 3,
  parameter bit STALL    = 1'b0
) (
  input  logic                    clk,
  input  logic                    wreq_valid,
  input  logic [31:0]             wreq_addr,
  output logic                    wreq_ready,
  output logic                    wrsp_valid,
  output logic [128*NUM_MULT-1:0] wrsp_data,
  input  logic                    lrd_valid,
  input  logic [31:0]             lrd_addr,
  output logic                    lrd_ready,
  output logic                    lrd_rsp_valid,
  output logic [127:0]            lrd_rsp_data,
  input  logic                    lwr_valid,
  input  logic [31:0]             lwr_addr,
  input  logic [127:0]            lwr_data,
  output logic                    lwr_ready
);
  logic [127:0] mem [logic [31:0]];
  int unsigned  wq_addr[$], wq_due[$], lq_addr[$], lq_due[$];
  int unsigned  cyc = 0;
  int unsigned  wreq_stalls = 0;

  function automatic logic [127:0] peek(input logic [31:0] a);
    return mem.exists(a) ? mem[a] : 128'd0;
  endfunction
  function automatic void poke(input logic [31:0] a, input logic [127:0] d);
    mem[a] = d;
  endfunction

  initial begin
    wreq_ready    = 1'b1;
    lrd_ready     = 1'b1;
    lwr_ready     = 1'b1;
    wrsp_valid    = 1'b0;
    lrd_rsp_valid = 1'b0;
    wrsp_data     = '0;
    lrd_rsp_data  = '0;
  end

  always @(posedge clk) begin
    cyc++;
    if (wreq_valid && !wreq_ready) wreq_stalls++;
    if (wreq_valid && wreq_ready) begin
      wq_addr.push_back(wreq_addr);
      wq_due.push_back(cyc + LAT - 1);
    end
    if (lrd_valid && lrd_ready) begin
      lq_addr.push_back(lrd_addr);
      lq_due.push_back(cyc + LAT - 1);
    end
    if (lwr_valid && lwr_ready) mem[lwr_addr] = lwr_data;
    wrsp_valid <= 1'b0;
    if (wq_due.size() > 0 && wq_due[0] <= cyc) begin
      logic [128*NUM_MULT-1:0] row;
      for (int k = 0; k < NUM_MULT; k++) row[128*k +: 128] = peek(wq_addr[0] * NUM_MULT + k);
      wrsp_valid <= 1'b1;
      wrsp_data  <= row;
      void'(wq_addr.pop_front());
      void'(wq_due.pop_front());
    end
    lrd_rsp_valid <= 1'b0;
    if (lq_due.size() > 0 && lq_due[0] <= cyc) begin
      lrd_rsp_valid <= 1'b1;
      lrd_rsp_data  <= peek(lq_addr[0]);
      void'(lq_addr.pop_front());
      void'(lq_due.pop_front());
    end
    if (STALL) begin
      wreq_ready <= ($urandom % 4) != 0;
      lrd_ready  <= ($urandom % 4) != 0;
      lwr_ready  <= ($urandom % 4) != 0;
    end
  end
endmodule
