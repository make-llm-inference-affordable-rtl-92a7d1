// tb_ndp_buffer: 4 banks x 8 rows. Random word writes with random FP16 lane
// enables are mirrored in a reference array; every row read must match it.
module tb_ndp_buffer;
  localparam int NB = 4, ROWS = 8;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [2:0]          rd_row;
  logic [128*NB-1:0]   rd_data;
  logic                wr_en;
  logic [4:0]          wr_addr;
  logic [7:0]          wr_lane_en;
  logic [127:0]        wr_data;
  logic [127:0]        model [NB*ROWS];

  ndp_buffer #(.NUM_BANKS(NB), .ROWS(ROWS)) dut (.clk, .rd_row, .rd_data, .wr_en, .wr_addr,
                                                .wr_lane_en, .wr_data);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; rd_row = 0; wr_addr = 0; wr_lane_en = 0; wr_data = 0;
    // fill every word
    for (int a = 0; a < NB*ROWS; a++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = 5'(a); wr_lane_en = 8'hFF;
      wr_data = {$urandom, $urandom, $urandom, $urandom};
      model[a] = wr_data;
    end
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      wr_en = ($urandom % 2) == 1;
      wr_addr = 5'($urandom);
      wr_lane_en = 8'($urandom);
      wr_data = {$urandom, $urandom, $urandom, $urandom};
      if (wr_en)
        for (int l = 0; l < 8; l++)
          if (wr_lane_en[l]) model[wr_addr][16*l +: 16] = wr_data[16*l +: 16];
      rd_row = 3'($urandom);
      #1;
      // the read is combinational: before this edge's write lands
      @(posedge clk);
      #1;
      for (int b = 0; b < NB; b++) begin
        checks++;
        if (rd_data[128*b +: 128] !== model[int'(rd_row)*NB + b]) begin
          failures++;
          if (failures < 10) $display("FAIL row %0d bank %0d", rd_row, b);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
