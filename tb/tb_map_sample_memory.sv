// Test of the map sample memory at the default size (81 x 61 nodes):
// writes a random value to every node, then reads random cells and checks
// that the four corners come back as nodes (gx,gy), (gx+1,gy), (gx,gy+1),
// (gx+1,gy+1) one clock after the read.
module tb_map_sample_memory;
  import dc_pkg::*;
  localparam int GW = grid_len(DEF_IMG_W, DEF_SUB_LOG2), GH = grid_len(DEF_IMG_H, DEF_SUB_LOG2);
  localparam int GXW = $clog2(GW), GYW = $clog2(GH);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic           wr_en = 0, rd_en = 0;
  logic [GXW-1:0] wr_gx = 0, rd_gx = 0;
  logic [GYW-1:0] wr_gy = 0, rd_gy = 0;
  logic [31:0]    wr_data = 0, s00, s01, s10, s11;

  map_sample_memory dut (.*);

  int checks = 0, failures = 0;
  logic [31:0] node [GH][GW];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int gx, gy;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (gy = 0; gy < GH; gy++)
      for (gx = 0; gx < GW; gx++) begin
        @(negedge clk);
        wr_en = 1; wr_gx = GXW'(gx); wr_gy = GYW'(gy); wr_data = $urandom;
        node[gy][gx] = wr_data;
      end
    @(negedge clk) wr_en = 0;
    for (int i = 0; i < 10000; i++) begin
      gx = $urandom_range(GW - 2); gy = $urandom_range(GH - 2);
      if (i < 4) begin gx = (i % 2) ? GW - 2 : 0; gy = (i / 2) ? GH - 2 : 0; end
      @(negedge clk);
      rd_en = 1; rd_gx = GXW'(gx); rd_gy = GYW'(gy);
      @(negedge clk);
      rd_en = 0;
      checks++;
      if (s00 != node[gy][gx] || s01 != node[gy][gx+1] || s10 != node[gy+1][gx] || s11 != node[gy+1][gx+1]) begin
        failures++;
        if (failures < 10) $display("cell %0d,%0d mismatch", gx, gy);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
