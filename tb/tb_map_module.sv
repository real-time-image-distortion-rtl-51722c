// Test of the map module at the default size: loads random node
// displacements (in a range of +-40 pixels), presents output coordinates
// -- a full raster pass and then random points -- and compares the
// relative coordinates with the weighted-sum interpolation of the four
// nodes, rounded half up to 8 fractional bits. Checks the 4-clock latency
// and the sideband.
module tb_map_module;
  import dc_pkg::*;
  localparam int W = DEF_IMG_W, H = DEF_IMG_H, N = DEF_SUB_LOG2, S = 1 << N;
  localparam int GW = grid_len(W, N), GH = grid_len(H, N);
  localparam int LAT = 4, SBW = 6;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic map_wr_en = 0;
  logic [$clog2(GW)-1:0] map_wr_gx = 0;
  logic [$clog2(GH)-1:0] map_wr_gy = 0;
  logic signed [15:0] map_wr_dx = 0, map_wr_dy = 0, out_dx, out_dy;
  logic in_valid = 0, out_valid;
  logic [9:0] in_x = 0;
  logic [8:0] in_y = 0;
  logic [SBW-1:0] in_sb = 0, out_sb;

  map_module #(.SBW(SBW)) dut (.*);

  int checks = 0, failures = 0;
  int mx [GH][GW], my [GH][GW];

  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int interp(int m [GH][GW], int x, int y);
    int gx = x / S, gy = y / S, a = x % S, b = y % S;
    longint v;
    v = longint'(m[gy][gx]) * (S-a) * (S-b) + longint'(m[gy][gx+1]) * a * (S-b)
      + longint'(m[gy+1][gx]) * (S-a) * b + longint'(m[gy+1][gx+1]) * a * b;
    return int'($floor((real'(v) + real'(S*S) / 2.0) / real'(S*S)));
  endfunction

  // expected results, queued per clock
  bit vq [$];
  int xq [$], yq [$], sq [$];

  always @(posedge clk) if (rst_n) begin
    vq.push_back(in_valid); xq.push_back(interp(mx, int'(in_x), int'(in_y)));
    yq.push_back(interp(my, int'(in_x), int'(in_y))); sq.push_back(int'(in_sb));
    if (vq.size() > LAT) begin
      bit v; int ex, ey, es;
      v = vq.pop_front(); ex = xq.pop_front(); ey = yq.pop_front(); es = sq.pop_front();
      if (v || out_valid) begin
        checks++;
        if (out_valid != v || (v && (int'(out_dx) != ex || int'(out_dy) != ey || out_sb != SBW'(es)))) begin
          failures++;
          if (failures < 10) $display("got %0b %0d %0d, expected %0b %0d %0d", out_valid, out_dx, out_dy, v, ex, ey);
        end
      end
    end
  end

  initial begin
    for (int gy = 0; gy < GH; gy++)
      for (int gx = 0; gx < GW; gx++) begin
        mx[gy][gx] = $urandom_range(20480) - 10240;
        my[gy][gx] = $urandom_range(20480) - 10240;
      end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int gy = 0; gy < GH; gy++)
      for (int gx = 0; gx < GW; gx++) begin
        @(negedge clk);
        map_wr_en = 1; map_wr_gx = gx; map_wr_gy = gy;
        map_wr_dx = 16'(mx[gy][gx]); map_wr_dy = 16'(my[gy][gx]);
      end
    @(negedge clk) map_wr_en = 0;
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) begin
        @(negedge clk);
        in_valid = 1; in_x = 10'(x); in_y = 9'(y); in_sb = SBW'($urandom);
      end
    for (int i = 0; i < 20000; i++) begin
      @(negedge clk);
      in_valid = $urandom_range(1); in_x = 10'($urandom_range(W-1)); in_y = 9'($urandom_range(H-1));
      in_sb = SBW'($urandom);
    end
    @(negedge clk) in_valid = 0;
    repeat (LAT + 2) @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
