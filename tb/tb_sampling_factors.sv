// Map-sampling workload: one VGA lens map, four node spacings.
//
// The map module is built four times, with a node every 8, 32, 64 and
// 128 pixels (SUB_LOG2 = 3, 5, 6, 7). Each copy is loaded with the same
// radial lens model, x_src - x = (x - cx)(k1 r^2 + k2 r^4) with r the
// distance from the centre over a focal length of 500 px, sampled at its
// nodes and quantised to 8 fractional bits. A full 640x480 raster is then
// run through all four in parallel. Every output is compared exactly with
// the fixed-point interpolation of the nodes. The geometric error against
// the exact per-pixel model is accumulated per spacing, and the test
// prints its RMSE, and checks that the error grows as the nodes get
// sparser, and that at 8 px spacing it stays below 0.1 px.
module tb_sampling_factors;
  import dc_pkg::*;
  localparam int W = DEF_IMG_W, H = DEF_IMG_H;
  localparam int NF = 4;
  localparam int SUBS [NF] = '{3, 5, 6, 7};
  localparam real CX = 319.5, CY = 239.5, FOC = 500.0, K1 = 0.12, K2 = 0.05;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0;
  logic [9:0] in_x = 0;
  logic [8:0] in_y = 0;
  bit   loaded [NF];

  int checks = 0, failures = 0;
  real sq_err [NF];
  int  n_err [NF];

  initial begin
    repeat (1_000_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real model_dx(real x, real y);
    real r2 = ((x - CX) * (x - CX) + (y - CY) * (y - CY)) / (FOC * FOC);
    return (x - CX) * (K1 * r2 + K2 * r2 * r2);
  endfunction
  function automatic real model_dy(real x, real y);
    real r2 = ((x - CX) * (x - CX) + (y - CY) * (y - CY)) / (FOC * FOC);
    return (y - CY) * (K1 * r2 + K2 * r2 * r2);
  endfunction
  function automatic int q8(real v);
    return int'($floor(v * 256.0 + 0.5));
  endfunction

  for (genvar k = 0; k < NF; k++) begin : g_factor
    localparam int N = SUBS[k], S = 1 << N;
    localparam int GW = grid_len(W, N), GH = grid_len(H, N);
    localparam int GXW = $clog2(GW), GYW = $clog2(GH);

    logic map_wr_en = 0;
    logic [GXW-1:0] map_wr_gx = 0;
    logic [GYW-1:0] map_wr_gy = 0;
    logic signed [15:0] map_wr_dx = 0, map_wr_dy = 0, out_dx, out_dy;
    logic out_valid;
    logic [18:0] out_sb;
    int nx [GH][GW], ny [GH][GW];

    map_module #(.IMG_W(W), .IMG_H(H), .SUB_LOG2(N), .SBW(19)) u_map (
      .clk, .rst_n, .map_wr_en, .map_wr_gx, .map_wr_gy, .map_wr_dx, .map_wr_dy,
      .in_valid, .in_x, .in_y, .in_sb({in_x, in_y}),
      .out_valid, .out_dx, .out_dy, .out_sb);

    initial begin
      for (int gy = 0; gy < GH; gy++)
        for (int gx = 0; gx < GW; gx++) begin
          nx[gy][gx] = q8(model_dx(real'(gx * S), real'(gy * S)));
          ny[gy][gx] = q8(model_dy(real'(gx * S), real'(gy * S)));
        end
      @(posedge rst_n);
      for (int gy = 0; gy < GH; gy++)
        for (int gx = 0; gx < GW; gx++) begin
          @(negedge clk);
          map_wr_en = 1; map_wr_gx = GXW'(gx); map_wr_gy = GYW'(gy);
          map_wr_dx = 16'(nx[gy][gx]); map_wr_dy = 16'(ny[gy][gx]);
        end
      @(negedge clk) map_wr_en = 0;
      loaded[k] = 1;
    end

    function automatic int ref_interp(int x, int y, bit is_y);
      int gx = x >> N, gy = y >> N, a = x % S, b = y % S;
      longint v;
      if (is_y)
        v = longint'(ny[gy][gx]) * (S-a) * (S-b) + longint'(ny[gy][gx+1]) * a * (S-b)
          + longint'(ny[gy+1][gx]) * (S-a) * b + longint'(ny[gy+1][gx+1]) * a * b;
      else
        v = longint'(nx[gy][gx]) * (S-a) * (S-b) + longint'(nx[gy][gx+1]) * a * (S-b)
          + longint'(nx[gy+1][gx]) * (S-a) * b + longint'(nx[gy+1][gx+1]) * a * b;
      return int'((v + (longint'(1) << (2*N - 1))) >>> (2*N));
    endfunction

    always @(posedge clk) if (rst_n && out_valid) begin
      int x, y;
      real ex, ey;
      x = int'(out_sb[18:9]); y = int'(out_sb[8:0]);
      checks++;
      if (int'(out_dx) != ref_interp(x, y, 0) || int'(out_dy) != ref_interp(x, y, 1)) begin
        failures++;
        if (failures < 10) $display("spacing %0d px, pixel %0d,%0d: got %0d,%0d", S, x, y, out_dx, out_dy);
      end
      ex = real'(out_dx) / 256.0 - model_dx(real'(x), real'(y));
      ey = real'(out_dy) / 256.0 - model_dy(real'(x), real'(y));
      sq_err[k] += ex * ex + ey * ey;
      n_err[k]++;
    end
  end

  initial begin
    real rmse [NF];
    repeat (3) @(negedge clk);
    rst_n = 1;
    wait (loaded[0] && loaded[1] && loaded[2] && loaded[3]);
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) begin
        @(negedge clk);
        in_valid = 1; in_x = 10'(x); in_y = 9'(y);
      end
    @(negedge clk) in_valid = 0;
    repeat (10) @(negedge clk);
    for (int k = 0; k < NF; k++) begin
      rmse[k] = $sqrt(sq_err[k] / real'(n_err[k]));
      $display("spacing %0d px: %0d nodes, geometric RMSE %f px over %0d pixels",
               1 << SUBS[k], grid_len(W, SUBS[k]) * grid_len(H, SUBS[k]), rmse[k], n_err[k]);
      checks++;
      if (n_err[k] != W * H) failures++;
    end
    for (int k = 1; k < NF; k++) begin
      checks++;
      if (!(rmse[k] > rmse[k-1])) begin failures++; $display("RMSE does not grow with spacing"); end
    end
    checks++;
    if (rmse[0] >= 0.1) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
