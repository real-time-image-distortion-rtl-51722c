// End-to-end test of the distortion corrector at its default size
// (640x480 frames, 50-line buffer, map node every 8 pixels), with a line
// delay of 25 for the first two frames and 30 for the third.
//
// The test loads a synthetic barrel-distortion map, streams a frame with
// random idle cycles, loads a second map (identity with two patches whose
// vertical displacement exceeds the buffer window and one fractional
// patch), streams a frame whose vertical blanking is too short so that the
// next frame sync causes an overrun, and streams a third frame. Every
// output pixel is compared with a reference computed here from the map
// nodes and the input image with the weighted-sum form of bilinear
// interpolation. It also checks the output raster order, the pipeline
// latency (10 clocks from input pixel (0, delay) to output pixel (0, 0)),
// the pixel count of complete frames, and that each mechanism happened:
// input idle cycles, fill outside the image, window errors, edge
// clamping, flush after the input frame, and overrun.
module tb_distortion_corrector;
  import dc_pkg::*;

  localparam int W = DEF_IMG_W, H = DEF_IMG_H, L = DEF_BUF_LINES;
  localparam int N = DEF_SUB_LOG2, S = 1 << N;
  localparam int GW = grid_len(W, N), GH = grid_len(H, N);
  localparam int MF = DEF_MAP_FRAC;
  localparam int PIPE_LAT = 10;
  localparam int NFRAMES = 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid = 0, in_sof = 0;
  logic [7:0] in_pixel = 0;
  logic [5:0] cfg_delay_lines = 0;
  logic map_wr_en = 0;
  logic [$clog2(GW)-1:0] map_wr_gx = 0;
  logic [$clog2(GH)-1:0] map_wr_gy = 0;
  logic signed [15:0] map_wr_dx = 0, map_wr_dy = 0;
  logic out_valid, out_sof, out_eol, out_window_err, overrun;
  logic [7:0] out_pixel;
  logic [9:0] out_x;
  logic [8:0] out_y;

  distortion_corrector dut (.*);

  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // watchdog
  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- stimulus data ----------------
  logic [7:0]  img   [NFRAMES][H][W];
  int          mapx  [2][GH][GW];
  int          mapy  [2][GH][GW];
  int          frame_map [NFRAMES] = '{0, 1, 1};
  int          frame_dly [NFRAMES] = '{DEF_DELAY_LINES, DEF_DELAY_LINES, 30};

  initial begin
    for (int f = 0; f < NFRAMES; f++)
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++)
          img[f][y][x] = 8'((x * 7 + y * 13 + f * 31 + ((x * y) >> 5)) ^ (f * 85));
    for (int gy = 0; gy < GH; gy++)
      for (int gx = 0; gx < GW; gx++) begin
        real px, py, u, v, r2, k;
        px = real'(gx * S); py = real'(gy * S);
        u = (px - W/2) / (W/2); v = (py - H/2) / (W/2);
        r2 = u*u + v*v; k = 0.06 * r2;
        mapx[0][gy][gx] = $rtoi((px - W/2) * k * 256.0);
        mapy[0][gy][gx] = $rtoi((py - H/2) * k * 256.0);
        mapx[1][gy][gx] = 0;
        mapy[1][gy][gx] = 0;
        if (gx >= 20 && gx <= 24 && gy >= 20 && gy <= 24) mapy[1][gy][gx] =  30 * 256;
        if (gx >= 50 && gx <= 54 && gy >= 30 && gy <= 34) mapy[1][gy][gx] = -30 * 256;
        if (gx >= 60 && gx <= 70 && gy >= 5  && gy <= 15) begin
          mapx[1][gy][gx] = 77 + gx * 3;      // fractional shifts
          mapy[1][gy][gx] = -150 + gy * 11;
        end
      end
  end

  // ---------------- reference model ----------------
  typedef struct { int pix; bit fill; bit werr; bit clamp; } ref_t;

  function automatic ref_t reference(int f, int x, int y);
    ref_t r;
    int m = frame_map[f];
    int D = frame_dly[f];
    int gx = x >> N, gy = y >> N, fx = x % S, fy = y % S;
    longint vx, vy;
    int dx, dy, dxi, dyi, x0, y0, ax, ay;
    longint acc;
    vx = longint'(mapx[m][gy][gx])   * (S-fx) * (S-fy) + longint'(mapx[m][gy][gx+1])   * fx * (S-fy)
       + longint'(mapx[m][gy+1][gx]) * (S-fx) * fy     + longint'(mapx[m][gy+1][gx+1]) * fx * fy;
    vy = longint'(mapy[m][gy][gx])   * (S-fx) * (S-fy) + longint'(mapy[m][gy][gx+1])   * fx * (S-fy)
       + longint'(mapy[m][gy+1][gx]) * (S-fx) * fy     + longint'(mapy[m][gy+1][gx+1]) * fx * fy;
    dx = int'((vx + (1 << (2*N-1))) >>> (2*N));
    dy = int'((vy + (1 << (2*N-1))) >>> (2*N));
    dxi = dx >>> MF; dyi = dy >>> MF;
    ax = dx & 255; ay = dy & 255;
    x0 = x + dxi; y0 = y + dyi;
    r.clamp = 0;
    r.fill = !(x0 >= 0 && y0 >= 0 && (x0 < W-1 || (x0 == W-1 && ax == 0))
                                  && (y0 < H-1 || (y0 == H-1 && ay == 0)));
    if (x0 == W-1) begin x0 = W-2; ax = 256; r.clamp = 1; end
    if (y0 == H-1) begin y0 = H-2; ay = 256; r.clamp = 1; end
    r.werr = !r.fill && !((y0 - y) >= D - L + 1 && (y0 - y) <= D - 2);
    if (r.fill || r.werr) begin
      r.pix = 0;
    end else begin
      acc = longint'(img[f][y0][x0]) * (256-ax) * (256-ay) + longint'(img[f][y0][x0+1]) * ax * (256-ay)
          + longint'(img[f][y0+1][x0]) * (256-ax) * ay     + longint'(img[f][y0+1][x0+1]) * ax * ay;
      r.pix = int'((acc + 32768) >> 16);
    end
    return r;
  endfunction

  // ---------------- drivers ----------------
  int  idle_cycles = 0;
  longint t_in_start [NFRAMES];
  bit  in_done [NFRAMES];

  task automatic load_map(int m);
    for (int gy = 0; gy < GH; gy++)
      for (int gx = 0; gx < GW; gx++) begin
        @(negedge clk);
        map_wr_en = 1; map_wr_gx = gx; map_wr_gy = gy;
        map_wr_dx = 16'(mapx[m][gy][gx]); map_wr_dy = 16'(mapy[m][gy][gx]);
      end
    @(negedge clk) map_wr_en = 0;
  endtask

  task automatic send_frame(int f, int blank);
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) begin
        @(negedge clk);
        while ($urandom_range(15) == 0) begin
          in_valid = 0; in_sof = 0; idle_cycles++;
          @(negedge clk);
        end
        in_valid = 1; in_sof = (x == 0 && y == 0); in_pixel = img[f][y][x];
        cfg_delay_lines = 6'(frame_dly[f]);
        if (x == 0 && y == frame_dly[f]) t_in_start[f] = cycle;
      end
    @(negedge clk) in_valid = 0; in_sof = 0;
    in_done[f] = 1;
    repeat (blank) @(negedge clk);
  endtask

  // ---------------- output checker ----------------
  int oframe = -1, ex = 0, ey = 0, ocount [NFRAMES];
  bit skipping = 0;
  int n_fill = 0, n_werr = 0, n_clamp = 0, n_flush = 0, n_overrun = 0;

  always @(posedge clk) if (rst_n) begin
    if (overrun) begin
      n_overrun++;
      skipping = 1;      // pixels of the aborted frame still in flight
    end
    if (out_valid) begin
      if (out_sof) begin
        oframe++; ex = 0; ey = 0; skipping = 0;
        checks++;
        if (oframe < NFRAMES && cycle - t_in_start[oframe] != PIPE_LAT) begin
          failures++;
          $display("latency frame %0d: %0d clocks", oframe, cycle - t_in_start[oframe]);
        end
      end
      if (!skipping && oframe >= 0 && oframe < NFRAMES) begin
        ref_t r;
        r = reference(oframe, ex, ey);
        checks++;
        if (out_x != ex || out_y != ey || out_pixel != r.pix || out_window_err != r.werr
            || out_eol != (ex == W-1)) begin
          failures++;
          if (failures < 10)
            $display("frame %0d pixel (%0d,%0d): got (%0d,%0d) %0d werr %0b, expected %0d werr %0b",
                     oframe, ex, ey, out_x, out_y, out_pixel, out_window_err, r.pix, r.werr);
        end
        n_fill  += r.fill;
        n_werr  += out_window_err;
        n_clamp += r.clamp;
        if (ey >= H - frame_dly[oframe]) n_flush++;
        ocount[oframe]++;
        if (ex == W-1) begin ex = 0; ey++; end else ex++;
      end
    end
  end

  initial begin
    repeat (4) @(negedge clk);
    rst_n = 1;
    load_map(0);
    send_frame(0, W * frame_dly[0] + 100);
    load_map(1);
    send_frame(1, W * frame_dly[1] / 2);    // too short: the next frame sync overruns
    send_frame(2, W * frame_dly[2] + 100);
    repeat (50) @(negedge clk);

    checks++; if (ocount[0] != W*H) begin failures++; $display("frame 0: %0d pixels", ocount[0]); end
    checks++; if (ocount[2] != W*H) begin failures++; $display("frame 2: %0d pixels", ocount[2]); end
    checks++; if (oframe != 2) begin failures++; $display("%0d output frames", oframe + 1); end
    $display("mechanisms: idle=%0d fill=%0d window_err=%0d clamp=%0d flush=%0d overrun=%0d",
             idle_cycles, n_fill, n_werr, n_clamp, n_flush, n_overrun);
    checks++; if (idle_cycles == 0) failures++;
    checks++; if (n_fill == 0) failures++;
    checks++; if (n_werr == 0) failures++;
    checks++; if (n_clamp == 0) failures++;
    checks++; if (n_flush == 0) failures++;
    checks++; if (n_overrun != 1) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
