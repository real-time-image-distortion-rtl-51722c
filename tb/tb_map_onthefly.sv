// On-the-fly map workload: one lens model, 12, 16 and 20 fractional bits.
//
// Three copies of the on-the-fly map are built with FRAC = 12, 16 and 20
// and given the same radial-tangential lens (focal length 500 px, centre
// at the image centre, k1 = 0.12, k2 = 0.05, k3 = 0.01, p1 = 0.001,
// p2 = -0.0005). A full 640x480 raster runs through all three, with
// random idle clocks. Each output is compared exactly with a reference
// written here in 128-bit integer arithmetic, one formula per line. The
// geometric error against the same model in floating point is
// accumulated per copy, its RMSE printed, and the test checks that it
// falls as the precision grows, and that 20 bits stay below 0.05 px (1/fx quantised to 20 bits
// alone is off by about 0.02 px at the image border).
// It also checks the 8-clock latency and that the sideband follows.
module tb_map_onthefly;
  import dc_pkg::*;
  localparam int W = DEF_IMG_W, H = DEF_IMG_H;
  localparam int NF = 3;
  localparam int FRACS [NF] = '{12, 16, 20};
  localparam real F = 500.0, CX = 319.5, CY = 239.5;
  localparam real K1 = 0.12, K2 = 0.05, K3 = 0.01, P1 = 0.001, P2 = -0.0005;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0;
  logic [9:0] in_x = 0;
  logic [8:0] in_y = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  int checks = 0, failures = 0;
  real sq_err [NF];
  int  n_out [NF];

  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // floating-point model: displacement of output pixel (x, y)
  function automatic void model(real x, real y, output real dx, output real dy);
    real xn = (x - CX) / F, yn = (y - CY) / F;
    real r2 = xn * xn + yn * yn;
    real kr = 1.0 + K1 * r2 + K2 * r2 * r2 + K3 * r2 * r2 * r2;
    real xd = xn * kr + 2.0 * P1 * xn * yn + P2 * (r2 + 2.0 * xn * xn);
    real yd = yn * kr + P1 * (r2 + 2.0 * yn * yn) + 2.0 * P2 * xn * yn;
    dx = F * xd + CX - x;
    dy = F * yd + CY - y;
  endfunction

  typedef logic signed [127:0] w_t;

  for (genvar k = 0; k < NF; k++) begin : g_prec
    localparam int FR = FRACS[k];
    localparam int CW = FR + 14;
    typedef logic signed [CW-1:0] c_t;

    function automatic c_t q(real v);
      return c_t'(longint'($floor(v * real'(longint'(1) << FR) + 0.5)));
    endfunction

    c_t cfx, cfy, cfxi, cfyi, ccx, ccy, ck1, ck2, ck3, cp1, cp2;
    assign cfx = q(F);   assign cfy = q(F);
    assign cfxi = q(1.0 / F); assign cfyi = q(1.0 / F);
    assign ccx = q(CX);  assign ccy = q(CY);
    assign ck1 = q(K1);  assign ck2 = q(K2); assign ck3 = q(K3);
    assign cp1 = q(P1);  assign cp2 = q(P2);

    logic out_valid;
    logic signed [15:0] out_dx, out_dy;
    logic [18:0] out_sb;

    map_onthefly #(.IMG_W(W), .IMG_H(H), .FRAC(FR), .SBW(19)) u_otf (
      .clk, .rst_n,
      .cfg_fx(cfx), .cfg_fy(cfy), .cfg_fx_inv(cfxi), .cfg_fy_inv(cfyi),
      .cfg_cx(ccx), .cfg_cy(ccy), .cfg_k1(ck1), .cfg_k2(ck2), .cfg_k3(ck3),
      .cfg_p1(cp1), .cfg_p2(cp2),
      .in_valid, .in_x, .in_y, .in_sb({in_x, in_y}),
      .out_valid, .out_dx, .out_dy, .out_sb);

    function automatic w_t m(w_t a, w_t b);
      return (a * b) >>> FR;
    endfunction

    // the fixed-point formula, computed in one go
    function automatic void ref_fixed(int x, int y, output int dx, output int dy);
      w_t one = w_t'(1) <<< FR;
      w_t X = w_t'(x) <<< FR, Y = w_t'(y) <<< FR;
      w_t xn = m(X - w_t'(ccx), w_t'(cfxi));
      w_t yn = m(Y - w_t'(ccy), w_t'(cfyi));
      w_t x2 = m(xn, xn), y2 = m(yn, yn), xy = m(xn, yn);
      w_t r2 = x2 + y2;
      w_t r4 = m(r2, r2);
      w_t kr = one + m(w_t'(ck1), r2) + m(w_t'(ck2), r4) + m(m(r4, r2), w_t'(ck3));
      w_t xd = m(xn, kr) + (m(w_t'(cp1), xy) <<< 1) + m(w_t'(cp2), r2 + (x2 <<< 1));
      w_t yd = m(yn, kr) + m(w_t'(cp1), r2 + (y2 <<< 1)) + (m(w_t'(cp2), xy) <<< 1);
      w_t ddx = m(w_t'(cfx), xd) + w_t'(ccx) - X;
      w_t ddy = m(w_t'(cfy), yd) + w_t'(ccy) - Y;
      w_t half = w_t'(1) <<< (FR - 9);
      dx = int'((ddx + half) >>> (FR - 8));
      dy = int'((ddy + half) >>> (FR - 8));
    endfunction

    // input issue times, to check the latency
    longint t_in [$];
    always @(posedge clk) if (rst_n && in_valid) t_in.push_back(cycle);

    always @(posedge clk) if (rst_n && out_valid) begin
      int x, y, ex_dx, ex_dy;
      real mdx, mdy, ex, ey;
      longint t0;
      x = int'(out_sb[18:9]); y = int'(out_sb[8:0]);
      ref_fixed(x, y, ex_dx, ex_dy);
      checks++;
      if (int'(out_dx) != ex_dx || int'(out_dy) != ex_dy) begin
        failures++;
        if (failures < 10)
          $display("%0d bits, pixel %0d,%0d: got %0d,%0d expected %0d,%0d",
                   FR, x, y, out_dx, out_dy, ex_dx, ex_dy);
      end
      t0 = t_in.pop_front();
      checks++;
      if (cycle - t0 != 8) begin
        failures++;
        if (failures < 10) $display("%0d bits: latency %0d", FR, cycle - t0);
      end
      model(real'(x), real'(y), mdx, mdy);
      ex = real'(out_dx) / 256.0 - mdx;
      ey = real'(out_dy) / 256.0 - mdy;
      sq_err[k] += ex * ex + ey * ey;
      n_out[k]++;
    end
  end

  initial begin
    real rmse [NF];
    int idle;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) begin
        @(negedge clk);
        in_valid = 0;
        idle = $urandom_range(7);
        if (idle == 0) begin
          @(negedge clk);
        end
        in_valid = 1; in_x = 10'(x); in_y = 9'(y);
      end
    @(negedge clk) in_valid = 0;
    repeat (12) @(negedge clk);
    for (int k = 0; k < NF; k++) begin
      rmse[k] = $sqrt(sq_err[k] / real'(n_out[k]));
      $display("%0d fractional bits: geometric RMSE %f px over %0d pixels", FRACS[k], rmse[k], n_out[k]);
      checks++;
      if (n_out[k] != W * H) failures++;
    end
    for (int k = 1; k < NF; k++) begin
      checks++;
      if (!(rmse[k] < rmse[k-1])) begin failures++; $display("RMSE does not fall with precision"); end
    end
    checks++;
    if (rmse[NF-1] >= 0.05) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
