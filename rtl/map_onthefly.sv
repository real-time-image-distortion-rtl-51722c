// On-the-fly map: the displacement of each pixel computed from the lens model.
//
// This is the alternative to the subsampled map: no map memory, the
// displacement (dx, dy) of output pixel (x, y) is computed every clock from
// the pinhole model with radial and tangential distortion:
//   xn = (x - cx) / fx,  yn = (y - cy) / fy,  r2 = xn^2 + yn^2
//   kr = 1 + k1 r2 + k2 r2^2 + k3 r2^3
//   xd = xn kr + 2 p1 xn yn + p2 (r2 + 2 xn^2)
//   yd = yn kr + p1 (r2 + 2 yn^2) + 2 p2 xn yn
//   dx = fx xd + cx - x,  dy = fy yd + cy - y
// All arithmetic is signed fixed point with FRAC fractional bits. Each
// product is truncated back to FRAC bits, which is the precision loss the
// parameter trades against multiplier width. The result is rounded half up
// to MAP_FRAC bits and saturated to MAP_W bits, the same format as the
// subsampled map module, so either can feed the buffer read manager.
//
// Interface: the coefficients are static configuration inputs in the same
// fixed point (1/fx and 1/fy are given instead of fx and fy for the
// normalisation, so no divider is needed). in_valid/in_x/in_y/in_sb enter
// one pixel per clock; out_valid/out_dx/out_dy/out_sb leave LATENCY = 8
// clocks later. There is no stall.
//
// From the published architecture: computing the map from (x, y) every
// frame, in fixed point, with the fractional precision as the design
// parameter (12 to 20 bits are the values studied there), and the
// reference model being the common radial-tangential camera model. This
// design's own choices: no rotation or new camera matrix (the output uses
// the input camera matrix), so no homography division; the rational terms
// k4..k6 are left out, so no divider; reciprocal focal lengths as inputs;
// truncation after each product; the pipeline split and the word width
// CW = FRAC + 14.
module map_onthefly #(
  parameter int IMG_W    = dc_pkg::DEF_IMG_W,
  parameter int IMG_H    = dc_pkg::DEF_IMG_H,
  parameter int FRAC     = 20,
  parameter int MAP_W    = dc_pkg::DEF_MAP_W,
  parameter int MAP_FRAC = dc_pkg::DEF_MAP_FRAC,
  parameter int SBW      = 1,
  localparam int XW = $clog2(IMG_W),
  localparam int YW = $clog2(IMG_H),
  localparam int CW = FRAC + 14
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // lens model, signed fixed point with FRAC fractional bits
  input  logic signed [CW-1:0]    cfg_fx,
  input  logic signed [CW-1:0]    cfg_fy,
  input  logic signed [CW-1:0]    cfg_fx_inv,
  input  logic signed [CW-1:0]    cfg_fy_inv,
  input  logic signed [CW-1:0]    cfg_cx,
  input  logic signed [CW-1:0]    cfg_cy,
  input  logic signed [CW-1:0]    cfg_k1,
  input  logic signed [CW-1:0]    cfg_k2,
  input  logic signed [CW-1:0]    cfg_k3,
  input  logic signed [CW-1:0]    cfg_p1,
  input  logic signed [CW-1:0]    cfg_p2,
  // pixel stream
  input  logic                    in_valid,
  input  logic [XW-1:0]           in_x,
  input  logic [YW-1:0]           in_y,
  input  logic [SBW-1:0]          in_sb,
  output logic                    out_valid,
  output logic signed [MAP_W-1:0] out_dx,
  output logic signed [MAP_W-1:0] out_dy,
  output logic [SBW-1:0]          out_sb
);
  localparam int LATENCY = 8;
  localparam int SH = FRAC - MAP_FRAC;
  typedef logic signed [CW-1:0] fx_t;

  initial assert (FRAC > MAP_FRAC && FRAC <= 24) else $error("FRAC must lie in MAP_FRAC+1 .. 24");

  // fixed-point product, truncated to FRAC fractional bits
  function automatic fx_t mul(fx_t a, fx_t b);
    logic signed [2*CW-1:0] p = a * b;
    return fx_t'(p >>> FRAC);
  endfunction

  // pipeline registers
  fx_t px [1:LATENCY], py [1:LATENCY];      // the pixel, in fixed point
  fx_t xn [2:7], yn [2:7];
  fx_t x2_q, y2_q, xy_q;
  fx_t r2_q [4:5], r4_q, t1_q, a_q, b_q, c_q, d_q;
  fx_t t12_q, ab_q [6:7], cd_q [6:7], r6k3_q, kr_q, xd_q, yd_q;
  fx_t xn7_d, yn7_d;                        // xn and yn as they were at stage 7
  logic [LATENCY:1]  v_q;
  logic [SBW-1:0]    sb_q [1:LATENCY];

  fx_t one;
  assign one = fx_t'(1) <<< FRAC;

  // stage 8 arithmetic, registered in out_dx / out_dy
  fx_t xd_all, yd_all, dxf, dyf;
  assign xd_all = mul(xn7_d, kr_q) + xd_q;
  assign yd_all = mul(yn7_d, kr_q) + yd_q;
  assign dxf = mul(cfg_fx, xd_all) + cfg_cx - px[7];
  assign dyf = mul(cfg_fy, yd_all) + cfg_cy - py[7];

  function automatic logic signed [MAP_W-1:0] to_map(fx_t v);
    fx_t r = (v + (fx_t'(1) <<< (SH - 1))) >>> SH;
    if (r > fx_t'((1 <<< (MAP_W-1)) - 1)) return {1'b0, {(MAP_W-1){1'b1}}};
    if (r < -fx_t'(1 <<< (MAP_W-1)))      return {1'b1, {(MAP_W-1){1'b0}}};
    return MAP_W'(r);
  endfunction

  always_ff @(posedge clk) begin
    // 1: subtract the centre
    px[1] <= fx_t'(in_x) <<< FRAC;
    py[1] <= fx_t'(in_y) <<< FRAC;
    xn[2] <= (fx_t'(in_x) <<< FRAC) - cfg_cx;
    yn[2] <= (fx_t'(in_y) <<< FRAC) - cfg_cy;
    // 2: normalise
    xn[3] <= mul(xn[2], cfg_fx_inv);
    yn[3] <= mul(yn[2], cfg_fy_inv);
    // 3: squares and cross product
    x2_q  <= mul(xn[3], xn[3]);
    y2_q  <= mul(yn[3], yn[3]);
    xy_q  <= mul(xn[3], yn[3]);
    xn[4] <= xn[3];
    yn[4] <= yn[3];
    // 4: radius, tangential terms
    r2_q[4] <= x2_q + y2_q;
    a_q     <= mul(cfg_p1, xy_q) <<< 1;
    b_q     <= mul(cfg_p2, x2_q + y2_q + (x2_q <<< 1));
    c_q     <= mul(cfg_p1, x2_q + y2_q + (y2_q <<< 1));
    d_q     <= mul(cfg_p2, xy_q) <<< 1;
    xn[5]   <= xn[4];
    yn[5]   <= yn[4];
    // 5: r^4 and the first radial term
    r4_q    <= mul(r2_q[4], r2_q[4]);
    t1_q    <= mul(cfg_k1, r2_q[4]);
    r2_q[5] <= r2_q[4];
    ab_q[6] <= a_q + b_q;
    cd_q[6] <= c_q + d_q;
    xn[6]   <= xn[5];
    yn[6]   <= yn[5];
    // 6: r^6 k3 and the second radial term
    r6k3_q  <= mul(mul(r4_q, r2_q[5]), cfg_k3);
    t12_q   <= t1_q + mul(cfg_k2, r4_q);
    ab_q[7] <= ab_q[6];
    cd_q[7] <= cd_q[6];
    xn[7]   <= xn[6];
    yn[7]   <= yn[6];
    // 7: radial factor and the distorted normalised point
    kr_q    <= one + t12_q + r6k3_q;
    xd_q    <= ab_q[7];
    yd_q    <= cd_q[7];
    xn7_d   <= xn[7];
    yn7_d   <= yn[7];
    for (int i = 2; i <= LATENCY; i++) begin
      px[i] <= px[i-1];
      py[i] <= py[i-1];
    end
    sb_q[1] <= in_sb;
    for (int i = 2; i <= LATENCY; i++) sb_q[i] <= sb_q[i-1];
    // 8: back to pixels, displacement, rounding, saturation
    out_dx  <= to_map(dxf);
    out_dy  <= to_map(dyf);
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) v_q <= '0;
    else        v_q <= {v_q[LATENCY-1:1], in_valid};

  assign out_valid = v_q[LATENCY];
  assign out_sb    = sb_q[LATENCY];
endmodule
