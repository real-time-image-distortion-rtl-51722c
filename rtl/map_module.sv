// Map module: remapping function by interpolation of a subsampled map.
//
// For output pixel (x, y) it returns the relative input coordinates
// (dx, dy), i.e. the source point is (x + dx, y + dy). The map is kept
// only at nodes every S = 2**SUB_LOG2 pixels (map sample memory); the
// pixel lies in cell (x>>SUB_LOG2, y>>SUB_LOG2) with in-cell offsets
// fx = x mod S, fy = y mod S, and each displacement component is the
// bilinear interpolation of the cell's four node samples with weights
// fx/S, fy/S. Two interpolators of three multipliers each do this, one
// for map_x and one for map_y, as the paper's map-subsampling scheme
// prescribes. The interpolated value, which carries 2*SUB_LOG2 extra
// fractional bits, is rounded half up to MAP_FRAC fractional bits (the
// rounding rule is this design's own choice).
//
// Sideband: in_sb (position, slot, frame flags of the pixel) travels
// with the pixel through the pipeline and comes out as out_sb.
// Timing: 4 clocks from in_valid to out_valid (memory read, two
// interpolator stages, rounding), one pixel per clock.
module map_module #(
  parameter int unsigned IMG_W    = dc_pkg::DEF_IMG_W,
  parameter int unsigned IMG_H    = dc_pkg::DEF_IMG_H,
  parameter int unsigned SUB_LOG2 = dc_pkg::DEF_SUB_LOG2,
  parameter int unsigned MAP_W    = dc_pkg::DEF_MAP_W,
  parameter int unsigned SBW      = 1,
  localparam int unsigned XW     = $clog2(IMG_W),
  localparam int unsigned YW     = $clog2(IMG_H),
  localparam int unsigned GRID_W = dc_pkg::grid_len(IMG_W, SUB_LOG2),
  localparam int unsigned GRID_H = dc_pkg::grid_len(IMG_H, SUB_LOG2),
  localparam int unsigned GXW    = $clog2(GRID_W),
  localparam int unsigned GYW    = $clog2(GRID_H)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // sample loading
  input  logic                    map_wr_en,
  input  logic [GXW-1:0]          map_wr_gx,
  input  logic [GYW-1:0]          map_wr_gy,
  input  logic signed [MAP_W-1:0] map_wr_dx,
  input  logic signed [MAP_W-1:0] map_wr_dy,
  // output image coordinates
  input  logic                    in_valid,
  input  logic [XW-1:0]           in_x,
  input  logic [YW-1:0]           in_y,
  input  logic [SBW-1:0]          in_sb,
  // relative input image coordinates
  output logic                    out_valid,
  output logic signed [MAP_W-1:0] out_dx,
  output logic signed [MAP_W-1:0] out_dy,
  output logic [SBW-1:0]          out_sb
);

  localparam int unsigned FB  = SUB_LOG2;
  localparam int unsigned OW  = MAP_W + 2*FB + 4;
  localparam int unsigned PSB = SBW;

  // stage 0 -> memory read
  logic [GXW-1:0] gx;
  logic [GYW-1:0] gy;
  always_comb begin
    gx = GXW'(in_x >> SUB_LOG2);
    gy = GYW'(in_y >> SUB_LOG2);
  end

  logic [2*MAP_W-1:0] s00, s01, s10, s11;

  map_sample_memory #(
    .IMG_W(IMG_W), .IMG_H(IMG_H), .SUB_LOG2(SUB_LOG2), .MAP_W(MAP_W)
  ) u_samples (
    .clk, .rst_n,
    .wr_en  (map_wr_en),
    .wr_gx  (map_wr_gx),
    .wr_gy  (map_wr_gy),
    .wr_data({map_wr_dx, map_wr_dy}),
    .rd_en  (in_valid),
    .rd_gx  (gx),
    .rd_gy  (gy),
    .s00, .s01, .s10, .s11
  );

  // sideband and in-cell offsets, aligned with the memory output
  logic           m_valid;
  logic [SBW-1:0] m_sb;
  logic [FB-1:0]  m_x;   // in-cell offsets
  logic [FB-1:0]  m_y;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      m_valid <= 1'b0;
      m_sb    <= '0;
      m_x     <= '0;
      m_y     <= '0;
    end else begin
      m_valid <= in_valid;
      m_sb    <= in_sb;
      m_x     <= in_x[FB-1:0];
      m_y     <= in_y[FB-1:0];
    end
  end

  logic [FB:0] fx, fy;
  always_comb begin
    fx = {1'b0, m_x};
    fy = {1'b0, m_y};
  end

  logic                 ix_valid, iy_valid;
  logic signed [OW-1:0] rx, ry;
  logic [PSB-1:0]       i_sb, unused_sb;

  bilinear_interpolator #(.VW(MAP_W), .FB(FB), .SBW(PSB)) u_interp_x (
    .clk, .rst_n,
    .in_valid (m_valid),
    .v00      (s00[2*MAP_W-1:MAP_W]),
    .v01      (s01[2*MAP_W-1:MAP_W]),
    .v10      (s10[2*MAP_W-1:MAP_W]),
    .v11      (s11[2*MAP_W-1:MAP_W]),
    .fx, .fy,
    .sb_in    (m_sb),
    .out_valid(ix_valid),
    .res      (rx),
    .sb_out   (i_sb)
  );

  bilinear_interpolator #(.VW(MAP_W), .FB(FB), .SBW(PSB)) u_interp_y (
    .clk, .rst_n,
    .in_valid (m_valid),
    .v00      (s00[MAP_W-1:0]),
    .v01      (s01[MAP_W-1:0]),
    .v10      (s10[MAP_W-1:0]),
    .v11      (s11[MAP_W-1:0]),
    .fx, .fy,
    .sb_in    (m_sb),
    .out_valid(iy_valid),
    .res      (ry),
    .sb_out   (unused_sb)
  );

  // round half up to MAP_FRAC fractional bits
  localparam logic signed [OW-1:0] HALF = (2*FB == 0) ? '0 : (OW'(1) <<< (2*FB - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_dx    <= '0;
      out_dy    <= '0;
      out_sb    <= '0;
    end else begin
      out_valid <= ix_valid;
      out_dx    <= MAP_W'((rx + HALF) >>> (2*FB));
      out_dy    <= MAP_W'((ry + HALF) >>> (2*FB));
      out_sb    <= i_sb;
    end
  end

  // both interpolators run in lockstep
  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
                               ix_valid == iy_valid && i_sb == unused_sb)
    else $error("map_module: interpolators out of step");

endmodule
