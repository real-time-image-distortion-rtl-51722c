// Streaming image distortion corrector with a subsampled correction map.
//
// Every output pixel (x, y) is the bilinear interpolation of the input
// image at (x + dx, y + dy), where (dx, dy) is the relative displacement
// given by the correction map. The map is stored only every 2**SUB_LOG2
// pixels and interpolated on the fly (map module); the input image is
// kept in a circular buffer of BUF_LINES lines split over four memories
// so that the four pixels around any source point are read in one clock.
//
// Data flow (one pixel per clock, no back-pressure):
//   input stream -> address manager -> buffer write manager -> 4 memories
//   address manager (output raster, `delay` lines behind) -> map module
//     -> buffer read manager -> 4 memories -> pixel interpolation -> output
//
// Interface
//  * in_valid/in_sof/in_pixel: raster-order input, in_sof on the first
//    pixel of a frame. IMG_W x IMG_H pixels per frame; the vertical
//    blanking after a frame must last at least IMG_W*delay clocks.
//  * cfg_delay_lines: the output lag in lines (2 .. BUF_LINES-1), sampled
//    with each frame sync. It belongs to the map in use: it must exceed
//    the largest downward displacement by two lines, and BUF_LINES minus
//    it bounds the upward displacement (see buffer_read_manager).
//  * map_wr_*: writes one map node (gx, gy) with signed displacements in
//    Q(MAP_W-MAP_FRAC).MAP_FRAC; load the map while no frame is running.
//  * out_valid/out_pixel/out_x/out_y/out_sof/out_eol: the corrected
//    image in raster order; out_window_err marks a pixel whose source
//    lay outside the rows the buffer holds (it is output as FILL_VALUE,
//    as are pixels whose source lies outside the image).
//  * overrun: a frame sync came while the previous output frame was
//    still being issued; that output frame is cut short.
// Timing: output pixel (x, y) is issued with input pixel
// (x, y + delay) and appears 10 clocks later.
//
// The block structure follows the paper's top-level diagram, as does the
// line delay that depends on the map in use; its run-time setting,
// widths, border handling and stream signalling are this design's own
// choices.
module distortion_corrector #(
  parameter int unsigned IMG_W       = dc_pkg::DEF_IMG_W,
  parameter int unsigned IMG_H       = dc_pkg::DEF_IMG_H,
  parameter int unsigned BUF_LINES   = dc_pkg::DEF_BUF_LINES,
  parameter int unsigned PIX_W       = dc_pkg::DEF_PIX_W,
  parameter int unsigned SUB_LOG2    = dc_pkg::DEF_SUB_LOG2,
  parameter int unsigned MAP_W       = dc_pkg::DEF_MAP_W,
  parameter int unsigned MAP_FRAC    = dc_pkg::DEF_MAP_FRAC,
  parameter logic [PIX_W-1:0] FILL_VALUE = '0,
  localparam int unsigned XW     = $clog2(IMG_W),
  localparam int unsigned YW     = $clog2(IMG_H),
  localparam int unsigned GXW    = $clog2(dc_pkg::grid_len(IMG_W, SUB_LOG2)),
  localparam int unsigned GYW    = $clog2(dc_pkg::grid_len(IMG_H, SUB_LOG2)),
  localparam int unsigned SW     = $clog2(BUF_LINES)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // input stream
  input  logic                    in_valid,
  input  logic                    in_sof,
  input  logic [PIX_W-1:0]        in_pixel,
  input  logic [SW-1:0]           cfg_delay_lines,  // output lag in lines, sampled at in_sof
  // map sample loading
  input  logic                    map_wr_en,
  input  logic [GXW-1:0]          map_wr_gx,
  input  logic [GYW-1:0]          map_wr_gy,
  input  logic signed [MAP_W-1:0] map_wr_dx,
  input  logic signed [MAP_W-1:0] map_wr_dy,
  // output stream
  output logic                    out_valid,
  output logic [PIX_W-1:0]        out_pixel,
  output logic [XW-1:0]           out_x,
  output logic [YW-1:0]           out_y,
  output logic                    out_sof,
  output logic                    out_eol,
  output logic                    out_window_err,
  output logic                    overrun
);

  localparam int unsigned DEPTH = (BUF_LINES / 2) * (IMG_W / 2);
  localparam int unsigned AW    = $clog2(DEPTH);

  // output-pixel sideband: position and frame flags
  typedef struct packed {
    logic [XW-1:0] x;
    logic [YW-1:0] y;
    logic          sof;
    logic          eol;
  } pix_tag_t;
  localparam int unsigned TW = $bits(pix_tag_t);

  // ---------------- address manager ----------------
  logic          am_wr_en;
  logic [XW-1:0] am_wr_x;
  logic [YW-1:0] am_wr_y;
  logic [SW-1:0] am_wr_slot;
  logic          am_rd_valid, am_rd_sof, am_rd_eol;
  logic [XW-1:0] am_rd_x;
  logic [YW-1:0] am_rd_y;
  logic [SW-1:0] am_rd_slot;
  logic [PIX_W-1:0] pix_q;

  logic [SW-1:0] am_rd_delay;

  address_manager #(
    .IMG_W(IMG_W), .IMG_H(IMG_H), .BUF_LINES(BUF_LINES)
  ) u_addr (
    .clk, .rst_n,
    .in_valid, .in_sof,
    .cfg_delay(cfg_delay_lines),
    .rd_delay(am_rd_delay),
    .wr_en   (am_wr_en),
    .wr_x    (am_wr_x),
    .wr_y    (am_wr_y),
    .wr_slot (am_wr_slot),
    .rd_valid(am_rd_valid),
    .rd_x    (am_rd_x),
    .rd_y    (am_rd_y),
    .rd_slot (am_rd_slot),
    .rd_sof  (am_rd_sof),
    .rd_eol  (am_rd_eol),
    .overrun (overrun)
  );

  // pixel data aligned with the registered write address
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) pix_q <= '0;
    else        pix_q <= in_pixel;
  end

  // ---------------- buffer write manager ----------------
  logic [3:0]       bw_sel;
  logic [AW-1:0]    bw_addr;
  logic [PIX_W-1:0] bw_data;

  buffer_write_manager #(
    .IMG_W(IMG_W), .BUF_LINES(BUF_LINES), .PIX_W(PIX_W)
  ) u_bwm (
    .clk, .rst_n,
    .wr_en   (am_wr_en),
    .wr_x    (am_wr_x),
    .wr_slot (am_wr_slot),
    .wr_pixel(pix_q),
    .wr_sel  (bw_sel),
    .wr_addr (bw_addr),
    .wr_data (bw_data)
  );

  // ---------------- map module ----------------
  pix_tag_t         am_tag, mm_tag;
  logic [SW-1:0]    mm_slot;
  logic             mm_valid;
  logic signed [MAP_W-1:0] mm_dx, mm_dy;

  always_comb begin
    am_tag.x   = am_rd_x;
    am_tag.y   = am_rd_y;
    am_tag.sof = am_rd_sof;
    am_tag.eol = am_rd_eol;
  end

  map_module #(
    .IMG_W(IMG_W), .IMG_H(IMG_H), .SUB_LOG2(SUB_LOG2), .MAP_W(MAP_W), .SBW(TW + SW)
  ) u_map (
    .clk, .rst_n,
    .map_wr_en, .map_wr_gx, .map_wr_gy, .map_wr_dx, .map_wr_dy,
    .in_valid (am_rd_valid),
    .in_x     (am_rd_x),
    .in_y     (am_rd_y),
    .in_sb    ({am_tag, am_rd_slot}),
    .out_valid(mm_valid),
    .out_dx   (mm_dx),
    .out_dy   (mm_dy),
    .out_sb   ({mm_tag, mm_slot})
  );

  // ---------------- buffer read manager ----------------
  logic               br_valid, br_x0_odd, br_y0_odd, br_fill, br_werr;
  logic [3:0][AW-1:0] br_addr;
  logic [MAP_FRAC:0]  br_fx, br_fy;
  pix_tag_t           br_tag;

  buffer_read_manager #(
    .IMG_W(IMG_W), .IMG_H(IMG_H), .BUF_LINES(BUF_LINES),
    .MAP_W(MAP_W), .MAP_FRAC(MAP_FRAC)
  ) u_brm (
    .clk, .rst_n,
    .in_valid     (mm_valid),
    .in_x         (mm_tag.x),
    .in_y         (mm_tag.y),
    .in_slot      (mm_slot),
    .in_dx        (mm_dx),
    .in_dy        (mm_dy),
    .in_delay     (am_rd_delay),
    .rd_valid     (br_valid),
    .rd_addr      (br_addr),
    .rd_x0_odd    (br_x0_odd),
    .rd_y0_odd    (br_y0_odd),
    .rd_fx        (br_fx),
    .rd_fy        (br_fy),
    .rd_fill      (br_fill),
    .rd_window_err(br_werr)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) br_tag <= '0;
    else        br_tag <= mm_tag;
  end

  // ---------------- buffer memories ----------------
  logic [3:0][PIX_W-1:0] bank_q;

  for (genvar b = 0; b < 4; b++) begin : g_bank
    buffer_memory #(.DEPTH(DEPTH), .DW(PIX_W)) u_mem (
      .clk,
      .wr_en  (bw_sel[b]),
      .wr_addr(bw_addr),
      .wr_data(bw_data),
      .rd_en  (br_valid),
      .rd_addr(br_addr[b]),
      .rd_data(bank_q[b])
    );
  end

  // align the quartet controls with the memory output
  logic              q_valid, q_x0_odd, q_y0_odd, q_fill, q_werr;
  logic [MAP_FRAC:0] q_fx, q_fy;
  pix_tag_t          q_tag;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q_valid  <= 1'b0;
      q_x0_odd <= 1'b0;
      q_y0_odd <= 1'b0;
      q_fill   <= 1'b0;
      q_werr   <= 1'b0;
      q_fx     <= '0;
      q_fy     <= '0;
      q_tag    <= '0;
    end else begin
      q_valid  <= br_valid;
      q_x0_odd <= br_x0_odd;
      q_y0_odd <= br_y0_odd;
      q_fill   <= br_fill;
      q_werr   <= br_werr;
      q_fx     <= br_fx;
      q_fy     <= br_fy;
      q_tag    <= br_tag;
    end
  end

  // ---------------- pixel interpolation ----------------
  pix_tag_t out_tag;

  pixel_interpolation #(
    .PIX_W(PIX_W), .FRAC(MAP_FRAC), .SBW(TW + 1), .FILL_VALUE(FILL_VALUE)
  ) u_pix (
    .clk, .rst_n,
    .in_valid (q_valid),
    .in_bank  (bank_q),
    .in_x0_odd(q_x0_odd),
    .in_y0_odd(q_y0_odd),
    .in_fx    (q_fx),
    .in_fy    (q_fy),
    .in_fill  (q_fill),
    .in_sb    ({q_tag, q_werr}),
    .out_valid(out_valid),
    .out_pixel(out_pixel),
    .out_sb   ({out_tag, out_window_err})
  );

  always_comb begin
    out_x   = out_tag.x;
    out_y   = out_tag.y;
    out_sof = out_tag.sof;
    out_eol = out_tag.eol;
  end

endmodule
