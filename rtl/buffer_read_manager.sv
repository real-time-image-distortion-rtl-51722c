// Buffer read manager: turns the relative remap coordinates of an output
// pixel into the four buffer read addresses of its interpolation quartet.
//
// The map module supplies, for output pixel (x, y), a relative
// displacement (dx, dy) in signed fixed point with MAP_FRAC fractional
// bits; the source point is (x + dx, y + dy). Its integer part gives the
// top-left pixel (x0, y0) of the quartet and its fractional part the
// interpolation weights (fx, fy). The buffer slot of row y0 is found by
// adding the integer vertical displacement to the output row's slot
// (the buffer read address from the address manager) modulo BUF_LINES.
// For each of the four memories the module picks the quartet column and
// row of that memory's parity and forms (slot>>1)*(IMG_W/2) + (col>>1).
// It also reports the parity of (x0, y0), which tells the pixel
// interpolation module which memory holds which corner.
//
// Border rules (this design's own choice):
//  * a source point outside [0, IMG_W-1] x [0, IMG_H-1] is flagged
//    `fill` and the output pixel gets a constant fill value;
//  * a point on the last column (or row) is read as the pair
//    (IMG_W-2, IMG_W-1) with full weight 2**MAP_FRAC on the right pixel,
//    so fx and fy are MAP_FRAC+1 bits wide;
//  * a quartet whose rows are not guaranteed to be in the buffer -- rows
//    above y + delay - BUF_LINES + 1 or from y + delay on, with delay the
//    output frame's line delay (in_delay) -- is flagged `window_err` and
//    also filled.
//
// Timing: one register stage.
module buffer_read_manager #(
  parameter int unsigned IMG_W       = dc_pkg::DEF_IMG_W,
  parameter int unsigned IMG_H       = dc_pkg::DEF_IMG_H,
  parameter int unsigned BUF_LINES   = dc_pkg::DEF_BUF_LINES,
  parameter int unsigned MAP_W       = dc_pkg::DEF_MAP_W,
  parameter int unsigned MAP_FRAC    = dc_pkg::DEF_MAP_FRAC,
  localparam int unsigned XW    = $clog2(IMG_W),
  localparam int unsigned YW    = $clog2(IMG_H),
  localparam int unsigned SW    = $clog2(BUF_LINES),
  localparam int unsigned DEPTH = (BUF_LINES / 2) * (IMG_W / 2),
  localparam int unsigned AW    = $clog2(DEPTH)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic [XW-1:0]           in_x,
  input  logic [YW-1:0]           in_y,
  input  logic [SW-1:0]           in_slot,
  input  logic signed [MAP_W-1:0] in_dx,
  input  logic signed [MAP_W-1:0] in_dy,
  input  logic [SW-1:0]           in_delay,   // line delay of the output frame
  output logic                    rd_valid,
  output logic [3:0][AW-1:0]      rd_addr,    // read address of each memory
  output logic                    rd_x0_odd,  // column parity of the top-left pixel
  output logic                    rd_y0_odd,  // row parity of the top-left pixel
  output logic [MAP_FRAC:0]       rd_fx,      // 0 .. 2**MAP_FRAC
  output logic [MAP_FRAC:0]       rd_fy,
  output logic                    rd_fill,    // output the fill value
  output logic                    rd_window_err
);

  localparam logic [MAP_FRAC:0] ONE = (MAP_FRAC + 1)'(1) << MAP_FRAC;

  int signed     dxi, dyi, x0, y0, s0, s1, dy_lo, dy_hi;
  logic [MAP_FRAC:0] fx, fy;
  logic          in_img, win_ok;
  logic [3:0][AW-1:0] addr;
  int unsigned   col, slot;

  always_comb begin
    dxi = int'(in_dx) >>> MAP_FRAC;
    dyi = int'(in_dy) >>> MAP_FRAC;
    fx  = {1'b0, in_dx[MAP_FRAC-1:0]};
    fy  = {1'b0, in_dy[MAP_FRAC-1:0]};
    x0  = int'(in_x) + dxi;
    y0  = int'(in_y) + dyi;
    in_img = (x0 >= 0) && (y0 >= 0) &&
             ((x0 < int'(IMG_W) - 1) || (x0 == int'(IMG_W) - 1 && fx == '0)) &&
             ((y0 < int'(IMG_H) - 1) || (y0 == int'(IMG_H) - 1 && fy == '0));
    if (x0 == int'(IMG_W) - 1) begin
      x0 = x0 - 1;
      fx = ONE;
    end
    if (y0 == int'(IMG_H) - 1) begin
      y0  = y0 - 1;
      dyi = dyi - 1;
      fy  = ONE;
    end
    dy_lo  = int'(in_delay) - int'(BUF_LINES) + 1;   // lowest allowed y0 - y
    dy_hi  = int'(in_delay) - 2;                     // highest allowed y0 - y
    win_ok = (dyi >= dy_lo) && (dyi <= dy_hi);
    // slots of rows y0 and y0+1
    s0 = int'(in_slot) + dyi;
    if (s0 < 0) s0 = s0 + int'(BUF_LINES);
    else if (s0 >= int'(BUF_LINES)) s0 = s0 - int'(BUF_LINES);
    s1 = (s0 == int'(BUF_LINES) - 1) ? 0 : s0 + 1;
    for (int b = 0; b < 4; b++) begin
      // memory b holds row parity b[1] and column parity b[0]
      col  = ((x0 & 1) == (b & 1)) ? unsigned'(x0) : unsigned'(x0 + 1);
      slot = ((s0 & 1) == ((b >> 1) & 1)) ? unsigned'(s0) : unsigned'(s1);
      addr[b] = AW'((slot >> 1) * (IMG_W / 2) + (col >> 1));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_valid      <= 1'b0;
      rd_addr       <= '0;
      rd_x0_odd     <= 1'b0;
      rd_y0_odd     <= 1'b0;
      rd_fx         <= '0;
      rd_fy         <= '0;
      rd_fill       <= 1'b0;
      rd_window_err <= 1'b0;
    end else begin
      rd_valid      <= in_valid;
      rd_addr       <= addr;
      rd_x0_odd     <= x0[0];
      rd_y0_odd     <= y0[0];
      rd_fx         <= fx;
      rd_fy         <= fy;
      rd_fill       <= !(in_img && win_ok);
      rd_window_err <= in_valid && in_img && !win_ok;
    end
  end

endmodule
