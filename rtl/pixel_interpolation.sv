// Pixel interpolation module: computes an output pixel from its quartet.
//
// The four buffer memories deliver, in the same clock, the four input
// pixels around the source point. Memory {r, c} holds the pixel of row
// parity r and column parity c, so the parities of the top-left pixel
// (x0_odd, y0_odd) tell which memory holds which corner: corner (i, j)
// (i = row offset, j = column offset) comes from memory
// {y0_odd ^ i, x0_odd ^ j}. The corners are interpolated with weights
// fx, fy (units of 2**-FRAC, 0 .. 2**FRAC) by a three-multiplier bilinear
// interpolator and rounded half up to PIX_W bits. A pixel flagged `fill`
// (source point outside the image or the buffer window) is replaced by
// FILL_VALUE; fill handling is this design's own choice.
//
// Sideband in_sb travels with the pixel. Timing: 3 clocks from in_valid
// to out_valid, one pixel per clock.
module pixel_interpolation #(
  parameter int unsigned PIX_W = dc_pkg::DEF_PIX_W,
  parameter int unsigned FRAC  = dc_pkg::DEF_MAP_FRAC,
  parameter int unsigned SBW   = 1,
  parameter logic [PIX_W-1:0] FILL_VALUE = '0
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  input  logic [3:0][PIX_W-1:0] in_bank,   // data of memory 0..3
  input  logic                  in_x0_odd,
  input  logic                  in_y0_odd,
  input  logic [FRAC:0]         in_fx,
  input  logic [FRAC:0]         in_fy,
  input  logic                  in_fill,
  input  logic [SBW-1:0]        in_sb,
  output logic                  out_valid,
  output logic [PIX_W-1:0]      out_pixel,
  output logic [SBW-1:0]        out_sb
);

  localparam int unsigned VW = PIX_W + 1;
  localparam int unsigned OW = VW + 2*FRAC + 4;
  localparam logic signed [OW-1:0] HALF = OW'(1) <<< (2*FRAC - 1);

  logic signed [VW-1:0] c00, c01, c10, c11;
  always_comb begin
    c00 = signed'({1'b0, in_bank[{in_y0_odd,  in_x0_odd}]});
    c01 = signed'({1'b0, in_bank[{in_y0_odd, ~in_x0_odd}]});
    c10 = signed'({1'b0, in_bank[{~in_y0_odd,  in_x0_odd}]});
    c11 = signed'({1'b0, in_bank[{~in_y0_odd, ~in_x0_odd}]});
  end

  logic                 i_valid, i_fill;
  logic signed [OW-1:0] res, rounded;
  logic [SBW-1:0]       i_sb;

  bilinear_interpolator #(.VW(VW), .FB(FRAC), .SBW(SBW + 1)) u_interp (
    .clk, .rst_n,
    .in_valid (in_valid),
    .v00      (c00),
    .v01      (c01),
    .v10      (c10),
    .v11      (c11),
    .fx       (in_fx),
    .fy       (in_fy),
    .sb_in    ({in_sb, in_fill}),
    .out_valid(i_valid),
    .res      (res),
    .sb_out   ({i_sb, i_fill})
  );

  always_comb rounded = (res + HALF) >>> (2*FRAC);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_pixel <= '0;
      out_sb    <= '0;
    end else begin
      out_valid <= i_valid;
      out_pixel <= i_fill ? FILL_VALUE : PIX_W'(rounded);
      out_sb    <= i_sb;
    end
  end

endmodule
