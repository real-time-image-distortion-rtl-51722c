// Bilinear interpolator with three multipliers.
//
// Given the four corners v00 (top-left), v01 (top-right), v10
// (bottom-left), v11 (bottom-right) and the weights fx, fy in units of
// 2**-FB (0 .. 2**FB inclusive, hence FB+1 bits), it computes
//   top = v00*2**FB + (v01 - v00)*fx          (multiplier 1)
//   bot = v10*2**FB + (v11 - v10)*fx          (multiplier 2)
//   res = top*2**FB + (bot - top)*fy          (multiplier 3)
// which equals the usual weighted sum scaled by 2**(2*FB), exactly. The
// caller rounds and drops the 2*FB fractional bits. The three-multiplier
// count follows the paper; the lerp form and the pipelining are this
// design's own choice. The same module serves the two map interpolators
// (signed displacements) and the pixel interpolator (pixels zero-extended
// to a signed word).
//
// Timing: two register stages; out_valid/res/sb_out follow in_valid/
// corners/sb_in by two clocks, one result per clock.
module bilinear_interpolator #(
  parameter int unsigned VW  = 16,  // width of a signed corner value
  parameter int unsigned FB  = 8,   // fractional bits of the weights
  parameter int unsigned SBW = 1,   // sideband carried alongside
  localparam int unsigned HW = VW + FB + 2,   // width of a horizontal result
  localparam int unsigned OW = VW + 2*FB + 4  // width of the final result
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic signed [VW-1:0] v00,
  input  logic signed [VW-1:0] v01,
  input  logic signed [VW-1:0] v10,
  input  logic signed [VW-1:0] v11,
  input  logic [FB:0]          fx,
  input  logic [FB:0]          fy,
  input  logic [SBW-1:0]       sb_in,
  output logic                 out_valid,
  output logic signed [OW-1:0] res,
  output logic [SBW-1:0]       sb_out
);

  logic signed [HW-1:0] top_q, bot_q;
  logic [FB:0]          fy_q;
  logic                 v_q;
  logic [SBW-1:0]       sb_q;

  logic signed [VW:0]   d_top, d_bot;
  logic signed [FB+1:0] fxs, fys;
  logic signed [HW:0]   d_v;

  always_comb begin
    fxs   = signed'({1'b0, fx});
    fys   = signed'({1'b0, fy_q});
    d_top = (VW+1)'(v01) - (VW+1)'(v00);
    d_bot = (VW+1)'(v11) - (VW+1)'(v10);
    d_v   = (HW+1)'(bot_q) - (HW+1)'(top_q);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_q       <= 1'b0;
      out_valid <= 1'b0;
      top_q     <= '0;
      bot_q     <= '0;
      fy_q      <= '0;
      sb_q      <= '0;
      res       <= '0;
      sb_out    <= '0;
    end else begin
      v_q       <= in_valid;
      top_q     <= (HW'(v00) <<< FB) + HW'(d_top * fxs);
      bot_q     <= (HW'(v10) <<< FB) + HW'(d_bot * fxs);
      fy_q      <= fy;
      sb_q      <= sb_in;
      out_valid <= v_q;
      res       <= (OW'(top_q) <<< FB) + OW'(d_v * fys);
      sb_out    <= sb_q;
    end
  end

endmodule
