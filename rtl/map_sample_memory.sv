// Map sample memory: on-chip store of the subsampled distortion map.
//
// The full per-pixel map is replaced by one sample every 2**SUB_LOG2
// pixels on both axes, GRID_W x GRID_H nodes in all (81 x 61 = 4941 for
// VGA at 8-pixel spacing). Each node holds the relative displacement
// pair (dx, dy), MAP_W-bit signed fixed point. The samples are computed
// in software and written through the write port, one node per clock,
// addressed by node column and row.
//
// To deliver the four nodes around a grid cell in one clock, the nodes
// are split over four memories by the parity of their column and row,
// the same 2x2 interleave as the image line buffer (a choice of this
// design; any scheme giving four samples per clock would do). Memory
// {gy[0], gx[0]} holds node (gx, gy) at address
// (gy>>1)*ceil(GRID_W/2) + (gx>>1).
//
// Read port: rd_gx, rd_gy name the top-left node of a cell; one clock
// after rd_en, s00..s11 hold the packed {dx, dy} of the nodes (gx,gy),
// (gx+1,gy), (gx,gy+1), (gx+1,gy+1).
module map_sample_memory #(
  parameter int unsigned IMG_W    = dc_pkg::DEF_IMG_W,
  parameter int unsigned IMG_H    = dc_pkg::DEF_IMG_H,
  parameter int unsigned SUB_LOG2 = dc_pkg::DEF_SUB_LOG2,
  parameter int unsigned MAP_W    = dc_pkg::DEF_MAP_W,
  localparam int unsigned GRID_W = dc_pkg::grid_len(IMG_W, SUB_LOG2),
  localparam int unsigned GRID_H = dc_pkg::grid_len(IMG_H, SUB_LOG2),
  localparam int unsigned GXW    = $clog2(GRID_W),
  localparam int unsigned GYW    = $clog2(GRID_H),
  localparam int unsigned HALF_W = (GRID_W + 1) / 2,
  localparam int unsigned HALF_H = (GRID_H + 1) / 2,
  localparam int unsigned DEPTH  = HALF_W * HALF_H,
  localparam int unsigned AW     = $clog2(DEPTH)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // write port (sample loading)
  input  logic                 wr_en,
  input  logic [GXW-1:0]       wr_gx,
  input  logic [GYW-1:0]       wr_gy,
  input  logic [2*MAP_W-1:0]   wr_data,   // {dx, dy}
  // read port
  input  logic                 rd_en,
  input  logic [GXW-1:0]       rd_gx,
  input  logic [GYW-1:0]       rd_gy,
  output logic [2*MAP_W-1:0]   s00,
  output logic [2*MAP_W-1:0]   s01,
  output logic [2*MAP_W-1:0]   s10,
  output logic [2*MAP_W-1:0]   s11
);

  logic [2*MAP_W-1:0] mem0 [DEPTH];
  logic [2*MAP_W-1:0] mem1 [DEPTH];
  logic [2*MAP_W-1:0] mem2 [DEPTH];
  logic [2*MAP_W-1:0] mem3 [DEPTH];

  function automatic logic [AW-1:0] node_addr(input int unsigned gx, input int unsigned gy);
    return AW'((gy >> 1) * HALF_W + (gx >> 1));
  endfunction

  // write side
  logic [AW-1:0] waddr;
  logic [1:0]    wbank;
  always_comb begin
    waddr = node_addr(int'(wr_gx), int'(wr_gy));
    wbank = {wr_gy[0], wr_gx[0]};
  end

  always_ff @(posedge clk) begin
    if (wr_en && wbank == 2'd0) mem0[waddr] <= wr_data;
    if (wr_en && wbank == 2'd1) mem1[waddr] <= wr_data;
    if (wr_en && wbank == 2'd2) mem2[waddr] <= wr_data;
    if (wr_en && wbank == 2'd3) mem3[waddr] <= wr_data;
  end

  // read side: memory b reads the cell node whose parity is b
  logic [3:0][AW-1:0] raddr;
  always_comb begin
    for (int b = 0; b < 4; b++) begin
      raddr[b] = node_addr(((int'(rd_gx) & 1) == (b & 1))        ? int'(rd_gx) : int'(rd_gx) + 1,
                           ((int'(rd_gy) & 1) == ((b >> 1) & 1)) ? int'(rd_gy) : int'(rd_gy) + 1);
    end
  end

  logic [2*MAP_W-1:0] q0, q1, q2, q3;
  logic               gx_odd, gy_odd;

  always_ff @(posedge clk) begin
    if (rd_en) begin
      q0 <= mem0[raddr[0]];
      q1 <= mem1[raddr[1]];
      q2 <= mem2[raddr[2]];
      q3 <= mem3[raddr[3]];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      gx_odd <= 1'b0;
      gy_odd <= 1'b0;
    end else if (rd_en) begin
      gx_odd <= rd_gx[0];
      gy_odd <= rd_gy[0];
    end
  end

  // route memories to cell corners
  always_comb begin
    unique case ({gy_odd, gx_odd})
      2'b00: begin s00 = q0; s01 = q1; s10 = q2; s11 = q3; end
      2'b01: begin s00 = q1; s01 = q0; s10 = q3; s11 = q2; end
      2'b10: begin s00 = q2; s01 = q3; s10 = q0; s11 = q1; end
      default: begin s00 = q3; s01 = q2; s10 = q1; s11 = q0; end
    endcase
  end

endmodule
