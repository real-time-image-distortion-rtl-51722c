// Buffer write manager: steers each input pixel into one of the four
// buffer memories.
//
// The circular line buffer is split into four memories following a 2x2
// interleave: the pixel at column x of buffer slot s (s = row mod
// BUF_LINES) goes to memory {s[0], x[0]} (0: even row/even column,
// 1: even row/odd column, 2: odd row/even column, 3: odd row/odd column).
// Because BUF_LINES is even, s[0] equals the row's parity. Any 2x2
// interpolation quartet then touches each memory exactly once and can be
// read in one clock. Inside its memory the pixel sits at address
// (s>>1)*(IMG_W/2) + (x>>1).
// The interleave is the one drawn for the buffer in the paper; the
// address layout inside each memory is this design's own choice.
//
// Timing: one register stage; wr_sel/wr_addr/wr_data follow the inputs by
// one clock.
module buffer_write_manager #(
  parameter int unsigned IMG_W     = dc_pkg::DEF_IMG_W,
  parameter int unsigned BUF_LINES = dc_pkg::DEF_BUF_LINES,
  parameter int unsigned PIX_W     = dc_pkg::DEF_PIX_W,
  localparam int unsigned XW    = $clog2(IMG_W),
  localparam int unsigned SW    = $clog2(BUF_LINES),
  localparam int unsigned DEPTH = (BUF_LINES / 2) * (IMG_W / 2),
  localparam int unsigned AW    = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             wr_en,
  input  logic [XW-1:0]    wr_x,
  input  logic [SW-1:0]    wr_slot,
  input  logic [PIX_W-1:0] wr_pixel,
  output logic [3:0]       wr_sel,     // one-hot buffer write selector
  output logic [AW-1:0]    wr_addr,
  output logic [PIX_W-1:0] wr_data
);

  initial begin
    assert (BUF_LINES % 2 == 0 && IMG_W % 2 == 0)
      else $error("buffer_write_manager: BUF_LINES and IMG_W must be even");
  end

  dc_pkg::bank_e bank;
  logic [AW-1:0] addr;

  always_comb begin
    bank = dc_pkg::bank_of(wr_slot[0], wr_x[0]);
    addr = AW'(32'(wr_slot >> 1) * (IMG_W / 2) + 32'(wr_x >> 1));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_sel  <= '0;
      wr_addr <= '0;
      wr_data <= '0;
    end else begin
      wr_sel  <= wr_en ? (4'b0001 << bank) : 4'b0000;
      wr_addr <= addr;
      wr_data <= wr_pixel;
    end
  end

endmodule
