// Buffer memory: one quarter of the circular line buffer.
//
// A simple dual-port RAM with one write port and one read port on the
// same clock, written as an array so that synthesis maps it onto block
// RAM. The read is synchronous: rd_data holds the word at rd_addr one
// clock after rd_en. A read and a write of the same address in the same
// clock return the old word. Four of these, selected by the buffer write
// manager, make up the line buffer.
module buffer_memory #(
  parameter int unsigned DEPTH = (dc_pkg::DEF_BUF_LINES / 2) * (dc_pkg::DEF_IMG_W / 2),
  parameter int unsigned DW    = dc_pkg::DEF_PIX_W,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  logic [DW-1:0] wr_data,
  input  logic          rd_en,
  input  logic [AW-1:0] rd_addr,
  output logic [DW-1:0] rd_data
);

  logic [DW-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (rd_en) rd_data <= mem[rd_addr];
  end

endmodule
