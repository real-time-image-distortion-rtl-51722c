// Address manager: raster bookkeeping for the input and output streams.
//
// The input stream carries one pixel per in_valid strobe in raster order;
// in_sof marks the first pixel of a frame (the frame sync). The module
// counts the input column/row and the row's slot in the circular line
// buffer (row mod BUF_LINES) and issues them as the buffer write address.
//
// The output raster lags the input by a number of lines set per frame:
// cfg_delay is sampled with the frame sync, and output pixel (0,0) is
// issued together with input pixel (0,delay); from then
// on one output pixel is issued per input pixel, so the output keeps the
// input's timing. Once the last input pixel of the frame has arrived, the
// remaining `delay` output lines are issued at one pixel per clock
// (flush), which needs a vertical blanking of at least IMG_W*delay
// clocks. The delay belongs to the map in use, so the host sets it
// together with the map; rd_delay reports the delay of the output frame
// being issued, for the buffer read manager's window check. It must lie
// in 2 .. BUF_LINES-1. A frame sync that arrives while an output
// frame is still being issued aborts it and pulses `overrun`.
// The read side gives the frame read address (rd_x, rd_y), used by the map
// module, and the buffer read address (rd_slot = rd_y mod BUF_LINES).
//
// The line delay follows the rule that the read side starts a number of
// lines after the frame start at least equal to the largest vertical
// displacement, and that it depends on the map in use; the run-time
// setting, the flush at one pixel per clock and the abort on overrun are
// this design's own choices.
//
// Timing: all outputs are registered, one clock after the input strobe.
module address_manager #(
  parameter int unsigned IMG_W       = dc_pkg::DEF_IMG_W,
  parameter int unsigned IMG_H       = dc_pkg::DEF_IMG_H,
  parameter int unsigned BUF_LINES   = dc_pkg::DEF_BUF_LINES,
  localparam int unsigned XW = $clog2(IMG_W),
  localparam int unsigned YW = $clog2(IMG_H),
  localparam int unsigned SW = $clog2(BUF_LINES)
) (
  input  logic          clk,
  input  logic          rst_n,
  // input stream timing
  input  logic          in_valid,
  input  logic          in_sof,
  input  logic [SW-1:0] cfg_delay,  // line delay, sampled with the frame sync
  // buffer write address
  output logic          wr_en,
  output logic [XW-1:0] wr_x,
  output logic [YW-1:0] wr_y,
  output logic [SW-1:0] wr_slot,
  // frame read address and buffer read address of the next output pixel
  output logic          rd_valid,
  output logic [XW-1:0] rd_x,
  output logic [YW-1:0] rd_y,
  output logic [SW-1:0] rd_slot,
  output logic          rd_sof,
  output logic          rd_eol,
  output logic [SW-1:0] rd_delay,   // line delay of the output frame
  output logic          overrun
);

  initial begin
    assert (BUF_LINES >= 3 && BUF_LINES <= IMG_H)
      else $error("address_manager: BUF_LINES out of range");
  end

  a_delay_range: assert property (@(posedge clk) disable iff (!rst_n)
                                  in_valid && in_sof |-> int'(cfg_delay) >= 2 && int'(cfg_delay) < int'(BUF_LINES))
    else $error("address_manager: cfg_delay out of range");

  // ---------------- input side ----------------
  logic          in_frame;          // inside an input frame, expecting more pixels
  logic [XW-1:0] ix_q;              // position of the next expected input pixel
  logic [YW-1:0] iy_q;
  logic [SW-1:0] is_q;
  logic [SW-1:0] dly_in_q;          // delay of the current input frame
  logic [SW-1:0] dly_out_q;         // delay of the current output frame

  logic          acc;               // this input pixel is accepted
  logic [XW-1:0] cx;
  logic [YW-1:0] cy;
  logic [SW-1:0] cs;
  logic          last_in;

  always_comb begin
    acc = in_valid && (in_sof || in_frame);
    cx  = in_sof ? '0 : ix_q;
    cy  = in_sof ? '0 : iy_q;
    cs  = in_sof ? '0 : is_q;
    last_in = (cx == XW'(IMG_W - 1)) && (cy == YW'(IMG_H - 1));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_frame <= 1'b0;
      ix_q     <= '0;
      iy_q     <= '0;
      is_q     <= '0;
      dly_in_q <= SW'(2);
    end else if (acc) begin
      if (in_sof) dly_in_q <= cfg_delay;
      in_frame <= !last_in;
      if (cx == XW'(IMG_W - 1)) begin
        ix_q <= '0;
        iy_q <= cy + 1'b1;
        is_q <= (cs == SW'(BUF_LINES - 1)) ? '0 : cs + 1'b1;
      end else begin
        ix_q <= cx + 1'b1;
        iy_q <= cy;
        is_q <= cs;
      end
    end
  end

  // ---------------- output side ----------------
  logic          out_active;
  logic [XW-1:0] ox_q;
  logic [YW-1:0] oy_q;
  logic [SW-1:0] os_q;

  logic          start, issue, abort;
  logic [XW-1:0] px;
  logic [YW-1:0] py;
  logic [SW-1:0] ps;
  logic          last_out;

  always_comb begin
    abort     = in_valid && in_sof && out_active;
    start     = acc && !in_sof && (cy == YW'(dly_in_q)) && (cx == '0);
    issue     = start || (out_active && !abort && (in_frame ? acc : 1'b1));
    px        = start ? '0 : ox_q;
    py        = start ? '0 : oy_q;
    ps        = start ? '0 : os_q;
    last_out  = (px == XW'(IMG_W - 1)) && (py == YW'(IMG_H - 1));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_active <= 1'b0;
      ox_q       <= '0;
      oy_q       <= '0;
      os_q       <= '0;
      dly_out_q  <= SW'(2);
    end else begin
      if (abort) out_active <= 1'b0;
      if (start) dly_out_q <= dly_in_q;
      if (issue) begin
        out_active <= !last_out;
        if (px == XW'(IMG_W - 1)) begin
          ox_q <= '0;
          oy_q <= py + 1'b1;
          os_q <= (ps == SW'(BUF_LINES - 1)) ? '0 : ps + 1'b1;
        end else begin
          ox_q <= px + 1'b1;
          oy_q <= py;
          os_q <= ps;
        end
      end
    end
  end

  assign rd_delay = dly_out_q;

  // ---------------- registered outputs ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_en    <= 1'b0;
      rd_valid <= 1'b0;
      rd_sof   <= 1'b0;
      rd_eol   <= 1'b0;
      overrun  <= 1'b0;
      wr_x     <= '0;
      wr_y     <= '0;
      wr_slot  <= '0;
      rd_x     <= '0;
      rd_y     <= '0;
      rd_slot  <= '0;
    end else begin
      wr_en    <= acc;
      wr_x     <= cx;
      wr_y     <= cy;
      wr_slot  <= cs;
      rd_valid <= issue;
      rd_x     <= px;
      rd_y     <= py;
      rd_slot  <= ps;
      rd_sof   <= issue && (px == '0) && (py == '0);
      rd_eol   <= issue && (px == XW'(IMG_W - 1));
      overrun  <= abort;
    end
  end

endmodule
