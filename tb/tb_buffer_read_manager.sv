// Test of the buffer read manager at the default size. For random output
// positions and relative coordinates it works out the quartet
// independently: source point, top-left pixel, border and window rules,
// then for each of the four corner pixels its memory {row parity, column
// parity} and its address (slot/2)*(IMG_W/2) + column/2 with
// slot = row mod BUF_LINES. The line delay is drawn at random per pixel. It compares the address of every memory, the
// parities, the weights and the fill/window flags one clock later.
// Points near the borders and the window limits are drawn often.
module tb_buffer_read_manager;
  import dc_pkg::*;
  localparam int W = DEF_IMG_W, H = DEF_IMG_H, L = DEF_BUF_LINES;
  localparam int AW = $clog2((L/2) * (W/2));

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0;
  logic [9:0] in_x = 0;
  logic [8:0] in_y = 0;
  logic [5:0] in_slot = 0, in_delay = 2;
  logic signed [15:0] in_dx = 0, in_dy = 0;
  logic rd_valid, rd_x0_odd, rd_y0_odd, rd_fill, rd_window_err;
  logic [3:0][AW-1:0] rd_addr;
  logic [8:0] rd_fx, rd_fy;

  buffer_read_manager dut (.*);

  int checks = 0, failures = 0;
  int n_fill = 0, n_werr = 0, n_edge = 0;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 50000; i++) begin
      int x, y, dx, dy, x0, y0, a, b, exp_addr [4], bank, D;
      bit fill, werr;
      x = $urandom_range(W-1); y = $urandom_range(H-1);
      D = (i % 2) ? DEF_DELAY_LINES : $urandom_range(L - 1, 2);
      dx = $urandom_range(12800) - 6400; dy = $urandom_range(8000) - 4000;
      case (i % 8)
        1: begin x = W - 1 - $urandom_range(100); dx = (W - 1 - x) * 256; end  // lands on last column
        2: begin y = H - 1 - $urandom_range(20); dy = (H - 1 - y) * 256; end   // lands on last row
        3: dy = (D - 2) * 256 + $urandom_range(255);                   // lowest row allowed below
        4: dy = (D - 1) * 256 + $urandom_range(255);                   // just outside
        5: dy = (D - L + 1) * 256 + $urandom_range(255);               // highest row allowed above
        6: dy = (D - L) * 256 + $urandom_range(255);                   // just outside
        default: ;
      endcase
      @(negedge clk);
      in_valid = 1; in_x = 10'(x); in_y = 9'(y); in_slot = 6'(y % L);
      in_dx = 16'(dx); in_dy = 16'(dy); in_delay = 6'(D);
      // independent reference
      x0 = x + $floor(real'(dx) / 256.0); y0 = y + $floor(real'(dy) / 256.0);
      a = dx & 255; b = dy & 255;
      fill = (x0 < 0) || (y0 < 0) || (x0 > W-1) || (y0 > H-1) || (x0 == W-1 && a != 0) || (y0 == H-1 && b != 0);
      if (x0 == W-1) begin x0--; a = 256; end
      if (y0 == H-1) begin y0--; b = 256; end
      werr = !fill && (y0 < y + D - L + 1 || y0 + 1 > y + D - 1);
      for (int r = 0; r < 2; r++)
        for (int c = 0; c < 2; c++) begin
          bank = ((y0 + r) & 1) * 2 + ((x0 + c) & 1);
          exp_addr[bank] = (((y0 + r) % L + L) % L / 2) * (W / 2) + (x0 + c) / 2;
        end
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!rd_valid || rd_fill != (fill || werr) || rd_window_err != werr) begin
        failures++;
        if (failures < 10) $display("flags at %0d,%0d d=%0d,%0d: fill %0b werr %0b", x, y, dx, dy, rd_fill, rd_window_err);
      end
      if (!fill && !werr) begin
        checks++;
        if (rd_x0_odd != x0[0] || rd_y0_odd != y0[0] || rd_fx != 9'(a) || rd_fy != 9'(b) ||
            rd_addr[0] != AW'(exp_addr[0]) || rd_addr[1] != AW'(exp_addr[1]) ||
            rd_addr[2] != AW'(exp_addr[2]) || rd_addr[3] != AW'(exp_addr[3])) begin
          failures++;
          if (failures < 10) $display("quartet at %0d,%0d d=%0d,%0d: addr %p expected %p", x, y, dx, dy, rd_addr, exp_addr);
        end
      end
      n_fill += fill; n_werr += werr; n_edge += (a == 256 || b == 256);
    end
    $display("fill=%0d window=%0d edge=%0d", n_fill, n_werr, n_edge);
    checks++; if (n_fill == 0 || n_werr == 0 || n_edge == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
