// Test of the pixel interpolation module: random memory data, quartet
// parities, weights (with the end points 0 and 256) and fill flags.
// The reference first routes memory {row parity, column parity} to the
// corner it holds, then forms the weighted sum, rounds half up and
// substitutes the fill value where flagged. Checks the 3-clock latency.
module tb_pixel_interpolation;
  localparam int LAT = 3, SBW = 5;
  localparam logic [7:0] FILL = 8'h5A;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, in_x0_odd = 0, in_y0_odd = 0, in_fill = 0, out_valid;
  logic [3:0][7:0] in_bank = 0;
  logic [8:0] in_fx = 0, in_fy = 0;
  logic [SBW-1:0] in_sb = 0, out_sb;
  logic [7:0] out_pixel;

  pixel_interpolation #(.SBW(SBW), .FILL_VALUE(FILL)) dut (.*);

  int checks = 0, failures = 0;
  bit vq [$];
  int pq [$], sq [$];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int expected();
    int p [2][2];     // p[row offset][column offset]
    int a = int'(in_fx), b = int'(in_fy);
    for (int bank = 0; bank < 4; bank++) begin
      int r = (bank / 2) ^ int'(in_y0_odd), c = (bank % 2) ^ int'(in_x0_odd);
      p[r][c] = int'(in_bank[bank]);
    end
    if (in_fill) return int'(FILL);
    return (p[0][0] * (256-a) * (256-b) + p[0][1] * a * (256-b)
          + p[1][0] * (256-a) * b + p[1][1] * a * b + 32768) / 65536;
  endfunction

  always @(posedge clk) if (rst_n) begin
    vq.push_back(in_valid); pq.push_back(expected()); sq.push_back(int'(in_sb));
    if (vq.size() > LAT) begin
      bit v; int ep, es;
      v = vq.pop_front(); ep = pq.pop_front(); es = sq.pop_front();
      checks++;
      if (out_valid != v || (v && (int'(out_pixel) != ep || out_sb != SBW'(es)))) begin
        failures++;
        if (failures < 10) $display("got %0b %0d, expected %0b %0d", out_valid, out_pixel, v, ep);
      end
    end
  end

  function automatic logic [8:0] pick();
    int r = $urandom_range(7);
    return r == 0 ? 9'd0 : r == 1 ? 9'd256 : 9'($urandom_range(255));
  endfunction

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 20000; i++) begin
      @(negedge clk);
      in_valid = $urandom_range(3) != 0;
      in_bank = {8'($urandom), 8'($urandom), 8'($urandom), 8'($urandom)};
      in_x0_odd = $urandom_range(1); in_y0_odd = $urandom_range(1);
      in_fx = pick(); in_fy = pick();
      in_fill = $urandom_range(9) == 0;
      in_sb = SBW'($urandom);
    end
    @(negedge clk) in_valid = 0;
    repeat (LAT + 2) @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
