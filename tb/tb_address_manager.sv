// Test of the address manager at a reduced size (16x12 frames, 8-line
// buffer), with line delays of 3, 5 and 2 set per frame. It streams frames with random idle cycles and
// checks, one clock after each input pixel, the buffer write address
// (column, row, slot = row mod 8). On the read side it checks that output
// pixels come out in raster order with the right slot and frame flags,
// that during the input frame an output pixel is issued exactly with each
// input pixel of row `delay` and later (the output lags by that many
// lines at the input pixel rate), that rd_delay reports the frame's delay, that the remaining lines are then issued one per clock
// (flush), and that a frame sync during the flush pulses `overrun` and
// restarts the output. Pixels outside a frame must be ignored.
module tb_address_manager;
  localparam int W = 16, H = 12, L = 8;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, in_sof = 0;
  logic wr_en, rd_valid, rd_sof, rd_eol, overrun;
  logic [3:0] wr_x, rd_x;
  logic [3:0] wr_y, rd_y;
  logic [2:0] wr_slot, rd_slot, rd_delay;
  logic [2:0] cfg_delay = 3;

  address_manager #(.IMG_W(W), .IMG_H(H), .BUF_LINES(L)) dut (.*);

  int checks = 0, failures = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fail(string msg);
    failures++;
    if (failures < 10) $display("%s", msg);
  endtask

  // what the driver presented last clock
  bit drv_acc = 0; int drv_x = 0, drv_y = 0, D = 3;
  // read-side model
  int  ex = 0, ey = 0, issued = 0, n_flush = 0, n_overrun = 0, n_sync = 0;
  bit  out_on = 0, in_complete = 0, expect_overrun = 0;

  // outputs are sampled just after the clock edge, while the driver's
  // values still describe the pixel presented before that edge
  always @(posedge clk) if (rst_n) begin
    #1;
    // write side
    checks++;
    if (wr_en != drv_acc || (drv_acc && (wr_x != 4'(drv_x) || wr_y != 4'(drv_y) || wr_slot != 3'(drv_y % L))))
      fail($sformatf("write address: %0b %0d,%0d slot %0d, expected %0b %0d,%0d", wr_en, wr_x, wr_y, wr_slot, drv_acc, drv_x, drv_y));
    // overrun
    checks++;
    if (overrun != expect_overrun) fail($sformatf("overrun %0b expected %0b", overrun, expect_overrun));
    if (overrun) begin n_overrun++; out_on = 0; end
    // read side timing
    if (wr_en && wr_x == 0 && wr_y == D) begin out_on = 1; ex = 0; ey = 0; issued = 0; in_complete = 0; end
    if (out_on && !overrun) begin
      bit want;
      want = in_complete ? 1'b1 : (wr_en && wr_y >= D);
      checks++;
      if (rd_valid != want) fail($sformatf("rd_valid %0b expected %0b (issued %0d)", rd_valid, want, issued));
      if (in_complete && want) n_flush++;
      if (want && !in_complete) n_sync++;
    end else begin
      checks++;
      if (rd_valid) fail("rd_valid outside an output frame");
    end
    if (rd_valid) begin
      checks++;
      if (rd_x != 4'(ex) || rd_y != 4'(ey) || rd_slot != 3'(ey % L) || rd_sof != (ex == 0 && ey == 0) || rd_eol != (ex == W-1)
          || rd_delay != 3'(D))
        fail($sformatf("read address %0d,%0d slot %0d expected %0d,%0d", rd_x, rd_y, rd_slot, ex, ey));
      issued++;
      if (ex == W-1) begin ex = 0; ey++; end else ex++;
      if (issued == W*H) out_on = 0;
    end
    if (wr_en && wr_x == W-1 && wr_y == H-1) in_complete = 1;
  end

  task automatic frame(int blank, bit overrun_expected, int delay);
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) begin
        @(negedge clk);
        while ($urandom_range(3) == 0) begin
          in_valid = 0; in_sof = 0; drv_acc = 0; expect_overrun = 0;
          @(negedge clk);
        end
        in_valid = 1; in_sof = (x == 0 && y == 0);
        drv_acc = 1; drv_x = x; drv_y = y;
        if (in_sof) begin cfg_delay = 3'(delay); D = delay; end
        expect_overrun = in_sof && overrun_expected;
      end
    @(negedge clk);
    in_valid = 0; in_sof = 0; drv_acc = 0; expect_overrun = 0;
    repeat (blank) begin
      @(negedge clk);
      // stray strobes between frames are ignored
      in_valid = $urandom_range(7) == 0; drv_acc = 0;
    end
    @(negedge clk) in_valid = 0;
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    frame(W * 3 + 20, 0, 3);
    frame(W, 0, 3);          // blanking too short for the flush
    frame(W * 5 + 20, 1, 5); // its frame sync overruns
    frame(W * 2 + 20, 0, 2);
    repeat (10) @(negedge clk);
    $display("sync=%0d flush=%0d overrun=%0d", n_sync, n_flush, n_overrun);
    checks++; if (n_sync == 0 || n_flush == 0 || n_overrun != 1) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
