// Test of the buffer write manager: for random pixels it checks the
// one-hot memory selector against the 2x2 interleave (memory = 2*row
// parity + column parity), the address inside the memory
// ((slot/2)*(IMG_W/2) + x/2) and the data, one clock after the input.
// It also checks that all four pixels of random 2x2 quartets land in
// four different memories.
module tb_buffer_write_manager;
  localparam int W = 640, L = 50;
  localparam int DEPTH = (L/2) * (W/2), AW = $clog2(DEPTH);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic          wr_en = 0;
  logic [9:0]    wr_x = 0;
  logic [5:0]    wr_slot = 0;
  logic [7:0]    wr_pixel = 0;
  logic [3:0]    wr_sel;
  logic [AW-1:0] wr_addr;
  logic [7:0]    wr_data;

  buffer_write_manager dut (.*);

  int checks = 0, failures = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic drive(bit en, int x, int s, int p);
    @(negedge clk);
    wr_en = en; wr_x = 10'(x); wr_slot = 6'(s); wr_pixel = 8'(p);
    @(negedge clk);
    checks++;
    if (wr_sel != (en ? 4'(1 << ((s % 2) * 2 + (x % 2))) : 4'b0) ||
        (en && (wr_addr != AW'((s / 2) * (W / 2) + x / 2) || wr_data != 8'(p)))) begin
      failures++;
      if (failures < 10) $display("x=%0d slot=%0d: sel %b addr %0d data %0h", x, s, wr_sel, wr_addr, wr_data);
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 5000; i++)
      drive($urandom_range(4) != 0, $urandom_range(W - 1), $urandom_range(L - 1), $urandom_range(255));
    // quartets use four different memories
    for (int i = 0; i < 500; i++) begin
      int x, s;
      logic [3:0] seen;
      x = $urandom_range(W - 2); s = $urandom_range(L - 2); seen = 0;
      for (int k = 0; k < 4; k++) begin
        @(negedge clk);
        wr_en = 1; wr_x = 10'(x + k % 2); wr_slot = 6'(s + k / 2);
        @(negedge clk);
        seen |= wr_sel;
      end
      checks++;
      if (seen != 4'hF) begin failures++; $display("quartet at %0d,%0d uses %b", x, s, seen); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
