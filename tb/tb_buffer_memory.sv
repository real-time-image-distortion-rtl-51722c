// Test of one buffer memory: random writes and reads against a shadow
// array, checking the one-clock read latency and that a read of the word
// being written in the same clock returns the old word.
module tb_buffer_memory;
  localparam int DEPTH = 8000, DW = 8, AW = $clog2(DEPTH);

  logic clk = 0;
  always #5 clk = ~clk;
  logic          wr_en = 0, rd_en = 0;
  logic [AW-1:0] wr_addr = 0, rd_addr = 0;
  logic [DW-1:0] wr_data = 0, rd_data;

  buffer_memory dut (.*);

  int checks = 0, failures = 0;
  logic [DW-1:0] shadow [DEPTH];
  bit            known  [DEPTH];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [DW-1:0] expect_q;
    bit            expect_v;
    expect_v = 0;
    // fill every word once
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = AW'(a); wr_data = DW'($urandom); rd_en = 0;
      shadow[a] = wr_data; known[a] = 1;
    end
    for (int i = 0; i < 20000; i++) begin
      @(negedge clk);
      // check the read issued in the previous clock
      if (expect_v) begin
        checks++;
        if (rd_data != expect_q) begin
          failures++;
          if (failures < 10) $display("read mismatch: got %0h expected %0h", rd_data, expect_q);
        end
      end
      rd_en   = $urandom_range(3) != 0;
      rd_addr = (i % 7 == 0) ? wr_addr : AW'($urandom_range(DEPTH - 1));
      expect_v = rd_en;
      expect_q = shadow[rd_addr];             // old contents, even if written now
      wr_en   = $urandom_range(1);
      wr_addr = (i % 5 == 0) ? rd_addr : AW'($urandom_range(DEPTH - 1));
      wr_data = DW'($urandom);
      if (wr_en) shadow[wr_addr] = wr_data;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
