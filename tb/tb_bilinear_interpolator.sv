// Test of the three-multiplier bilinear interpolator: random signed
// corners and weights (including the end points 0 and 2**FB) against the
// weighted sum v00(1-a)(1-b) + v01 a(1-b) + v10 (1-a) b + v11 a b, scaled
// by 2**(2*FB); checks the two-clock latency and the sideband.
module tb_bilinear_interpolator;
  localparam int VW = 16, FB = 8, SBW = 4;
  localparam int OW = VW + 2*FB + 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic                 in_valid = 0;
  logic signed [VW-1:0] v00 = 0, v01 = 0, v10 = 0, v11 = 0;
  logic [FB:0]          fx = 0, fy = 0;
  logic [SBW-1:0]       sb_in = 0, sb_out;
  logic                 out_valid;
  logic signed [OW-1:0] res;

  bilinear_interpolator #(.VW(VW), .FB(FB), .SBW(SBW)) dut (.*);

  int checks = 0, failures = 0;
  longint exp_q [$];
  int     sb_q  [$];
  bit     vld_q [$];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int pick_frac();
    int r = $urandom_range(9);
    return r == 0 ? 0 : r == 1 ? (1 << FB) : $urandom_range((1 << FB) - 1);
  endfunction

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 20000; i++) begin
      longint a, b, e;
      @(negedge clk);
      // outputs now belong to the input of two clocks ago
      if (vld_q.size() == 2) begin
        bit v;
        longint ev;
        int es;
        v = vld_q.pop_front();
        ev = exp_q.pop_front();
        es = sb_q.pop_front();
        checks++;
        if (out_valid != v || (v && (res != ev || sb_out != SBW'(es)))) begin
          failures++;
          if (failures < 10) $display("got %0d/%0b expected %0d/%0b", res, out_valid, ev, v);
        end
      end
      in_valid = $urandom_range(3) != 0;
      v00 = VW'($urandom); v01 = VW'($urandom); v10 = VW'($urandom); v11 = VW'($urandom);
      if (i % 3 == 0) begin v01 = v00 + VW'($urandom_range(40)); v11 = v10 - VW'($urandom_range(40)); end
      a = pick_frac(); b = pick_frac();
      fx = (FB+1)'(a); fy = (FB+1)'(b);
      sb_in = SBW'($urandom);
      e = longint'(v00) * ((1 << FB) - a) * ((1 << FB) - b) + longint'(v01) * a * ((1 << FB) - b)
        + longint'(v10) * ((1 << FB) - a) * b + longint'(v11) * a * b;
      vld_q.push_back(in_valid); exp_q.push_back(e); sb_q.push_back(int'(sb_in));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
