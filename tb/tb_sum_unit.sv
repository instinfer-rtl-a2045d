// tb_sum_unit: self-checking test of the summation unit that closes a head.
//
// Random exponential sums, accumulators and mean vectors (D = 128, the default) go in;
// alpha and every output dim are compared with the formulas written out in 64-bit
// integer arithmetic: alpha = min(1, sel/all) in U1.15, attn = acc / e_sel (through the
// 2^46 reciprocal), out = alpha*attn + (1-alpha)*vbar. Also checks that done comes
// 2*65 + D + 3 cycles after start, the unit's documented latency.
module tb_sum_unit;
  localparam int D = 128, AW = 48;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start = 0, busy, done;
  logic [31:0] sel_sum, all_sum, e_sel;
  logic signed [D-1:0][AW-1:0] acc;
  logic [D-1:0][15:0] vbar, out;
  logic [15:0] alpha;

  sum_unit #(.D(D), .AW(AW)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int it = 0; it < 30; it++) begin
      longint a, inv, attn, o;
      int bad, lat;
      all_sum = 32'($urandom_range(2000000, 32768));
      sel_sum = (it == 0) ? all_sum : 32'($urandom_range(int'(all_sum), 1));
      e_sel   = 32'($urandom_range(300000, 32768));
      for (int d = 0; d < D; d++) begin
        // |acc| <= e_sel * 2^9 (weights in U1.15 times values in [-2, 2) Q8.8)
        acc[d]  = AW'((longint'($signed($urandom)) % (longint'(e_sel) << 9)));
        vbar[d] = 16'($urandom_range(1023, 0) - 512);
      end
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      lat = 1;
      while (!done) begin @(negedge clk); lat++; end
      a = (longint'(sel_sum) << 15) / longint'(all_sum);
      if (a > 32768) a = 32768;
      check(longint'(alpha) == a, $sformatf("alpha %0d vs %0d", alpha, a));
      inv = (longint'(1) << 46) / longint'(e_sel);
      bad = 0;
      for (int d = 0; d < D; d++) begin
        attn = (longint'($signed(acc[d])) * inv) >>> 46;
        o = (a * attn + (32768 - a) * longint'($signed(vbar[d]))) >>> 15;
        if (out[d] != 16'(o)) bad++;
      end
      check(bad == 0, $sformatf("output dims differ: %0d", bad));
      check(lat == 2 * 65 + D + 3, $sformatf("latency %0d", lat));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
