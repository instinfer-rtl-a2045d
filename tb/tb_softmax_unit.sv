// tb_softmax_unit: self-checking test of one softmax lane.
//
// For random scores, temperature factors and maxima, compares the scaled score
// (score * y >>> 23) and the exponential with the reference in tb_kv_pkg, which builds
// 2^-z from repeated multiplication rather than from the unit's table. A second check
// holds the result against real exp(): within 1.2% (the table steps by 2^(1/64)) plus 2 LSB.
module tb_softmax_unit;
  import tb_kv_pkg::*;
  int checks = 0, failures = 0;
  logic signed [39:0] score;
  logic [15:0]        y;
  logic signed [31:0] max_val, scaled;
  logic [15:0]        e;

  softmax_unit #(.SW(40)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    for (int it = 0; it < 2000; it++) begin
      longint sc, diff;
      real    ideal;
      score   = 40'($signed(32'($urandom)) >>> ($urandom_range(12, 0)));
      y       = 16'($urandom_range(32768, 1));
      sc      = (longint'(score) * longint'(y)) >>> 23;
      max_val = 32'(sc + $urandom_range(5000, 0));
      #1;
      check(longint'(scaled) == sc, $sformatf("scaled %0d vs %0d", scaled, sc));
      diff = sc - longint'(max_val);
      check(e == exp_q15(diff), $sformatf("exp(%0d): %0d vs %0d", diff, e, exp_q15(diff)));
      ideal = $exp(real'(diff) / 256.0) * 32768.0;
      check(((real'(e) > ideal) ? real'(e) - ideal : ideal - real'(e)) <= ideal * 0.012 + 2.0,
            $sformatf("exp(%0d) = %0d, real %f", diff, e, ideal));
    end
    // exact zero difference gives 1.0
    score = 40'sd256; y = 16'd32768; max_val = 32'sd1;
    #1 check(e == 16'd32768, "exp(0) = 1.0");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
