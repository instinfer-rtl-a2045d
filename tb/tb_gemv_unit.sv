// tb_gemv_unit: self-checking test of the ELEMS-lane multiply and dot-product unit.
//
// Drives random and extreme signed operands (17-bit by 16-bit, as the attention kernel
// uses it) and compares every lane product and the reduced sum with integer arithmetic.
// The unit is combinational: results are checked after a settle delay.
module tb_gemv_unit;
  localparam int E = 16, AW = 17, BW = 16;
  int checks = 0, failures = 0;
  logic signed [E-1:0][AW-1:0] a;
  logic signed [E-1:0][BW-1:0] b;
  logic signed [E-1:0][AW+BW-1:0] prod;
  logic signed [AW+BW+$clog2(E)-1:0] dot;

  gemv_unit #(.ELEMS(E), .AW(AW), .BW(BW)) dut (.*);

  initial begin
    for (int it = 0; it < 300; it++) begin
      longint s, p;
      int bad;
      for (int l = 0; l < E; l++) begin
        a[l] = (it == 0) ? AW'(-(1 << (AW-1))) : (it == 1) ? AW'((1 << (AW-1)) - 1) : AW'($urandom);
        b[l] = (it == 0) ? BW'(-(1 << (BW-1))) : (it == 1) ? BW'(-(1 << (BW-1))) : BW'($urandom);
      end
      #1;
      s = 0; bad = 0;
      for (int l = 0; l < E; l++) begin
        p = longint'($signed(a[l])) * longint'($signed(b[l]));
        s += p;
        if (longint'($signed(prod[l])) != p) bad++;
      end
      checks++;
      if (bad != 0) begin failures++; $display("FAIL: products, iteration %0d", it); end
      checks++;
      if (longint'(dot) != s) begin failures++; $display("FAIL: dot %0d vs %0d", dot, s); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
