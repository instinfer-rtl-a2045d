// tb_argtopk: self-checking test of the top-k selection unit.
//
// Runs many selections on a reduced unit (64 candidates, k up to 8) with random keys,
// including runs full of equal keys, and compares the mask and the sum of the selected
// values with a plain selection loop (largest key first, ties to the lower index). It
// also checks the latency: done must come exactly N + k + 1 cycles after the first
// candidate (N cycles of streaming, k of read-out, one to finish).
module tb_argtopk;
  localparam int N = 64, KM = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start = 0, in_valid = 0, in_last = 0, busy, done;
  logic [$clog2(KM+1)-1:0] k = '0;
  logic [5:0]  in_idx = '0;
  logic [17:0] in_key = '0;
  logic [15:0] in_val = '0;
  logic [N-1:0] mask;
  logic [31:0]  sel_sum;

  argtopk #(.N_MAX(N), .K_MAX(KM), .KEYW(18), .VALW(16)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic run(input int kk, input int n, input int keyrange);
    logic [17:0] keys [N];
    logic [15:0] vals [N];
    bit taken [N];
    logic [N-1:0] exp_mask;
    longint exp_sum;
    int best, lat;
    for (int i = 0; i < n; i++) begin
      keys[i] = 18'($urandom_range(keyrange));
      vals[i] = 16'($urandom);
      taken[i] = 0;
    end
    exp_mask = '0; exp_sum = 0;
    for (int j = 0; j < ((kk < n) ? kk : n); j++) begin
      best = -1;
      for (int i = 0; i < n; i++) if (!taken[i] && (best < 0 || keys[i] > keys[best])) best = i;
      taken[best] = 1; exp_mask[best] = 1; exp_sum += vals[best];
    end
    @(negedge clk); start = 1; k = ($bits(k))'(kk);
    @(negedge clk); start = 0;
    for (int i = 0; i < n; i++) begin
      in_valid = 1; in_last = (i == n - 1); in_idx = 6'(i); in_key = keys[i]; in_val = vals[i];
      @(negedge clk);
    end
    in_valid = 0; in_last = 0;
    lat = n;
    while (!done) begin @(negedge clk); lat++; end
    check(mask == exp_mask, $sformatf("mask k=%0d n=%0d", kk, n));
    check(sel_sum == 32'(exp_sum), $sformatf("sel_sum k=%0d n=%0d: %0d vs %0d", kk, n, sel_sum, exp_sum));
    check(lat == n + ((kk < n) ? kk : n) + 1, $sformatf("latency %0d for n=%0d k=%0d", lat, n, kk));
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int it = 0; it < 40; it++) run($urandom_range(KM, 1), N, 1000);
    for (int it = 0; it < 10; it++) run($urandom_range(KM, 1), N, 3);      // many ties
    run(KM, 5, 1000);                                                       // fewer than k
    run(1, N, 0);                                                           // all equal
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
