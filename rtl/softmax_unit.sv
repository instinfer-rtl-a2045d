// softmax_unit: one exponential lane of the attention kernel's softmax.
//
// The kernel runs softmax in two passes over its score memory. In the first pass each
// lane scales a raw score by the temperature factor y (the 1/sqrt(...) of Algorithm 1,
// as U1.15) and the kernel takes the maximum. In the second pass each lane returns
// exp(scaled - max) as U1.15 (1.0 = 32768). Normalisation by the sum of exponentials
// is left to the summation unit, which divides once per head instead of once per token.
//
// exp(x) for x <= 0 is computed as 2^(-z) with z = -x*log2(e): the integer part of z is a
// right shift and the top 6 fraction bits index a 64-entry table of 2^(-i/64), built at
// elaboration by repeated multiplication with round(2^30 * 2^(-1/64)) = 1062175491.
//
// Interface: purely combinational. `score` is a raw dot product in Q.16 (products of two
// Q8.8 numbers), `scaled` is Q.8. Splitting exp into shift and table is this design's
// choice; the paper only names the Softmax units.
module softmax_unit #(
  parameter int SW = 40   // score width
) (
  input  logic signed [SW-1:0] score,
  input  logic        [15:0]   y,        // U1.15
  input  logic signed [31:0]   max_val,  // Q.8, max of scaled over the row set
  output logic signed [31:0]   scaled,   // Q.8
  output logic        [15:0]   e         // U1.15
);
  localparam logic [31:0] LOG2E_Q15 = 32'd47274;   // round(log2(e) * 2^15)
  localparam logic [63:0] STEP_Q30  = 64'd1062175491;

  typedef logic [63:0][15:0] tab_t;
  function automatic tab_t build_tab();
    tab_t t;
    logic [63:0] v;
    v = 64'd1 << 30;
    for (int i = 0; i < 64; i++) begin
      t[i] = 16'(v >> 15);   // U1.15
      v = (v * STEP_Q30) >> 30;
    end
    return t;
  endfunction
  localparam tab_t POW_TAB = build_tab();

  logic signed [SW+16:0] prod;
  logic signed [31:0]    diff;
  logic        [47:0]    z;       // Q.8 of -diff*log2e
  logic        [15:0]    frac_val;
  always_comb begin
    prod   = $signed(score) * $signed({1'b0, y});
    scaled = 32'(prod >>> 23);                  // Q.16 * Q.15 -> Q.8
    diff   = scaled - max_val;                  // <= 0 when max_val is the maximum
    if (diff > 0) diff = '0;
    z = (48'(unsigned'(-diff)) * 48'(LOG2E_Q15)) >> 15;
    frac_val = POW_TAB[z[7:2]];
    if (z[47:8] >= 40'd16) e = '0;
    else                   e = frac_val >> z[11:8];
  end
endmodule
