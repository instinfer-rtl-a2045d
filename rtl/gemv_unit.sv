// gemv_unit: one row of multipliers of the attention kernel's GeMV datapath.
//
// Multiplies ELEMS pairs of Q8.8 operands, a[l] * b[l], giving the full Q16.16 products,
// and also their sum. The kernel uses the products lane by lane when a beat updates
// ELEMS different tokens or hidden dims (score += q[h]*K[t][h] over a hidden-indexed
// beat, acc[h] += w_t*V[t][h] over a value beat) and the sum when a beat is a slice of
// one token's key (q . K[t]).
//
// Interface: operands and results are combinational; the kernel registers the result
// when it writes its score or accumulator memory, so a beat is absorbed in one cycle.
// The paper names GeMV units inside each attention kernel; their width and the number
// format are this design's choices.
module gemv_unit #(
  parameter int ELEMS = 16,
  parameter int AW    = 16,   // width of a operands (signed)
  parameter int BW    = 16    // width of b operands (signed)
) (
  input  logic signed [ELEMS-1:0][AW-1:0]    a,
  input  logic signed [ELEMS-1:0][BW-1:0]    b,
  output logic signed [ELEMS-1:0][AW+BW-1:0] prod,
  output logic signed [AW+BW+$clog2(ELEMS)-1:0] dot
);
  always_comb begin
    dot = '0;
    for (int l = 0; l < ELEMS; l++) begin
      prod[l] = $signed(a[l]) * $signed(b[l]);
      dot     = dot + (AW+BW+$clog2(ELEMS))'($signed(prod[l]));
    end
  end
endmodule
