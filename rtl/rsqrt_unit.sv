// rsqrt_unit: temperature factor of the SparF softmax, y = 1/sqrt(D * l1_sel / l1_all).
//
// Algorithm 1 step 4 divides the approximate logits by sqrt(d_h * ||q_[i]||_1 / ||q||_1);
// step 10 divides by sqrt(d_h), which is the same formula with l1_sel = l1_all. The unit
// finds, bit by bit from the top, the largest U1.15 value y with
// y^2 * D * l1_sel <= l1_all * 2^30, so neither a division nor a square root is needed.
//
// Interface: pulse `start`; `done` pulses 17 cycles later with `y` valid until the next
// start. The bit-serial search is this design's choice.
module rsqrt_unit #(
  parameter int D = 128
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [31:0] l1_sel,
  input  logic [31:0] l1_all,
  output logic        busy,
  output logic        done,
  output logic [15:0] y
);
  logic [4:0]   bitn;
  logic [15:0]  cand;
  logic [95:0]  lhs, rhs;
  logic [31:0]  sel_q, all_q;

  always_comb begin
    cand = y | (16'd1 << bitn[3:0]);
    lhs  = 96'(cand) * 96'(cand) * 96'(D) * 96'(sel_q);
    rhs  = 96'(all_q) << 30;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bitn <= '0; y <= '0; busy <= 1'b0; done <= 1'b0; sel_q <= '0; all_q <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        y <= '0; bitn <= 5'd15; busy <= 1'b1; sel_q <= l1_sel; all_q <= l1_all;
      end else if (busy) begin
        if (lhs <= rhs) y <= cand;
        if (bitn == 0) begin
          busy <= 1'b0;
          done <= 1'b1;
        end else begin
          bitn <= bitn - 1'b1;
        end
      end
    end
  end
endmodule
