// sum_unit: the summation unit that closes a SparF attention head.
//
// Algorithm 1 step 7 sets alpha to the share of the approximate softmax mass that the
// top-k tokens hold, and step 11 blends the attention over those tokens with the mean
// value vector: out = alpha * (s . V_[j]) + (1 - alpha) * vbar. The kernels deliver
// unnormalised exponentials, so this unit does the normalisation:
//   alpha = floor(sel_sum * 2^15 / all_sum)                  (U1.15)
//   inv   = floor(2^46 / e_sel)                              (reciprocal of kernel 2's sum)
//   attn[d] = (acc[d] * inv) >>> 46                          (Q8.8; acc is Q.23)
//   out[d]  = (alpha * attn[d] + (2^15 - alpha) * vbar[d]) >>> 15
// Two divisions share one bit-serial divider, then one hidden dim is finished per cycle.
//
// Interface: pulse `start` with the inputs held stable; `done` pulses when `out` and
// `alpha` are valid (2*65 + D + 3 cycles after start: two 64-step divisions plus
// handoffs, then one dim per cycle). They stay valid until the next start.
// The formulas are the paper's; doing both divisions here once per head is this
// design's choice.
module sum_unit #(
  parameter int D  = 128,
  parameter int AW = 48
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        start,
  input  logic [31:0]                 sel_sum,
  input  logic [31:0]                 all_sum,
  input  logic [31:0]                 e_sel,
  input  logic signed [D-1:0][AW-1:0] acc,
  input  logic [D-1:0][15:0]          vbar,
  output logic                        busy,
  output logic                        done,
  output logic [15:0]                 alpha,
  output logic [D-1:0][15:0]          out
);
  typedef enum logic [2:0] {U_IDLE, U_DIV_A, U_DIV_I, U_BLEND} ustate_e;
  ustate_e state;

  logic        dv_start, dv_busy, dv_done;
  logic [63:0] dv_num, dv_quo;
  logic [31:0] dv_den;
  logic [63:0] inv;
  logic [$clog2(D+1)-1:0] d;

  divider #(.NW(64), .DW(32)) u_div (
    .clk, .rst_n, .start(dv_start), .num(dv_num), .den(dv_den),
    .busy(dv_busy), .done(dv_done), .quo(dv_quo)
  );

  // Blend datapath for dim d.
  logic signed [127:0] attn_w;
  logic signed [31:0]  attn;
  logic signed [63:0]  mix;
  logic [$clog2(D)-1:0] di;
  assign di = d[$clog2(D)-1:0];
  always_comb begin
    attn_w = 128'($signed(acc[di])) * $signed({64'd0, inv});
    attn   = 32'(attn_w >>> 46);
    mix    = 64'($signed({1'b0, alpha})) * 64'(attn)
           + 64'($signed({1'b0, 16'd32768 - alpha})) * 64'($signed(vbar[di]));
  end

  assign busy = (state != U_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= U_IDLE; dv_start <= 1'b0; dv_num <= '0; dv_den <= '0;
      inv <= '0; alpha <= '0; d <= '0; done <= 1'b0; out <= '0;
    end else begin
      dv_start <= 1'b0;
      done     <= 1'b0;
      unique case (state)
        U_IDLE: if (start) begin
          dv_num   <= 64'(sel_sum) << 15;
          dv_den   <= all_sum;
          dv_start <= 1'b1;
          state    <= U_DIV_A;
        end
        U_DIV_A: if (dv_done) begin
          alpha    <= (dv_quo > 64'd32768) ? 16'd32768 : dv_quo[15:0];
          dv_num   <= 64'd1 << 46;
          dv_den   <= e_sel;
          dv_start <= 1'b1;
          state    <= U_DIV_I;
        end
        U_DIV_I: if (dv_done) begin
          inv   <= dv_quo;
          d     <= '0;
          state <= U_BLEND;
        end
        U_BLEND: begin
          out[di] <= 16'(mix >>> 15);
          d       <= d + 1'b1;
          if (int'(d) == D-1) begin
            state <= U_IDLE;
            done  <= 1'b1;
          end
        end
        default: state <= U_IDLE;
      endcase
    end
  end
endmodule
