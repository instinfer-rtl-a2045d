// divider: sequential unsigned restoring divider, one quotient bit per cycle.
//
// Used by the summation unit for the two divisions of each head (alpha and the
// reciprocal of the softmax denominator). Pulse `start` with num/den; `done` pulses
// NW+1 cycles later with quo = floor(num/den). den = 0 gives an all-ones quotient.
module divider #(
  parameter int NW = 64,
  parameter int DW = 32
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [NW-1:0] num,
  input  logic [DW-1:0] den,
  output logic          busy,
  output logic          done,
  output logic [NW-1:0] quo
);
  logic [NW-1:0]   n_q;
  logic [DW:0]     rem;
  logic [DW-1:0]   d_q;
  logic [$clog2(NW+1)-1:0] cnt;
  logic [DW:0]     trial;

  assign trial = {rem[DW-1:0], n_q[NW-1]};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n_q <= '0; rem <= '0; d_q <= '0; cnt <= '0; busy <= 1'b0; done <= 1'b0; quo <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        n_q <= num; d_q <= den; rem <= '0; cnt <= '0; busy <= 1'b1; quo <= '0;
      end else if (busy) begin
        n_q <= n_q << 1;
        if (trial >= {1'b0, d_q}) begin
          rem <= trial - {1'b0, d_q};
          quo <= {quo[NW-2:0], 1'b1};
        end else begin
          rem <= trial;
          quo <= {quo[NW-2:0], 1'b0};
        end
        cnt <= cnt + 1'b1;
        if (int'(cnt) == NW-1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end
endmodule
