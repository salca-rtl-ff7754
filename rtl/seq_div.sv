// seq_div: unsigned restoring divider, one quotient bit per cycle.
//
// Pulse start with num/den; done pulses W cycles later with quot = num/den
// (integer, truncated) held until the next start. Division by zero returns
// all ones. Used where a division is needed once per head (reciprocal of
// S_max for score quantization, reciprocal of the softmax denominator), so a
// small serial unit is enough.
module seq_div #(
  parameter int unsigned W = 32
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [W-1:0] num,
  input  logic [W-1:0] den,
  output logic         busy,
  output logic         done,
  output logic [W-1:0] quot
);
  logic [W-1:0]   n_q, d_q;
  logic [W-1:0]   rem;
  logic [$clog2(W+1)-1:0] cnt;
  logic [W:0]     trial;

  always_comb trial = {rem[W-1:0], n_q[W-1]};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; cnt <= '0; rem <= '0;
      n_q <= '0; d_q <= '0; quot <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        busy <= 1'b1; cnt <= W[$clog2(W+1)-1:0]; rem <= '0;
        n_q <= num; d_q <= den; quot <= '0;
      end else if (busy) begin
        n_q <= n_q << 1;
        if (trial >= {1'b0, d_q}) begin
          rem  <= W'(trial - {1'b0, d_q});
          quot <= {quot[W-2:0], 1'b1};
        end else begin
          rem  <= W'(trial);
          quot <= {quot[W-2:0], 1'b0};
        end
        cnt <= cnt - 1'b1;
        if (cnt == 1) begin busy <= 1'b0; done <= 1'b1; end
      end
    end
  end
endmodule
