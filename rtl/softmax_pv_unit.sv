// softmax_pv_unit: stage 5, safe softmax and P*V (SM_PVmul).
//
// For each selected key i of a head it receives the score s_i (from the Qxk
// RAM) and the INT8 value vector V_i (fetched from HBM), one key per cycle.
// With qk_max of the head known from stage 4, the weight is
//   p_i = 2^(-(qk_max - s_i) * scale / 256)     (Q1.15, at most 1.0)
// where `scale` (unsigned Q8.8) folds together the score dequantization,
// 1/sqrt(d) and log2(e), so p_i = e^((s_i - qk_max)/sqrt(d)). The 2^(-x)
// uses a 16-entry table with linear interpolation. A multiplier array forms
// p_i * V_i[j] for all D elements and accumulates them; an adder chain sums
// the p_i. When the key marked last has been accumulated ("when one head
// finishes") the unit computes the reciprocal of the sum with a serial
// divider and streams out the D results acc[j]/sum, one per cycle, as signed
// Q8.8 numbers (res_valid, res_dim, res_data); in_ready is low meanwhile and
// done pulses after the last element.
// Latency: 2 cycles per key into the accumulators; about 48 + D cycles to
// emit a head's output. The formula follows the source; fixed-point formats,
// the exp approximation and serial output are this design's choices.
module softmax_pv_unit
  import salca_pkg::*;
#(
  parameter int unsigned DIM = D
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic signed [SW-1:0] qk_max,
  input  logic [15:0]          scale,
  input  logic                 in_valid,
  output logic                 in_ready,
  input  logic                 in_last,
  input  logic signed [SW-1:0] in_score,
  input  logic signed [7:0]    in_v [DIM],
  output logic                 res_valid,
  output logic [$clog2(DIM)-1:0] res_dim,
  output logic signed [15:0]   res_data,
  output logic                 done
);
  localparam int unsigned AW = 48;
  typedef enum logic [1:0] {M_ACC, M_DIV, M_OUT} mstate_t;
  mstate_t state;

  logic                 v1, l1;
  logic [15:0]          p1;
  logic signed [7:0]    vv1 [DIM];
  logic signed [AW-1:0] acc [DIM];
  logic [AW-1:0]        sum;
  logic                 dstart, dbusy, ddone;
  logic [AW-1:0]        recip, quot;
  logic [$clog2(DIM)-1:0] oi;
  logic [SW:0]          diff;
  logic [SW+16:0]       prod;
  logic [23:0]          xarg;

  assign in_ready = (state == M_ACC);

  always_comb begin
    diff = (SW+1)'(qk_max) - (SW+1)'(in_score);
    if (diff[SW]) diff = '0;                      // s_i > qk_max cannot happen
    prod = (SW+17)'(diff) * (SW+17)'(scale);
    // diff * scale is the exponent in Q8 (scale is Q8.8); saturate to 24 bits
    xarg = (prod > (SW+17)'(24'hFFFFFF)) ? 24'hFFFFFF : prod[23:0];
  end

  // stage 1: exponent
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin v1 <= 1'b0; l1 <= 1'b0; end
    else begin
      v1 <= in_valid && in_ready;
      l1 <= in_valid && in_ready && in_last;
    end
  end
  always_ff @(posedge clk) begin
    if (in_valid && in_ready) begin
      p1  <= exp2_neg(xarg);
      vv1 <= in_v;
    end
  end

  // stage 2: multiplier array and accumulation; then divide and emit
  assign dstart = v1 && l1;
  seq_div #(.W(AW)) u_div (
    .clk, .rst_n, .start(dstart), .num(AW'(1) << 46), .den(sum + (AW)'(p1)),
    .busy(dbusy), .done(ddone), .quot);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= M_ACC; sum <= '0; recip <= '0; oi <= '0;
      res_valid <= 1'b0; res_dim <= '0; res_data <= '0; done <= 1'b0;
      for (int j = 0; j < DIM; j++) acc[j] <= '0;
    end else begin
      res_valid <= 1'b0; done <= 1'b0;
      if (start) begin
        sum <= '0;
        for (int j = 0; j < DIM; j++) acc[j] <= '0;
      end else if (v1) begin
        sum <= sum + AW'(p1);
        for (int j = 0; j < DIM; j++)
          acc[j] <= acc[j] + AW'($signed({1'b0, p1})) * AW'(vv1[j]);
      end
      unique case (state)
        M_ACC: if (v1 && l1) state <= M_DIV;
        M_DIV: if (ddone) begin recip <= quot; state <= M_OUT; oi <= '0; end
        M_OUT: begin
          logic signed [AW+AW-1:0] t;
          t = (AW+AW)'(acc[oi]) * $signed({1'b0, recip[AW-2:0]});
          res_valid <= 1'b1;
          res_dim   <= oi;
          res_data  <= 16'(t >>> 38);
          oi        <= oi + 1'b1;
          if (oi == ($clog2(DIM))'(DIM - 1)) begin
            state <= M_ACC; done <= 1'b1;
          end
        end
        default: state <= M_ACC;
      endcase
    end
  end

  logic unused;
  assign unused = dbusy ^ recip[AW-1];
endmodule
