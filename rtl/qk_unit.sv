// qk_unit: stage 4, exact q.k scores of the selected keys (Q_mul_K).
//
// K is stored in HBM as INT8 and each key sits in a single pseudo channel,
// so a key arrives as BEATS = D/SEG beats of SEG elements (one PC beat,
// 32 bytes, per cycle). N_DPU dot-product lanes each take one beat per cycle
// from their own stream, multiply it with the matching segment of the INT8
// query (broadcast to all lanes) and accumulate partial sums until the beat
// marked last completes the key. N_DPU*SEG = 128 multipliers give one full
// key per cycle, the attention parallelism of the main configuration.
// Finished scores wait in a one-entry result register per lane and leave
// one per cycle (round-robin) as (index, score); a lane whose result register
// is still occupied holds off its final beat. The running maximum qk_max of
// the head is kept for the safe softmax of stage 5; `start` clears it.
// Segmented accumulation and max tracking follow the source; lane count,
// arbitration and widths are this design's choices.
module qk_unit
  import salca_pkg::*;
#(
  parameter int unsigned DIM   = D,
  parameter int unsigned SEG   = 32,
  parameter int unsigned N_DPU = 4,
  localparam int unsigned BEATS = DIM / SEG,
  localparam int unsigned LB    = (BEATS > 1) ? $clog2(BEATS) : 1,
  localparam int unsigned LN    = (N_DPU > 1) ? $clog2(N_DPU) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic signed [7:0]    q [DIM],
  input  logic [N_DPU-1:0]     in_valid,
  output logic [N_DPU-1:0]     in_ready,
  input  logic [N_DPU-1:0]     in_last,
  input  logic [IDXW-1:0]      in_idx  [N_DPU],
  input  logic signed [7:0]    in_data [N_DPU][SEG],
  output logic                 out_valid,
  output logic [IDXW-1:0]      out_idx,
  output logic signed [SW-1:0] out_score,
  output logic signed [SW-1:0] qk_max,
  output logic                 qk_max_valid
);
  logic [LB-1:0]        beat [N_DPU];
  logic signed [SW-1:0] acc  [N_DPU];
  logic [N_DPU-1:0]     rfull;
  logic [IDXW-1:0]      ridx [N_DPU];
  logic signed [SW-1:0] rsc  [N_DPU];
  logic [LN-1:0]        rr;
  logic [N_DPU-1:0]     take;
  logic                 pick_v;
  logic [LN-1:0]        pick;

  // round-robin pick of one finished lane
  always_comb begin
    pick_v = 1'b0; pick = rr;
    for (int k = 0; k < N_DPU; k++) begin
      int unsigned l;
      l = (int'(rr) + k) % N_DPU;
      if (!pick_v && rfull[l]) begin pick_v = 1'b1; pick = LN'(l); end
    end
    take = '0;
    if (pick_v) take[pick] = 1'b1;
  end

  for (genvar l = 0; l < N_DPU; l++) begin : g_lane
    logic signed [SW-1:0] part;
    always_comb begin
      part = '0;
      for (int e = 0; e < SEG; e++)
        part += SW'(q[int'(beat[l]) * SEG + e]) * SW'(in_data[l][e]);
    end
    assign in_ready[l] = !in_last[l] || !rfull[l] || take[l];

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        beat[l] <= '0; acc[l] <= '0; rfull[l] <= 1'b0;
      end else begin
        if (take[l]) rfull[l] <= 1'b0;
        if (in_valid[l] && in_ready[l]) begin
          if (in_last[l]) begin
            rfull[l] <= 1'b1;
            ridx[l]  <= in_idx[l];
            rsc[l]   <= acc[l] + part;
            acc[l]   <= '0;
            beat[l]  <= '0;
          end else begin
            acc[l]  <= acc[l] + part;
            beat[l] <= beat[l] + 1'b1;
          end
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; rr <= '0; qk_max_valid <= 1'b0; qk_max <= '0;
      out_idx <= '0; out_score <= '0;
    end else begin
      out_valid <= pick_v;
      if (pick_v) begin
        out_idx   <= ridx[pick];
        out_score <= rsc[pick];
        rr        <= LN'((int'(pick) + 1) % N_DPU);
        if (!qk_max_valid || rsc[pick] > qk_max) qk_max <= rsc[pick];
        qk_max_valid <= 1'b1;
      end
      if (start) qk_max_valid <= 1'b0;
    end
  end
endmodule
