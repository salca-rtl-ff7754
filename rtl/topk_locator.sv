// topk_locator: approximate Top-K threshold locating ("Identify Kth").
//
// P independent histogram lanes (hist_unit) each take one INT8 code per
// cycle, so a head of n tokens is counted in n/P cycles with no comparison
// chain between elements. When the beat marked last has been accepted and
// the lanes have drained, the unit scans the bins from 255 downwards, adding
// the P lane counts of each bin (adder tree) to a running total. The first
// bin T at which the total reaches k_target is the threshold: every token
// whose code is >= T is kept. If the total never reaches k_target, T = 0.
// This is the reverse prefix sum of the algorithm: acc=0, T=255; while
// acc<k: acc+=C[T], T--; threshold = T+1. The scan needs at most 256+2
// cycles; in_ready is low during it and during the lanes' power-up sweep.
// thrd_valid pulses for one cycle with the threshold.
// Histogram, scan rule and lane structure follow the source; the moment of
// the scan (after the head, stalling input) is this design's choice.
module topk_locator
  import salca_pkg::*;
#(
  parameter int unsigned P    = P_PRE,
  parameter int unsigned BINS = HIST_BINS,
  parameter int unsigned CW   = 16,
  parameter int unsigned KTW  = 17,
  localparam int unsigned AW  = $clog2(BINS)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  head_tag_t      tag,
  input  logic [KTW-1:0] k_target,
  input  logic           in_valid,
  input  logic           in_last,
  output logic           in_ready,
  input  logic [7:0]     in_code [P],
  output logic           thrd_valid,
  output logic [7:0]     thrd,
  output logic [31:0]    ev_bypass,     // RAW bypass uses, all lanes
  output logic [31:0]    ev_stale       // stale-tag reads zeroed
);
  typedef enum logic [1:0] {S_ACC, S_DRAIN, S_SCAN} state_t;
  state_t state;

  logic [P-1:0]  busy, b1, b2, st;
  logic [CW-1:0] cnt [P];
  logic          scan_en, ret_v;
  logic [AW-1:0] scan_addr, ret_addr;
  logic [31:0]   acc, bin_sum;
  logic          fire;

  logic          lanes_ready;
  logic [P-1:0]  lane_init_done;
  assign lanes_ready = &lane_init_done;
  assign in_ready    = (state == S_ACC) && lanes_ready;
  assign fire = in_valid && in_ready;

  for (genvar i = 0; i < P; i++) begin : g_lane
    hist_unit #(.BINS(BINS), .CW(CW)) u_lane (
      .clk, .rst_n, .tag,
      .in_valid(fire), .in_addr(in_code[i][AW-1:0]),
      .scan_en, .scan_addr, .scan_count(cnt[i]),
      .busy(busy[i]), .ev_bypass1(b1[i]), .ev_bypass2(b2[i]), .ev_stale(st[i]));
  end

  always_comb begin
    bin_sum = '0;
    for (int i = 0; i < P; i++) bin_sum += 32'(cnt[i]);
  end

  assign scan_en = (state == S_SCAN);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_ACC; scan_addr <= '1; ret_v <= 1'b0; ret_addr <= '0;
      acc <= '0; thrd_valid <= 1'b0; thrd <= '0; lane_init_done <= '0;
      ev_bypass <= '0; ev_stale <= '0;
    end else begin
      thrd_valid <= 1'b0;
      for (int i = 0; i < P; i++)
        if (!busy[i]) lane_init_done[i] <= 1'b1;
      ev_bypass <= ev_bypass + 32'($countones(b1)) + 32'($countones(b2));
      ev_stale  <= ev_stale + 32'($countones(st));
      ret_v    <= scan_en;
      ret_addr <= scan_addr;
      case (state)
        S_ACC: if (fire && in_last) state <= S_DRAIN;
        S_DRAIN: if (busy == '0) begin
          state <= S_SCAN; scan_addr <= AW'(BINS - 1); acc <= '0;
        end
        S_SCAN: begin
          scan_addr <= scan_addr - 1'b1;
          if (ret_v) begin
            acc <= acc + bin_sum;
            if (acc + bin_sum >= 32'(k_target) || ret_addr == 0) begin
              thrd       <= (acc + bin_sum >= 32'(k_target)) ? 8'(ret_addr) : 8'd0;
              thrd_valid <= 1'b1;
              state      <= S_ACC;
              ret_v      <= 1'b0;
            end
          end
        end
        default: state <= S_ACC;
      endcase
    end
  end
endmodule
