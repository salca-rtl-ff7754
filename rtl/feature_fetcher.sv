// feature_fetcher: stage 1 data fetcher for the core-feature stream.
//
// Core features (2-bit codes plus two factors per key) are stored
// contiguously in HBM, P keys per read beat, so fetching a head is a run of
// consecutive beat addresses. HBM is split into two stacks, each with a
// small region 0 (1/8 of the capacity) and a large region 1 (7/8).
// Pre-computing and attention take one stack each, and when the core-feature
// region fills up the roles swap ("interleaved access"): with
// region_swap = 0 features are read from stack 0 / region 0 (K/V then live
// in stack 1 / region 1), with region_swap = 1 from stack 1 / region 0 (K/V
// in stack 0 / region 1). The fetcher adds the selected region base to the
// head's base and the beat number.
// Interface: `start` with n_tokens and head_base; then ceil(n_tokens/P)
// requests leave on req_valid/req_addr, one per cycle while req_ready.
// done pulses with the last request. The contiguous layout and region
// swap follow the source; the address arithmetic is this design's.
module feature_fetcher
  import salca_pkg::*;
#(
  parameter int unsigned P        = P_PRE,
  parameter int unsigned ADDR_W   = 32,
  parameter logic [ADDR_W-1:0] STACK0_R0 = 32'h0000_0000,
  parameter logic [ADDR_W-1:0] STACK1_R0 = 32'h8000_0000
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [IDXW:0]     n_tokens,
  input  logic [ADDR_W-1:0] head_base,
  input  logic              region_swap,
  output logic              req_valid,
  input  logic              req_ready,
  output logic [ADDR_W-1:0] req_addr,
  output logic              req_last,
  output logic              done
);
  logic [IDXW:0]     beats, cur;
  logic [ADDR_W-1:0] base;

  assign req_addr = base + ADDR_W'(cur);
  assign req_last = (cur + 1'b1 == beats);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      req_valid <= 1'b0; beats <= '0; cur <= '0; base <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        beats     <= (n_tokens + (IDXW+1)'(P - 1)) / (IDXW+1)'(P);
        cur       <= '0;
        base      <= (region_swap ? STACK1_R0 : STACK0_R0) + head_base;
        req_valid <= (n_tokens != 0);
      end else if (req_valid && req_ready) begin
        cur <= cur + 1'b1;
        if (req_last) begin req_valid <= 1'b0; done <= 1'b1; end
      end
    end
  end
endmodule
