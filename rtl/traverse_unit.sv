// traverse_unit: stage 3, sparse index extraction ("mask-sorting-based
// parallel gather").
//
// Each beat brings P quantized (pooled) scores of consecutive tokens starting
// at token index in_base. Every score is compared with the Top-K threshold,
// giving a binary mask (1 = keep; tokens at or beyond n_tokens are masked
// off). Each element's local position is joined to its mask and the pairs go
// through a bitonic network that compares only the mask and moves mask and
// position together, so all kept positions end up at the head of the beat.
// Adding in_base to the positions recovers absolute token indices.
// Output: out_count kept indices in out_idx[0 .. out_count-1], in a fixed
// pipeline of 1 + log2(P)(log2(P)+1)/2 + 1 cycles (12 for P=16), one beat
// per cycle. Compare-sort-add structure follows the source; the pipeline
// registers and the n_tokens mask are this design's.
module traverse_unit
  import salca_pkg::*;
#(
  parameter int unsigned P  = P_PRE,
  localparam int unsigned LP = $clog2(P),
  localparam int unsigned NS = LP * (LP + 1) / 2
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [7:0]      thrd,
  input  logic [IDXW:0]   n_tokens,
  input  logic            in_valid,
  input  logic            in_last,
  input  logic [IDXW-1:0] in_base,
  input  logic [7:0]      in_code [P],
  output logic            out_valid,
  output logic            out_last,
  output logic [LP:0]     out_count,
  output logic [IDXW-1:0] out_idx [P]
);
  logic            v0, l0;
  logic [IDXW-1:0] base0;
  logic [LP:0]     cnt0;
  logic [0:0]      key0 [P];
  logic [LP-1:0]   pos0 [P];
  logic [0:0]      skey [P];
  logic [LP-1:0]   spos [P];
  logic            sv;

  // compare stage
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin v0 <= 1'b0; l0 <= 1'b0; end
    else begin v0 <= in_valid; l0 <= in_valid && in_last; end
  end
  always_ff @(posedge clk) begin
    if (in_valid) begin
      logic [LP:0] c;
      c = '0;
      for (int i = 0; i < P; i++) begin
        logic keep;
        keep = (in_code[i] >= thrd) && ({1'b0, in_base} + (IDXW+1)'(i) < n_tokens);
        key0[i] <= !keep;            // ascending sort: kept (0) first
        pos0[i] <= LP'(i);
        c += (LP+1)'(keep);
      end
      cnt0  <= c;
      base0 <= in_base;
    end
  end

  bitonic_sorter #(.N(P), .KW(1), .PW(LP)) u_sort (
    .clk, .rst_n, .in_valid(v0), .in_key(key0), .in_pay(pos0),
    .out_valid(sv), .out_key(skey), .out_pay(spos));

  // base, count and last travel beside the network
  logic [IDXW-1:0] base_d [NS];
  logic [LP:0]     cnt_d  [NS];
  logic [NS-1:0]   last_d;
  always_ff @(posedge clk) begin
    base_d[0] <= base0; cnt_d[0] <= cnt0;
    for (int s = 1; s < NS; s++) begin
      base_d[s] <= base_d[s-1]; cnt_d[s] <= cnt_d[s-1];
    end
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) last_d <= '0;
    else        last_d <= {last_d[NS-2:0], l0};
  end

  // base-address add
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin out_valid <= 1'b0; out_last <= 1'b0; end
    else begin out_valid <= sv; out_last <= sv && last_d[NS-1]; end
  end
  always_ff @(posedge clk) begin
    if (sv) begin
      out_count <= cnt_d[NS-1];
      for (int i = 0; i < P; i++) out_idx[i] <= base_d[NS-1] + IDXW'(spos[i]);
    end
  end

  logic unused;
  always_comb begin
    unused = 1'b0;
    for (int i = 0; i < P; i++) unused ^= skey[i][0];
  end
endmodule
