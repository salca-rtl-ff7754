// maxpool_unit: stride-1 one-dimensional max pooling of INT8 score codes.
//
// Window R (odd, R=7 by default) centred on each token, built from the
// multi-level reuse recurrence
//   mp(3,n) = max(in[n-1], in[n], in[n+1])
//   mp(r,n) = max(mp(r-2,n-1), mp(r-2,n+1))     r > 3
// i.e. one level of 3-input comparators followed by (R-3)/2 levels of
// stride-2 two-input comparators. Input arrives as beats of P codes; the
// unit keeps the previous and current beat and produces the pooled current
// beat when the next one arrives, so a beat leaves one beat later. At the
// ends of a head the window is padded with code 0, which never wins a max.
// After the beat marked last the unit spends one cycle flushing the held
// beat (in_ready low). With bypass high the codes pass unchanged with the
// same timing. Output is registered; downstream is always ready.
// The recurrence, the window 7 and the bypass follow the source; the beat
// buffering and zero padding are this design's choices.
module maxpool_unit #(
  parameter int unsigned P = 16,
  parameter int unsigned R = 7,
  localparam int unsigned H = (R - 1) / 2
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       bypass,
  input  logic       in_valid,
  input  logic       in_last,
  output logic       in_ready,
  input  logic [7:0] in_code [P],
  output logic       out_valid,
  output logic       out_last,
  output logic [7:0] out_code [P]
);
  logic [7:0] prev [P];
  logic [7:0] cur  [P];
  logic       have_cur, cur_first, flush;
  logic [7:0] pooled [P];
  logic       fire, emit;

  assign in_ready = !flush;
  assign fire     = in_valid && in_ready;
  assign emit     = (fire && have_cur) || flush;

  // Comparison tree over the current beat with H neighbours each side.
  always_comb begin
    logic [7:0] e [P + 2*H];
    logic [7:0] lvl [P + 2*H];
    logic [7:0] nxt [P + 2*H];
    for (int i = 0; i < H; i++) begin
      e[i]         = cur_first ? 8'd0 : prev[P - H + i];
      e[P + H + i] = flush     ? 8'd0 : in_code[i];
    end
    for (int i = 0; i < P; i++) e[H + i] = cur[i];
    lvl = e;
    if (H >= 1) begin
      for (int i = 1; i < P + 2*H - 1; i++) begin
        logic [7:0] m;
        m = (e[i-1] > e[i]) ? e[i-1] : e[i];
        nxt[i] = (m > e[i+1]) ? m : e[i+1];
      end
      nxt[0] = e[0]; nxt[P + 2*H - 1] = e[P + 2*H - 1];
      lvl = nxt;
    end
    for (int l = 2; l <= H; l++) begin
      for (int i = l; i < P + 2*H - l; i++)
        nxt[i] = (lvl[i-1] > lvl[i+1]) ? lvl[i-1] : lvl[i+1];
      lvl = nxt;
    end
    for (int i = 0; i < P; i++) pooled[i] = lvl[H + i];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      have_cur <= 1'b0; cur_first <= 1'b1; flush <= 1'b0;
      out_valid <= 1'b0; out_last <= 1'b0;
    end else begin
      out_valid <= emit;
      out_last  <= flush;
      if (flush) begin
        flush <= 1'b0; have_cur <= 1'b0; cur_first <= 1'b1;
      end else if (fire) begin
        have_cur  <= 1'b1;
        cur_first <= !have_cur;
        flush     <= in_last;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (fire) begin
      prev <= cur;
      cur  <= in_code;
    end
    if (emit) out_code <= bypass ? cur : pooled;
  end
endmodule
