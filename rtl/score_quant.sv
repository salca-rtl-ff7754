// score_quant: stage 2 quantizer, relevance scores to INT8 histogram codes.
//
// Once per head, `start` loads S_max (largest |score| of the head, from
// stage 1). To keep the reciprocal precise for any S_max, S_max is first
// normalised: NS = max(0, msb(S_max) - 15) so that S_max >> NS fits in 16
// bits. A serial divider then forms RECIP = floor(127 * 2^SH / (S_max>>NS));
// `ready` rises when it is done (33 cycles after start). After that every
// beat of P scores is mapped, one beat per cycle, to
//   code = clamp(128 + (((score >>> NS) * RECIP) >>> SH), 0, 255)
// so the range [-S_max, S_max] fills the 8-bit code space and the code can
// be used directly as a histogram address. Order is preserved, which is all
// the Top-K search needs. Output is registered: one cycle latency.
// The source states only that scores are quantized to INT8 using S_max; the
// symmetric mapping with offset 128 and the reciprocal are this design's.
module score_quant
  import salca_pkg::*;
#(
  parameter int unsigned P  = P_PRE,
  parameter int unsigned SH = 20
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [SW-1:0]        s_max,
  output logic                 ready,
  input  logic                 in_valid,
  input  logic                 in_last,
  input  logic signed [SW-1:0] score [P],
  output logic                 out_valid,
  output logic                 out_last,
  output logic [7:0]           code [P]
);
  logic        dbusy, ddone;
  logic [31:0] recip, quot;
  logic        have;
  logic [4:0]  ns_n, ns;

  // normalisation shift from the leading one of S_max
  always_comb begin
    ns_n = '0;
    for (int b = 16; b < SW; b++) if (s_max[b]) ns_n = 5'(b - 15);
  end

  seq_div #(.W(32)) u_div (
    .clk, .rst_n, .start,
    .num(32'(127) << SH), .den(s_max == 0 ? 32'd1 : (s_max >> ns_n)),
    .busy(dbusy), .done(ddone), .quot);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      have <= 1'b0; recip <= '0; ns <= '0;
    end else if (start) begin
      have <= 1'b0; ns <= ns_n;
    end else if (ddone) begin
      have <= 1'b1; recip <= quot;
    end
  end
  assign ready = have && !dbusy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_last <= 1'b0;
    end else begin
      out_valid <= in_valid;
      out_last  <= in_valid && in_last;
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      for (int i = 0; i < P; i++) begin
        logic signed [63:0] prod, v;
        prod = 64'(score[i] >>> ns) * $signed({32'd0, recip});
        v    = (prod >>> SH) + 64'sd128;
        if (v < 0)        code[i] <= 8'd0;
        else if (v > 255) code[i] <= 8'd255;
        else              code[i] <= v[7:0];
      end
    end
  end
endmodule
