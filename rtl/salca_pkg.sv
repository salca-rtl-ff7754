// salca_pkg: constants and helper functions shared by the sparse-attention
// decoding pipeline.
//
// The sizes follow the main configuration of the accelerator: head dimension
// 128, feature sparsity 1/2 (64 heavy "core" channels per key), 16-way
// pre-computing parallelism, one key per cycle in attention, a 256-bin
// histogram for approximate Top-K, 8 HBM pseudo channels (PCs) holding K and
// V, a conflict-elimination reorder range of 128 and a 64K-token context.
// Bit widths of scores, tags and fixed-point factors are this design's own
// choices; the source only fixes the quantization widths (3-bit symmetric
// query, 2-bit asymmetric key, INT8 scores, INT8 K/V).
package salca_pkg;

  localparam int unsigned D          = 128;   // head dimension
  localparam int unsigned R_CORE     = 64;    // heavy channels, s_f * D
  localparam int unsigned P_PRE      = 16;    // pre-computing parallelism
  localparam int unsigned MAX_CTX    = 65536; // longest context held on chip
  localparam int unsigned HIST_BINS  = 256;   // INT8 score histogram
  localparam int unsigned N_KV_PC    = 8;     // PCs holding K (and V)
  localparam int unsigned REORDER    = 128;   // conflict-elimination range
  localparam int unsigned QW         = 3;     // query core-feature bits
  localparam int unsigned KW         = 2;     // key core-feature bits
  localparam int unsigned SW         = 32;    // relevance score bits
  localparam int unsigned FW         = 16;    // key dequant factor bits
  localparam int unsigned IDXW       = 16;    // token index bits (64K)
  localparam int unsigned LAYER_W    = 6;
  localparam int unsigned CNT_W     = 4;
  localparam int unsigned HEAD_W     = 6;

  // One key as fetched for pre-computing: R_CORE 2-bit codes plus the
  // asymmetric quantizer's scale and zero point.
  typedef struct packed {
    logic signed [FW-1:0]     zero;
    logic signed [FW-1:0]     scale;
    logic [R_CORE*KW-1:0]     codes;
  } core_key_t;

  // Histogram ownership tag <layer_id, head_id, count>; count is the decode
  // step (wraps), so the same head of the next token gets a fresh histogram.
  // The all-ones tag is reserved for the power-up sweep.
  typedef struct packed {
    logic [LAYER_W-1:0] layer;
    logic [HEAD_W-1:0]  head;
    logic [CNT_W-1:0]   count;
  } head_tag_t;

  // 2^(-x) for x >= 0 given in fixed point with 8 fraction bits.
  // Result is Q1.15 (32768 == 1.0). The fractional power comes from a
  // 16-entry table of round(32768 * 2^(-i/16)) with linear interpolation.
  function automatic logic [15:0] exp2_neg(input logic [23:0] x);
    logic [15:0] lut [17];
    logic [15:0] ip;
    logic [7:0]  fr;
    logic [31:0] a, b, m;
    lut = '{16'd32768, 16'd31379, 16'd30048, 16'd28774, 16'd27554, 16'd26386,
            16'd25268, 16'd24196, 16'd23170, 16'd22188, 16'd21247, 16'd20347,
            16'd19484, 16'd18658, 16'd17867, 16'd17109, 16'd16384};
    ip = {8'd0, x[15:8]} | (x[23:16] != 0 ? 16'hFFFF : 16'h0);
    fr = x[7:0];
    a  = {16'd0, lut[{1'b0, fr[7:4]}]};
    b  = {16'd0, lut[{1'b0, fr[7:4]} + 5'd1]};
    m  = a - (((a - b) * {28'd0, fr[3:0]}) >> 4);
    if (ip >= 16) return 16'd0;
    return 16'(m >> ip);
  endfunction

endpackage
