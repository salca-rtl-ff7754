// relevance_unit: stage 1, lightweight relevance estimation.
//
// Each beat carries P_PRE keys, each reduced to R_CORE heavy-channel
// features quantized to 2 bits (asymmetric: key ~ scale*code + zero). The
// query's heavy channels are held as 3-bit symmetric integers. Every lane
// computes the integer dot product sum(q_j*code_j) with an adder tree and
// dequantizes it: score = scale*sum(q_j*code_j) + zero*sum(q_j). The query's
// own scale is shared by all keys and dropped, as the source allows, since
// only the ranking matters. A running maximum of |score| (S_max) is kept per
// head for the INT8 quantizer of stage 2; `start` clears it.
//
// Timing: two register stages, out_valid follows in_valid two cycles later,
// one beat per cycle, no back-pressure. The 2-bit/3-bit formats and the
// P_PRE=16 lanes follow the source; the fixed-point factor format (signed
// 16-bit integers instead of FP16) and the |score| maximum are this design's
// choices.
module relevance_unit
  import salca_pkg::*;
#(
  parameter int unsigned P = P_PRE,
  parameter int unsigned R = R_CORE
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        start,
  input  logic signed [QW-1:0]        q [R],
  input  logic                        in_valid,
  input  logic                        in_last,
  input  logic [R*KW-1:0]             k_codes [P],
  input  logic signed [FW-1:0]        k_scale [P],
  input  logic signed [FW-1:0]        k_zero  [P],
  output logic                        out_valid,
  output logic                        out_last,
  output logic signed [SW-1:0]        score [P],
  output logic [SW-1:0]               s_max
);
  logic signed [15:0] dot_d [P];
  logic signed [FW-1:0] sc_d [P], zr_d [P];
  logic               v_d, last_d;
  logic signed [15:0] qsum;
  logic signed [SW-1:0] sc_n [P];
  logic [SW-1:0]        mx_n;

  always_comb begin
    qsum = '0;
    for (int j = 0; j < R; j++) qsum += 16'(q[j]);
  end

  // Stage A: low-precision dot products.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_d <= 1'b0; last_d <= 1'b0;
    end else begin
      v_d <= in_valid; last_d <= in_valid && in_last;
    end
  end
  always_ff @(posedge clk) begin
    for (int i = 0; i < P; i++) begin
      logic signed [15:0] acc;
      acc = '0;
      for (int j = 0; j < R; j++)
        acc += 16'(q[j]) * $signed({14'd0, k_codes[i][j*KW +: KW]});
      dot_d[i] <= acc;
      sc_d[i]  <= k_scale[i];
      zr_d[i]  <= k_zero[i];
    end
  end

  // Stage B: dequantization and S_max.
  always_comb begin
    mx_n = s_max;
    for (int i = 0; i < P; i++) begin
      logic [SW-1:0] a;
      sc_n[i] = SW'(sc_d[i]) * SW'(dot_d[i]) + SW'(zr_d[i]) * SW'(qsum);
      a = sc_n[i][SW-1] ? SW'(-sc_n[i]) : SW'(sc_n[i]);
      if (a > mx_n) mx_n = a;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_last <= 1'b0; s_max <= '0;
    end else begin
      out_valid <= v_d;
      out_last  <= last_d;
      if (start)    s_max <= '0;
      else if (v_d) s_max <= mx_n;
    end
  end
  always_ff @(posedge clk) if (v_d) score <= sc_n;
endmodule
