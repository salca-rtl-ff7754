// tb_relevance_unit: self-checking test of the low-precision relevance
// estimator. Random 3-bit queries, 2-bit key codes and factors; every score
// and the head's S_max are compared with a direct integer model. Checks the
// 2-cycle pipeline latency and that `start` clears S_max between heads.
module tb_relevance_unit;
  import salca_pkg::*;
  localparam int P = 16, R = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, in_valid, in_last, out_valid, out_last;
  logic signed [QW-1:0] q [R];
  logic [R*KW-1:0] k_codes [P];
  logic signed [FW-1:0] k_scale [P], k_zero [P];
  logic signed [SW-1:0] score [P];
  logic [SW-1:0] s_max;
  int checks = 0, failures = 0, cyc = 0;
  int exp_q [$];
  int t_q [$];
  int smax_ref;

  relevance_unit dut (.*);

  always @(posedge clk) cyc++;
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(negedge clk) if (rst_n && out_valid) begin
    int e, t;
    bit bad;
    t = t_q.pop_front();
    checks++; bad = 0;
    for (int i = 0; i < P; i++) begin
      e = exp_q.pop_front();
      if (int'(score[i]) != e && !bad) begin
        failures++; bad = 1; $display("lane %0d score %0d exp %0d", i, score[i], e);
      end
    end
    checks++;
    if (cyc - t != 2) begin failures++; $display("latency %0d", cyc - t); end
  end

  task automatic run_head(input int beats);
    int e [P];
    int qs, d, a;
    @(negedge clk);
    start = 1;
    for (int j = 0; j < R; j++) q[j] = QW'($urandom);
    @(negedge clk); start = 0;
    smax_ref = 0;
    qs = 0; for (int j = 0; j < R; j++) qs += int'(q[j]);
    for (int b = 0; b < beats; b++) begin
      in_valid = 1; in_last = (b == beats - 1);
      for (int i = 0; i < P; i++) begin
        k_codes[i] = {$urandom, $urandom, $urandom, $urandom};
        k_scale[i] = FW'($urandom % 2048);
        k_zero[i]  = FW'(-int'($urandom % 4096));
        d = 0;
        for (int j = 0; j < R; j++) d += int'(q[j]) * int'(k_codes[i][j*KW +: KW]);
        e[i] = int'(k_scale[i]) * d + int'(k_zero[i]) * qs;
        a = e[i] < 0 ? -e[i] : e[i];
        if (a > smax_ref) smax_ref = a;
      end
      foreach (e[i]) exp_q.push_back(e[i]);
      t_q.push_back(cyc);
      @(negedge clk);
    end
    in_valid = 0; in_last = 0;
    repeat (4) @(negedge clk);
    checks++;
    if (int'(s_max) != smax_ref) begin failures++; $display("s_max %0d exp %0d", s_max, smax_ref); end
  endtask

  initial begin
    start = 0; in_valid = 0; in_last = 0;
    foreach (q[j]) q[j] = 0;
    foreach (k_codes[i]) begin k_codes[i] = 0; k_scale[i] = 0; k_zero[i] = 0; end
    repeat (3) @(negedge clk); rst_n = 1;
    run_head(20);
    run_head(5);
    run_head(64);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
