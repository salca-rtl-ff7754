// tb_softmax_pv_unit: self-checking test of safe softmax and P*V.
// For random scores, value vectors and scale, the D outputs of a head are
// compared with a real-valued model  sum_i p_i V_i / sum_i p_i  with
// p_i = 2^(-(qk_max - s_i) * scale / 256); the tolerance is 1% of the
// largest |V| plus 2 LSB (Q8.8) to cover the table-based exponent. Checks
// that done follows the last key after at most 48 + D + 8 cycles and that
// input stalls (in_ready low while emitting) are honoured.
module tb_softmax_pv_unit;
  import salca_pkg::*;
  localparam int DIM = 128;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, in_valid, in_ready, in_last, res_valid, done;
  logic signed [SW-1:0] qk_max, in_score;
  logic [15:0] scale;
  logic signed [7:0] in_v [DIM];
  logic [6:0] res_dim;
  logic signed [15:0] res_data;
  int checks = 0, failures = 0, n_res = 0, cyc = 0;
  real ref_out [DIM];
  real tol;

  softmax_pv_unit dut (.*);

  always @(posedge clk) cyc++;
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(negedge clk) if (rst_n && res_valid) begin
    real g;
    g = real'(res_data) / 256.0;
    checks++; n_res++;
    if (g - ref_out[res_dim] > tol || ref_out[res_dim] - g > tol) begin
      failures++; if (failures < 10) $display("dim %0d got %f exp %f", res_dim, g, ref_out[res_dim]);
    end
  end

  task automatic run_head(input int n, input int spread, input int sc);
    int s [$];
    real num [DIM];
    real den, p;
    int mx, t_last;
    foreach (num[j]) num[j] = 0.0;
    den = 0.0; mx = -2147483647;
    for (int i = 0; i < n; i++) begin
      s.push_back(int'($urandom % spread) - spread / 2);
      if (s[i] > mx) mx = s[i];
    end
    @(negedge clk);
    qk_max = SW'(mx); scale = 16'(sc); start = 1;
    @(negedge clk); start = 0;
    n_res = 0; tol = 127.0 * 0.01 + 2.0 / 256.0;
    for (int i = 0; i < n; i++) begin
      in_valid = 1; in_last = (i == n - 1); in_score = SW'(s[i]);
      foreach (in_v[j]) in_v[j] = 8'($urandom);
      p = 2.0 ** (-(real'(mx - s[i]) * real'(sc) / 256.0));
      den += p;
      foreach (num[j]) num[j] += p * real'(in_v[j]);
      #1; while (!in_ready) begin @(negedge clk); #1; end
      @(negedge clk);
    end
    in_valid = 0; in_last = 0;
    t_last = cyc;
    foreach (ref_out[j]) ref_out[j] = num[j] / den;
    while (!done) @(negedge clk);
    @(negedge clk);
    checks++;
    if (cyc - t_last > 48 + DIM + 9) begin failures++; $display("output took %0d cycles", cyc - t_last); end
    checks++;
    if (n_res != DIM) begin failures++; $display("%0d outputs", n_res); end
  endtask

  initial begin
    start = 0; in_valid = 0; in_last = 0; qk_max = 0; in_score = 0; scale = 0;
    foreach (in_v[j]) in_v[j] = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    run_head(10, 2000, 40);
    run_head(300, 20000, 5);
    run_head(1, 100, 256);
    run_head(1000, 400, 300);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
