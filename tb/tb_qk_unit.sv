// tb_qk_unit: self-checking test of the segmented INT8 q.k lanes.
// Four lanes receive random keys as 4 beats of 32 bytes with random gaps;
// every (index, score) that comes out is compared with the exact dot product
// computed here, each key must come out once, and qk_max must equal the
// largest score of the head. Throughput: with all lanes streaming and no
// gaps, the 4 lanes must finish one key per cycle (checked on a burst).
module tb_qk_unit;
  import salca_pkg::*;
  localparam int DIM = 128, SEG = 32, ND = 4, BEATS = DIM / SEG;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, out_valid, qk_max_valid;
  logic signed [7:0] q [DIM];
  logic [ND-1:0] in_valid, in_ready, in_last;
  logic [IDXW-1:0] in_idx [ND], out_idx;
  logic signed [7:0] in_data [ND][SEG];
  logic signed [SW-1:0] out_score, qk_max;
  int checks = 0, failures = 0, n_out = 0;
  int expect_sc [int];
  int head_max;
  logic signed [7:0] kmem [4096][DIM];

  qk_unit dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(negedge clk) if (rst_n && out_valid) begin
    checks++; n_out++;
    if (!expect_sc.exists(int'(out_idx))) begin failures++; $display("unexpected idx %0d", out_idx); end
    else begin
      if (expect_sc[int'(out_idx)] != int'(out_score)) begin
        failures++; $display("idx %0d score %0d exp %0d", out_idx, out_score, expect_sc[int'(out_idx)]);
      end
      expect_sc.delete(int'(out_idx));
    end
  end

  // lane l sends keys base+l, base+l+4, ...
  task automatic lane_send(input int l, input int base, input int nkeys, input bit gaps);
    for (int k = 0; k < nkeys; k++) begin
      int idx;
      idx = base + l + 4 * k;
      for (int b = 0; b < BEATS; b++) begin
        if (gaps) while ($urandom % 3 == 0) @(negedge clk);
        in_valid[l] = 1; in_last[l] = (b == BEATS - 1); in_idx[l] = IDXW'(idx);
        for (int e = 0; e < SEG; e++) in_data[l][e] = kmem[idx][b * SEG + e];
        #1;
        while (!in_ready[l]) begin @(negedge clk); #1; end
        @(negedge clk);
        in_valid[l] = 0; in_last[l] = 0;
      end
    end
  endtask

  task automatic run_head(input int nkeys, input bit gaps);
    int t0, t1;
    @(negedge clk);
    start = 1;
    foreach (q[j]) q[j] = 8'($urandom);
    @(negedge clk); start = 0;
    head_max = -2147483647; n_out = 0;
    for (int i = 0; i < 4 * nkeys; i++) begin
      int s;
      s = 0;
      for (int j = 0; j < DIM; j++) begin kmem[i][j] = 8'($urandom); s += int'(q[j]) * int'(kmem[i][j]); end
      expect_sc[i] = s;
      if (s > head_max) head_max = s;
    end
    t0 = $time;
    fork
      lane_send(0, 0, nkeys, gaps);
      lane_send(1, 0, nkeys, gaps);
      lane_send(2, 0, nkeys, gaps);
      lane_send(3, 0, nkeys, gaps);
    join
    t1 = $time;
    repeat (6) @(negedge clk);
    checks++;
    if (expect_sc.size() != 0) begin failures++; $display("%0d keys missing", expect_sc.size()); end
    checks++;
    if (!qk_max_valid || int'(qk_max) != head_max) begin failures++; $display("qk_max %0d exp %0d", qk_max, head_max); end
    if (!gaps) begin
      checks++;
      // 4*nkeys keys over 4 lanes of 4 beats: nkeys*4 cycles (+ small slack)
      if ((t1 - t0) / 10 > nkeys * BEATS + 2) begin failures++; $display("throughput %0d cycles", (t1 - t0) / 10); end
    end
  endtask

  initial begin
    start = 0; in_valid = 0; in_last = 0;
    foreach (in_idx[l]) in_idx[l] = 0;
    foreach (in_data[l, e]) in_data[l][e] = 0;
    foreach (q[j]) q[j] = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    run_head(50, 0);
    run_head(30, 1);
    run_head(200, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
