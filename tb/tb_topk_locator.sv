// tb_topk_locator: self-checking test of the approximate Top-K threshold unit.
// Random code streams (skewed, uniform, constant) are fed 16 codes per beat;
// the expected threshold is the reverse-prefix-sum rule computed here from a
// plain histogram. Also checks that a head of n tokens is counted in n/16
// beat cycles plus at most 256+8 scan cycles.
module tb_topk_locator;
  import salca_pkg::*;
  localparam int P = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  head_tag_t tag;
  logic [16:0] k_target;
  logic in_valid, in_last, in_ready, thrd_valid;
  logic [7:0] in_code [P];
  logic [7:0] thrd;
  logic [31:0] evb, evs;
  int checks = 0, failures = 0;

  topk_locator dut (.clk, .rst_n, .tag, .k_target, .in_valid, .in_last, .in_ready,
                    .in_code, .thrd_valid, .thrd, .ev_bypass(evb), .ev_stale(evs));

  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic run_head(input int beats, input int mode, input int k, input int h);
    int hist [256];
    int acc, exp_t, t0, t1;
    foreach (hist[i]) hist[i] = 0;
    tag = '{layer: 6'd0, head: 6'(h), count: 4'd0};
    k_target = 17'(k);
    wait (in_ready); @(negedge clk);
    t0 = $time / 10;
    for (int b = 0; b < beats; b++) begin
      in_valid = 1; in_last = (b == beats - 1);
      for (int i = 0; i < P; i++) begin
        case (mode)
          0: in_code[i] = 8'($urandom % 256);
          1: in_code[i] = 8'(($urandom % 64) * ($urandom % 4));  // skewed low
          default: in_code[i] = 8'd77;
        endcase
        hist[in_code[i]]++;
      end
      @(negedge clk);
      while (!in_ready) @(negedge clk);
    end
    in_valid = 0; in_last = 0;
    while (!thrd_valid) @(negedge clk);
    t1 = $time / 10;
    acc = 0; exp_t = 0;
    for (int a = 255; a >= 0; a--) begin
      acc += hist[a];
      if (acc >= k) begin exp_t = a; break; end
    end
    checks++;
    if (int'(thrd) != exp_t) begin
      failures++; $display("head %0d: thrd %0d expected %0d", h, thrd, exp_t);
    end
    checks++;
    if (t1 - t0 > beats + 256 + 8) begin
      failures++; $display("head %0d: %0d cycles for %0d beats", h, t1 - t0, beats);
    end
  endtask

  initial begin
    in_valid = 0; in_last = 0; foreach (in_code[i]) in_code[i] = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    run_head(64, 0, 50, 1);
    run_head(64, 1, 100, 2);
    run_head(32, 2, 10, 3);
    run_head(200, 0, 3200, 4);      // k = all tokens
    run_head(200, 1, 9999, 5);      // k above n: threshold 0
    run_head(256, 0, 1, 6);
    checks++;
    if (evb == 0 || evs == 0) begin failures++; $display("bypass/stale never used"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
