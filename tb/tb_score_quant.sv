// tb_score_quant: self-checking test of the S_max based INT8 quantizer.
// For random S_max, random scores in [-S_max, S_max] must map to
// 128 + round-down(score * 127 / S_max) (the reciprocal
// and S_max is normalised), clamped to 0..255, within two code steps. Checks the divider setup time (ready
// within 40 cycles of start) and the 1-cycle data latency.
module tb_score_quant;
  import salca_pkg::*;
  localparam int P = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, ready, in_valid, in_last, out_valid, out_last;
  logic [SW-1:0] s_max;
  logic signed [SW-1:0] score [P];
  logic [7:0] code [P];
  int checks = 0, failures = 0;

  score_quant dut (.*);

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic run_head(input int smax, input int beats);
    int n, e, g;
    longint sc;
    @(negedge clk);
    s_max = SW'(smax); start = 1;
    @(negedge clk); start = 0;
    n = 0;
    while (!ready) begin @(negedge clk); n++; end
    checks++;
    if (n > 40) begin failures++; $display("setup %0d cycles", n); end
    for (int b = 0; b < beats; b++) begin
      in_valid = 1; in_last = (b == beats - 1);
      for (int i = 0; i < P; i++) begin
        sc = (smax == 0) ? 0 : longint'($urandom % (2 * smax + 1)) - smax;
        if (i == 0 && b == 0) sc = smax;
        if (i == 1 && b == 0) sc = -smax;
        score[i] = SW'(sc);
      end
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid || out_last != (b == beats - 1)) begin failures++; $display("valid/last timing"); end
      for (int i = 0; i < P; i++) begin
        e = 128 + ((smax == 0) ? 0 : int'((longint'(score[i]) * 127) / smax));
        if (score[i] < 0 && smax != 0 && ((longint'(score[i]) * 127) % smax) != 0) e--;
        if (e < 0) e = 0;
        if (e > 255) e = 255;
        g = int'(code[i]);
        checks++;
        if (g > e + 2 || g < e - 2) begin failures++; $display("score %0d smax %0d code %0d exp %0d", score[i], smax, g, e); end
      end
    end
    in_last = 0;
  endtask

  initial begin
    start = 0; in_valid = 0; in_last = 0; s_max = 0;
    foreach (score[i]) score[i] = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    run_head(1000, 8);
    run_head(123456789, 8);
    run_head(7, 4);
    run_head(0, 2);
    run_head(2000000000, 4);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
