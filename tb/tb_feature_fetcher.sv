// tb_feature_fetcher: self-checking test of the core-feature address
// generator. For random head lengths, bases and both region settings it
// checks that exactly ceil(n/16) consecutive beat addresses leave in order
// from the right stack, that req_last/done mark the final one, and that a
// random req_ready stall holds the address (one request per ready cycle).
module tb_feature_fetcher;
  import salca_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, region_swap, req_valid, req_ready, req_last, done;
  logic [IDXW:0] n_tokens;
  logic [31:0] head_base, req_addr;
  int checks = 0, failures = 0, stalls = 0;

  feature_fetcher dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic run_head(input int n, input bit sw);
    int beats, got, cyc;
    logic [31:0] base;
    beats = (n + 15) / 16;
    @(negedge clk);
    n_tokens = (IDXW+1)'(n); head_base = {12'd0, 20'($urandom)}; region_swap = sw; start = 1;
    base = head_base + (sw ? 32'h8000_0000 : 32'h0);
    @(negedge clk); start = 0;
    got = 0; cyc = 0;
    while (got < beats && cyc < 10 * beats + 10) begin
      req_ready = ($urandom % 3 != 0);
      #1;
      if (req_valid && !req_ready) stalls++;
      if (req_valid && req_ready) begin
        checks++;
        if (req_addr != base + 32'(got)) begin failures++; $display("addr %h exp %h", req_addr, base + 32'(got)); end
        if (req_last != (got == beats - 1)) begin failures++; $display("last flag at %0d", got); end
        got++;
      end
      @(negedge clk); cyc++;
    end
    req_ready = 0;
    repeat (3) begin
      checks++;
      if (req_valid) begin failures++; $display("extra request"); end
      @(negedge clk);
    end
    checks++;
    if (got != beats) begin failures++; $display("beats %0d exp %0d", got, beats); end
  endtask

  initial begin
    start = 0; region_swap = 0; req_ready = 0; n_tokens = 0; head_base = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    run_head(100, 0);
    run_head(16, 1);
    run_head(1, 0);
    run_head(4097, 1);
    checks++;
    if (stalls == 0) begin failures++; $display("no stall"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
