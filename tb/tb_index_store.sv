// tb_index_store: self-checking test of the banked dense Index RAM.
// Writes several heads of random-length beats (0..16 kept indices each),
// then pops everything back and checks that exactly the written indices come
// out (as a set), that the total is right, that fragments and the tail were
// used and that a head with no indices reads back empty.
module tb_index_store;
  import salca_pkg::*;
  localparam int P = 16, S = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic clear, in_valid, in_last, wr_done, pop, rd_empty, rd_valid;
  logic [4:0] in_count;
  logic [IDXW-1:0] in_idx [P];
  logic [IDXW:0] total;
  logic [2:0] rd_cnt;
  logic [IDXW-1:0] rd_idx [S];
  int checks = 0, failures = 0, n_frag_words = 0;

  index_store #(.CTX(4096)) dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic run_head(input int beats, input int keep_pct);
    int wr [$];
    int rd [$];
    int next = 0, c;
    @(negedge clk) clear = 1;
    @(negedge clk) clear = 0;
    for (int b = 0; b < beats; b++) begin
      c = 0;
      for (int i = 0; i < P; i++) begin
        in_idx[i] = 0;
        if ($urandom % 100 < keep_pct) begin in_idx[c] = IDXW'(b * P + i); wr.push_back(b * P + i); c++; end
      end
      in_count = 5'(c); in_valid = 1; in_last = (b == beats - 1);
      if (c % S != 0) n_frag_words++;
      @(negedge clk);
    end
    in_valid = 0; in_last = 0;
    while (!wr_done) @(negedge clk);
    checks++;
    if (int'(total) != wr.size()) begin failures++; $display("total %0d vs %0d", total, wr.size()); end
    while (!rd_empty) begin
      pop = 1; @(negedge clk); pop = 0;
      if (rd_valid) for (int i = 0; i < int'(rd_cnt); i++) rd.push_back(int'(rd_idx[i]));
    end
    wr.sort(); rd.sort();
    checks++;
    if (wr != rd) begin failures++; $display("readback mismatch %0d vs %0d", rd.size(), wr.size()); end
  endtask

  initial begin
    clear = 0; in_valid = 0; in_last = 0; pop = 0; in_count = 0;
    foreach (in_idx[i]) in_idx[i] = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    run_head(40, 30);
    run_head(100, 90);
    run_head(17, 0);
    run_head(60, 50);
    run_head(1, 100);
    checks++;
    if (n_frag_words == 0) begin failures++; $display("no fragments"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
