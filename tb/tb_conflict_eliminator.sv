// tb_conflict_eliminator: self-checking test of the PC conflict eliminator.
// An index store is filled with a random selection of token indices; the
// eliminator then drains it. Every issue cycle is checked for conflicts
// (request on lane c must have index LSBs == c, so at most one per PC), each
// selected index must be issued exactly once, req_ready is randomly held
// low (stall) and more than one 128-entry batch must occur whenever more
// than 128 indices were selected. One head is skewed towards PC 0 so the
// per-channel counts are unbalanced.
module tb_conflict_eliminator;
  import salca_pkg::*;
  localparam int P = 16, S = 4, NPC = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic clear, in_valid, in_last, wr_done, pop, rd_empty, rd_valid;
  logic [4:0] in_count;
  logic [IDXW-1:0] in_idx [P];
  logic [IDXW:0] total;
  logic [2:0] rd_cnt;
  logic [IDXW-1:0] rd_idx [S];
  logic start, done, busy, req_ready;
  logic [NPC-1:0] req_valid;
  logic [IDXW-1:0] req_idx [NPC];
  logic [31:0] n_batches, n_issue_cycles;
  int checks = 0, failures = 0, stalls = 0;
  int issued [int];

  index_store #(.CTX(4096)) u_is (.clk, .rst_n, .clear, .in_valid, .in_last, .in_count, .in_idx,
                                  .wr_done, .total, .pop, .rd_empty, .rd_valid, .rd_cnt, .rd_idx);
  conflict_eliminator dut (.clk, .rst_n, .start, .done, .busy, .src_pop(pop), .src_empty(rd_empty),
                           .src_valid(rd_valid), .src_cnt(rd_cnt), .src_idx(rd_idx),
                           .req_valid, .req_idx, .req_ready, .n_batches, .n_issue_cycles);

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(negedge clk) begin
    if (rst_n) req_ready = ($urandom % 5 != 0);
    if (rst_n && req_valid != 0 && !req_ready) stalls++;
  end
  always @(posedge clk) if (rst_n && req_ready) for (int c = 0; c < NPC; c++) if (req_valid[c]) begin
    checks++;
    if (int'(req_idx[c][2:0]) != c) begin failures++; $display("PC conflict lane %0d idx %0d", c, req_idx[c]); end
    if (issued.exists(int'(req_idx[c]))) begin failures++; $display("duplicate %0d", req_idx[c]); end
    issued[int'(req_idx[c])] = 1;
  end

  task automatic run_head(input int beats, input int keep_pct, input int skew);
    int wr [$];
    int c, nb0;
    issued.delete();
    nb0 = int'(n_batches);
    @(negedge clk) clear = 1;
    @(negedge clk) clear = 0;
    for (int b = 0; b < beats; b++) begin
      c = 0;
      for (int i = 0; i < P; i++) begin
        in_idx[i] = 0;
        // skew > 0 favours tokens that map to PC 0 to create imbalance
        if ($urandom % 100 < keep_pct || (skew > 0 && (i % 8) == 0)) begin
          in_idx[c] = IDXW'(b * P + i); wr.push_back(b * P + i); c++;
        end
      end
      in_count = 5'(c); in_valid = 1; in_last = (b == beats - 1);
      @(negedge clk);
    end
    in_valid = 0; in_last = 0;
    while (!wr_done) @(negedge clk);
    start = 1; @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    checks++;
    if (issued.size() != wr.size()) begin failures++; $display("issued %0d of %0d", issued.size(), wr.size()); end
    foreach (wr[i]) if (!issued.exists(wr[i])) begin failures++; $display("missing %0d", wr[i]); break; end
    checks++;
    if (wr.size() > 128 && int'(n_batches) - nb0 < 2) begin failures++; $display("single batch"); end
  endtask

  initial begin
    clear = 0; in_valid = 0; in_last = 0; in_count = 0; start = 0; req_ready = 1;
    foreach (in_idx[i]) in_idx[i] = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    run_head(50, 40, 0);
    run_head(80, 10, 1);
    run_head(5, 100, 0);
    run_head(30, 0, 0);
    checks++;
    if (stalls == 0) begin failures++; $display("no stall"); end
    $display("stalls=%0d batches=%0d issue_cycles=%0d", stalls, n_batches, n_issue_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
