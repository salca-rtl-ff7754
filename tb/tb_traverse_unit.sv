// tb_traverse_unit: self-checking test of the compare/compact stage.
// Random 16-code beats with a random threshold go in back to back; for each
// beat the unit must return, 12 cycles later, exactly the absolute indices
// whose code is >= the threshold and below n_tokens (as a set, since the
// sorter does not keep the order among kept entries), packed at the front.
module tb_traverse_unit;
  import salca_pkg::*;
  localparam int P = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [7:0] thrd;
  logic [IDXW:0] n_tokens;
  logic in_valid, in_last, out_valid, out_last;
  logic [IDXW-1:0] in_base;
  logic [7:0] in_code [P];
  logic [4:0] out_count;
  logic [IDXW-1:0] out_idx [P];
  int checks = 0, failures = 0, cyc = 0;
  int exp_q [$][$];
  int t_q [$];
  int sent_last = 0, seen_last = 0;

  traverse_unit dut (.*);

  always @(posedge clk) cyc++;
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(negedge clk) if (rst_n && out_valid) begin
    int e [$];
    int g [$];
    int t;
    g.delete();
    e = exp_q.pop_front(); t = t_q.pop_front();
    for (int i = 0; i < int'(out_count); i++) g.push_back(int'(out_idx[i]));
    e.sort(); g.sort();
    checks++;
    if (e != g) begin failures++; $display("beat mismatch: %0d vs %0d kept", g.size(), e.size()); end
    checks++;
    if (cyc - t != 12) begin failures++; $display("latency %0d", cyc - t); end
    if (out_last) seen_last++;
  end

  initial begin
    int e [$];
    in_valid = 0; in_last = 0; in_base = 0; thrd = 0; n_tokens = 0;
    foreach (in_code[i]) in_code[i] = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int h = 0; h < 4; h++) begin
      int beats;
      beats = 20 + $urandom % 20;
      thrd = 8'($urandom % 256);
      n_tokens = (IDXW+1)'(beats * P - $urandom % P);
      for (int b = 0; b < beats; b++) begin
        @(negedge clk);
        in_valid = ($urandom % 4 != 0) || b == beats - 1;
        if (!in_valid) begin b--; continue; end
        in_last = (b == beats - 1);
        in_base = IDXW'(b * P);
        e.delete();
        for (int i = 0; i < P; i++) begin
          in_code[i] = 8'($urandom);
          if (in_code[i] >= thrd && b * P + i < int'(n_tokens)) e.push_back(b * P + i);
        end
        exp_q.push_back(e); t_q.push_back(cyc);
        if (in_last) sent_last++;
      end
      @(negedge clk) in_valid = 0; in_last = 0;
      repeat (15) @(negedge clk);
    end
    checks++;
    if (seen_last != sent_last || exp_q.size() != 0) begin failures++; $display("lost beats"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
