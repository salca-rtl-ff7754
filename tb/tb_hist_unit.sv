// tb_hist_unit: self-checking test of one histogram lane.
// Streams codes from a narrow address range (so that back-to-back and
// one-apart repeats exercise both RAW bypass registers), scans all bins and
// compares with counts kept by the testbench. A second head with a new tag
// checks that the first head's counts read as zero (tag isolation).
module tb_hist_unit;
  import salca_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  head_tag_t  tag;
  logic       in_valid, scan_en;
  logic [7:0] in_addr, scan_addr;
  logic [15:0] scan_count;
  logic busy, b1, b2, stl;
  int checks = 0, failures = 0, nb1 = 0, nb2 = 0, nst = 0;
  int ref_cnt [256];

  hist_unit dut (.clk, .rst_n, .tag, .in_valid, .in_addr, .scan_en, .scan_addr,
                 .scan_count, .busy, .ev_bypass1(b1), .ev_bypass2(b2), .ev_stale(stl));

  always @(posedge clk) begin nb1 += int'(b1); nb2 += int'(b2); nst += int'(stl); end

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic run_head(input int n, input int lo, input int span, input int gap_pct);
    foreach (ref_cnt[i]) ref_cnt[i] = 0;
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      if (($urandom % 100) < gap_pct) begin in_valid = 0; i--; continue; end
      in_valid = 1; in_addr = 8'(lo + ($urandom % span));
      ref_cnt[in_addr]++;
    end
    @(negedge clk) in_valid = 0;
    repeat (4) @(negedge clk);
    for (int a = 0; a < 256; a++) begin
      scan_en = 1; scan_addr = 8'(a);
      @(negedge clk);
      scan_en = 0;
      checks++;
      if (scan_count != 16'(ref_cnt[a])) begin
        failures++;
        if (failures < 10) $display("bin %0d: got %0d exp %0d", a, scan_count, ref_cnt[a]);
      end
    end
  endtask

  initial begin
    in_valid = 0; scan_en = 0; in_addr = 0; scan_addr = 0;
    tag = '{layer: 6'd1, head: 6'd2, count: 4'd0};
    repeat (3) @(negedge clk); rst_n = 1;
    wait (!busy); @(negedge clk);
    run_head(3000, 10, 3, 10);      // heavy repeats, some gaps
    tag = '{layer: 6'd1, head: 6'd3, count: 4'd0};
    run_head(3000, 100, 40, 30);    // different bins, old bins must read 0
    tag = '{layer: 6'd1, head: 6'd2, count: 4'd1};  // same head, next decode step
    run_head(500, 0, 256, 0);
    checks++;
    if (nb1 == 0 || nb2 == 0 || nst == 0) begin
      failures++; $display("mechanism not exercised: bypass1=%0d bypass2=%0d stale=%0d", nb1, nb2, nst);
    end
    $display("bypass1=%0d bypass2=%0d stale=%0d", nb1, nb2, nst);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
