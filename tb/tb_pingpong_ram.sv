// tb_pingpong_ram: self-checking test of the double-buffered stage RAM.
// A producer writes random heads and commits them; a consumer with random
// pacing reads them back and releases. Checks data integrity, head order,
// that the producer is held off (wr_free low) while both banks are full and
// that both banks get used (reads overlap the next write).
module tb_pingpong_ram;
  localparam int W = 32, DEPTH = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic wr_en, wr_commit, wr_free, rd_en, rd_release, rd_avail;
  logic [5:0] wr_addr, rd_addr;
  logic [W-1:0] wr_data, rd_data;
  int checks = 0, failures = 0, blocked = 0, overlap = 0;
  logic [W-1:0] heads [$];

  pingpong_ram #(.WIDTH(W), .DEPTH(DEPTH)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin : producer
    logic [W-1:0] h [DEPTH];
    wr_en = 0; wr_commit = 0; wr_addr = 0; wr_data = 0;
    wait (rst_n);
    for (int n = 0; n < 12; n++) begin
      @(negedge clk);
      while (!wr_free) begin blocked++; @(negedge clk); end
      for (int a = 0; a < DEPTH; a++) begin
        h[a] = $urandom; wr_en = 1; wr_addr = 6'(a); wr_data = h[a];
        if (rd_avail) overlap++;
        @(negedge clk);
      end
      wr_en = 0; wr_commit = 1;
      foreach (h[a]) heads.push_back(h[a]);
      @(negedge clk); wr_commit = 0;
    end
  end

  initial begin : consumer
    logic [W-1:0] h [DEPTH];
    rd_en = 0; rd_release = 0; rd_addr = 0;
    wait (rst_n);
    for (int n = 0; n < 12; n++) begin
      @(negedge clk);
      while (!rd_avail) @(negedge clk);
      repeat ($urandom % 200) @(negedge clk);
      foreach (h[a]) h[a] = heads.pop_front();
      for (int a = 0; a < DEPTH; a++) begin
        rd_en = 1; rd_addr = 6'(a);
        @(negedge clk); rd_en = 0;
        checks++;
        if (rd_data != h[a]) begin failures++; $display("head %0d addr %0d", n, a); end
      end
      rd_release = 1; @(negedge clk); rd_release = 0;
    end
    checks++;
    if (blocked == 0 || overlap == 0) begin failures++; $display("blocked=%0d overlap=%0d", blocked, overlap); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin repeat (3) @(negedge clk); rst_n = 1; end
endmodule
