// tb_bitonic_sorter: self-checking test of the key-only bitonic network.
// Sends a new random set every cycle (N=16, 2-bit keys, payload = original
// position) and checks for each output set that keys ascend, that the
// payloads are a permutation of the inputs and that every payload still
// carries its own key. Checks the fixed latency of 10 clock edges.
module tb_bitonic_sorter;
  localparam int N = 16, KW = 2, PW = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, out_valid;
  logic [KW-1:0] in_key [N], out_key [N];
  logic [PW-1:0] in_pay [N], out_pay [N];
  int checks = 0, failures = 0;
  logic [N*KW-1:0] sent [$];
  int t_in [$];
  int cyc = 0;

  bitonic_sorter #(.N(N), .KW(KW), .PW(PW)) dut (.*);

  always @(posedge clk) cyc++;
  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(negedge clk) if (rst_n && out_valid) begin
    logic [N*KW-1:0] k;
    bit seen [N];
    int t;
    k = sent.pop_front();
    t = t_in.pop_front();
    foreach (seen[i]) seen[i] = 0;
    checks++;
    for (int i = 0; i < N; i++) begin
      if (i > 0 && out_key[i] < out_key[i-1]) begin failures++; $display("order"); end
      if (out_key[i] != k[out_pay[i]*KW +: KW]) begin failures++; $display("key/payload split"); end
      if (seen[out_pay[i]]) begin failures++; $display("duplicate payload"); end
      seen[out_pay[i]] = 1;
    end
    checks++;
    if (cyc - t != 10) begin failures++; $display("latency %0d", cyc - t); end
  end

  initial begin
    logic [N*KW-1:0] kk;
    in_valid = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int r = 0; r < 200; r++) begin
      @(negedge clk);
      in_valid = 1;
      for (int i = 0; i < N; i++) begin
        in_key[i] = KW'($urandom); in_pay[i] = PW'(i); kk[i*KW +: KW] = in_key[i];
      end
      sent.push_back(kk); t_in.push_back(cyc);
    end
    @(negedge clk) in_valid = 0;
    repeat (20) @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
