// tb_maxpool_unit: self-checking test of the stride-1 max pooling unit.
// Random heads of several lengths are streamed; every output code is
// compared with a direct max over the 7-wide window (clipped at the head's
// ends) computed here. A bypassed head must come out unchanged. Checks the
// beat latency: the pooled head ends one cycle after its last input beat + 1.
module tb_maxpool_unit;
  localparam int P = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic bypass, in_valid, in_last, in_ready, out_valid, out_last;
  logic [7:0] in_code [P], out_code [P];
  int checks = 0, failures = 0;
  int data [$];
  int got [$];

  maxpool_unit dut (.clk, .rst_n, .bypass, .in_valid, .in_last, .in_ready, .in_code,
                    .out_valid, .out_last, .out_code);

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(posedge clk) if (out_valid) for (int i = 0; i < P; i++) got.push_back(int'(out_code[i]));

  task automatic run_head(input int beats, input bit byp);
    int n, e, tlast, tout;
    data.delete(); got.delete();
    bypass = byp;
    n = beats * P;
    for (int i = 0; i < n; i++) data.push_back(($urandom % 5 == 0) ? $urandom % 256 : $urandom % 40);
    for (int b = 0; b < beats; b++) begin
      @(negedge clk);
      while (!in_ready) @(negedge clk);
      in_valid = 1; in_last = (b == beats - 1);
      for (int i = 0; i < P; i++) in_code[i] = 8'(data[b*P + i]);
    end
    @(negedge clk); in_valid = 0; in_last = 0;
    tlast = $time / 10;
    while (!out_last) @(negedge clk);
    tout = $time / 10;
    @(negedge clk);
    checks++;
    if (got.size() != n) begin failures++; $display("size %0d != %0d", got.size(), n); end
    for (int i = 0; i < n && i < got.size(); i++) begin
      e = data[i];
      if (!byp) for (int d = -3; d <= 3; d++)
        if (i + d >= 0 && i + d < n && data[i+d] > e) e = data[i+d];
      checks++;
      if (got[i] != e) begin
        failures++; if (failures < 10) $display("pos %0d got %0d exp %0d", i, got[i], e);
      end
    end
    checks++;
    if (tout - tlast > 2) begin failures++; $display("latency %0d", tout - tlast); end
  endtask

  initial begin
    in_valid = 0; in_last = 0; bypass = 0; foreach (in_code[i]) in_code[i] = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    run_head(1, 0);
    run_head(2, 0);
    run_head(10, 0);
    run_head(7, 1);
    run_head(33, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
