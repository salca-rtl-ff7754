// bitonic_sorter: pipelined bitonic sorting network ("improved Bitonic").
//
// Sorts N entries (N a power of two) into ascending order of a KW-bit key.
// Comparators look only at the key; key and payload are swapped together,
// which is how the traverse stage compacts valid positions (key = inverted
// mask) and how the conflict eliminator groups requests by HBM pseudo
// channel (key = 3 LSBs of the index). The network has
// log2(N)*(log2(N)+1)/2 comparator columns with a register after each, so
// the latency is that many cycles at one set of N entries per cycle; a valid
// bit travels alongside. Order among equal keys is not preserved.
// Network and key-only comparison follow the source; the one-register-per-
// column pipelining is this design's choice.
module bitonic_sorter #(
  parameter int unsigned N  = 16,
  parameter int unsigned KW = 1,
  parameter int unsigned PW = 4,
  localparam int unsigned LG = $clog2(N),
  localparam int unsigned NS = LG * (LG + 1) / 2
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  logic [KW-1:0] in_key [N],
  input  logic [PW-1:0] in_pay [N],
  output logic          out_valid,
  output logic [KW-1:0] out_key [N],
  output logic [PW-1:0] out_pay [N]
);
  // (k, j) of comparator column s in the standard bitonic schedule
  function automatic int unsigned col_k(input int unsigned s);
    int unsigned c = 0;
    for (int unsigned k = 2; k <= N; k = k * 2)
      for (int unsigned j = k / 2; j > 0; j = j / 2) begin
        if (c == s) return k;
        c++;
      end
    return N;
  endfunction
  function automatic int unsigned col_j(input int unsigned s);
    int unsigned c = 0;
    for (int unsigned k = 2; k <= N; k = k * 2)
      for (int unsigned j = k / 2; j > 0; j = j / 2) begin
        if (c == s) return j;
        c++;
      end
    return 1;
  endfunction

  logic [KW-1:0] key [NS+1][N];
  logic [PW-1:0] pay [NS+1][N];
  logic [NS:0]   vld;

  assign key[0] = in_key;
  assign pay[0] = in_pay;
  assign vld[0] = in_valid;

  for (genvar s = 0; s < NS; s++) begin : g_col
    localparam int unsigned K = col_k(s);
    localparam int unsigned J = col_j(s);
    logic [KW-1:0] nk [N];
    logic [PW-1:0] np [N];
    // compare-exchange elements i and i^J; direction from bit K of i
    for (genvar i = 0; i < N; i++) begin : g_cmp
      localparam int unsigned L  = i ^ J;
      localparam bit          UP = ((i & K) == 0);
      if (L > i) begin : g_pair
        logic sw;
        assign sw    = UP ? (key[s][i] > key[s][L]) : (key[s][i] < key[s][L]);
        assign nk[i] = sw ? key[s][L] : key[s][i];
        assign nk[L] = sw ? key[s][i] : key[s][L];
        assign np[i] = sw ? pay[s][L] : pay[s][i];
        assign np[L] = sw ? pay[s][i] : pay[s][L];
      end
    end
    always_ff @(posedge clk) begin
      key[s+1] <= nk;
      pay[s+1] <= np;
    end
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) vld[s+1] <= 1'b0;
      else        vld[s+1] <= vld[s];
    end
  end

  assign out_key   = key[NS];
  assign out_pay   = pay[NS];
  assign out_valid = vld[NS];
endmodule
