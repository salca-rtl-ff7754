// index_store: Index RAM with dense store of a variable-length index stream.
//
// The traverse stage delivers t kept indices per cycle (0 <= t <= P). To
// store them without gaps the RAM is split into B banks, each written with
// S indices per clock (B*S = P). A beat is cut into floor(t/S) full chunks
// and t%S leftover fragments. Full chunks go straight to banks: chunk j is
// routed to bank (rot + j) mod B and rot advances by the number of chunks,
// so the banks fill evenly ("LB" balancing) and no bank is written twice in
// a cycle. Fragments collect in a fragment register; whenever it holds S of
// them, one word is written to a separate Frag RAM. After the last beat the
// few fragments still in the register stay there as a tail.
//
// Reading is a pop interface for the next stage: each pop returns, one cycle
// later, one word (up to S indices, rd_cnt of them valid, rd_valid high) by
// walking bank 0..B-1, then the Frag RAM, then the tail; a pop that lands on
// an exhausted region returns nothing and moves on. rd_empty goes high when
// all indices of the head have been handed out. `clear` starts a new head.
// Chunk/fragment split, B*S = P and the Frag RAM follow the source; bank
// rotation, read order and the S=4, B=4 split are this design's choices.
module index_store
  import salca_pkg::*;
#(
  parameter int unsigned P  = P_PRE,
  parameter int unsigned S  = 4,
  parameter int unsigned B  = P / S,
  parameter int unsigned CTX = MAX_CTX,
  localparam int unsigned BD = CTX / (S * B),
  localparam int unsigned FD = CTX * (S - 1) / (P * S) + 1,
  localparam int unsigned BAW = $clog2(BD + 1),
  localparam int unsigned FAW = $clog2(FD + 1),
  localparam int unsigned LP = $clog2(P),
  localparam int unsigned LS = $clog2(S)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            clear,
  // write side
  input  logic            in_valid,
  input  logic            in_last,
  input  logic [LP:0]     in_count,
  input  logic [IDXW-1:0] in_idx [P],
  output logic            wr_done,
  output logic [IDXW:0]   total,
  // read side
  input  logic            pop,
  output logic            rd_empty,
  output logic            rd_valid,
  output logic [LS:0]     rd_cnt,
  output logic [IDXW-1:0] rd_idx [S]
);
  localparam int unsigned LB = (B > 1) ? $clog2(B) : 1;

  logic [BAW-1:0]  bptr [B];
  logic [FAW-1:0]  fptr;
  logic [LB-1:0]   rot;
  logic [IDXW-1:0] frag [S];
  logic [LS:0]     fcnt;

  logic [B-1:0]            bwe;
  logic [S*IDXW-1:0]       bwd [B];
  logic                    fwe;
  logic [S*IDXW-1:0]       fwd;
  logic [S*IDXW-1:0]       brd [B];
  logic [S*IDXW-1:0]       frd;

  typedef enum logic [1:0] {R_BANK, R_FRAG, R_TAIL, R_END} rphase_t;
  rphase_t          phase;
  logic [LB-1:0]    rd_bank;
  logic [BAW+FAW:0] rd_word;
  logic [1:0]       src_q;           // 0 none, 1 bank, 2 frag, 3 tail
  logic [LB-1:0]    bank_q;

  // ---------------------------------------------------------------- write
  logic [LP:0]     nfull, rem;
  logic [IDXW-1:0] comb [2*S];
  logic [LS+1:0]   ccnt;
  always_comb begin
    int unsigned bk;
    bk    = 0;
    nfull = in_count / (LP+1)'(S);
    rem   = in_count % (LP+1)'(S);
    bwe   = '0;
    for (int b = 0; b < B; b++) bwd[b] = '0;
    for (int j = 0; j < B; j++) begin
      if (in_valid && (LP+1)'(j) < nfull) begin
        bk = (int'(rot) + j) % B;
        bwe[bk] = 1'b1;
        for (int e = 0; e < S; e++) bwd[bk][e*IDXW +: IDXW] = in_idx[j*S + e];
      end
    end
    // fragment register plus this beat's leftovers
    for (int e = 0; e < 2*S; e++) comb[e] = '0;
    for (int e = 0; e < S; e++) if ((LS+1)'(e) < fcnt) comb[e] = frag[e];
    for (int e = 0; e < S - 1; e++)
      if ((LP+1)'(e) < rem) comb[int'(fcnt) + e] = in_idx[int'(nfull) * S + e];
    ccnt = (LS+2)'(fcnt) + (LS+2)'(in_valid ? rem : '0);
    fwe  = in_valid && (ccnt >= (LS+2)'(S));
    for (int e = 0; e < S; e++) fwd[e*IDXW +: IDXW] = comb[e];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int b = 0; b < B; b++) bptr[b] <= '0;
      fptr <= '0; rot <= '0; fcnt <= '0; wr_done <= 1'b0; total <= '0;
    end else if (clear) begin
      for (int b = 0; b < B; b++) bptr[b] <= '0;
      fptr <= '0; rot <= '0; fcnt <= '0; wr_done <= 1'b0; total <= '0;
    end else if (in_valid) begin
      for (int b = 0; b < B; b++) if (bwe[b]) bptr[b] <= bptr[b] + 1'b1;
      rot   <= LB'((int'(rot) + int'(nfull)) % B);
      total <= total + (IDXW+1)'(in_count);
      if (fwe) begin
        fptr <= fptr + 1'b1;
        fcnt <= (LS+1)'(ccnt - (LS+2)'(S));
        for (int e = 0; e < S; e++) frag[e] <= comb[e + S];
      end else begin
        fcnt <= (LS+1)'(ccnt);
        for (int e = 0; e < S; e++) frag[e] <= comb[e];
      end
      if (in_last) wr_done <= 1'b1;
    end
  end

  for (genvar b = 0; b < B; b++) begin : g_bank
    sdp_ram #(.WIDTH(S * IDXW), .DEPTH(BD)) u_bank (
      .clk, .wr_en(bwe[b]), .wr_addr(bptr[b][$clog2(BD)-1:0]), .wr_data(bwd[b]),
      .rd_en(pop), .rd_addr(rd_word[$clog2(BD)-1:0]), .rd_data(brd[b]));
  end
  sdp_ram #(.WIDTH(S * IDXW), .DEPTH(FD)) u_frag (
    .clk, .wr_en(fwe), .wr_addr(fptr[$clog2(FD)-1:0]), .wr_data(fwd),
    .rd_en(pop), .rd_addr(rd_word[$clog2(FD)-1:0]), .rd_data(frd));

  // ----------------------------------------------------------------- read

  assign rd_empty = (phase == R_END);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase <= R_BANK; rd_bank <= '0; rd_word <= '0; src_q <= 2'd0; bank_q <= '0;
    end else if (clear) begin
      phase <= R_BANK; rd_bank <= '0; rd_word <= '0; src_q <= 2'd0;
    end else begin
      src_q <= 2'd0;
      if (pop) begin
        unique case (phase)
          R_BANK: if (rd_word < (BAW+FAW+1)'(bptr[rd_bank])) begin
                    src_q <= 2'd1; bank_q <= rd_bank; rd_word <= rd_word + 1'b1;
                  end else begin
                    rd_word <= '0;
                    if (rd_bank == LB'(B - 1)) phase <= R_FRAG;
                    else rd_bank <= rd_bank + 1'b1;
                  end
          R_FRAG: if (rd_word < (BAW+FAW+1)'(fptr)) begin
                    src_q <= 2'd2; rd_word <= rd_word + 1'b1;
                  end else phase <= R_TAIL;
          R_TAIL: begin src_q <= 2'd3; phase <= R_END; end
          R_END:  ;
        endcase
      end
    end
  end

  always_comb begin
    rd_valid = 1'b0; rd_cnt = '0;
    for (int e = 0; e < S; e++) rd_idx[e] = '0;
    unique case (src_q)
      2'd1: begin
        rd_valid = 1'b1; rd_cnt = (LS+1)'(S);
        for (int e = 0; e < S; e++) rd_idx[e] = brd[bank_q][e*IDXW +: IDXW];
      end
      2'd2: begin
        rd_valid = 1'b1; rd_cnt = (LS+1)'(S);
        for (int e = 0; e < S; e++) rd_idx[e] = frd[e*IDXW +: IDXW];
      end
      2'd3: begin
        rd_valid = (fcnt != 0); rd_cnt = fcnt;
        for (int e = 0; e < S; e++) rd_idx[e] = frag[e];
      end
      default: ;
    endcase
  end
endmodule
