// conflict_eliminator: range-extension reordering of K/V fetch requests so
// that no two requests in one cycle target the same HBM pseudo channel.
//
// K/V vectors are mapped to PCs by the 3 LSBs of the token index. Issuing
// indices in the order they were generated would make several requests hit
// one PC in the same cycle. Instead the unit gathers up to RANGE indices
// (128 by default) from the Index RAM, sorts them by PC ID in a bitonic
// network so requests to the same PC sit next to each other, and records
// for every channel c its start position pos[c] and request count; the
// largest count is max_count. Then each channel walks its own pointer
// ptr[c] from pos[c] while pos[c] <= ptr[c] < pos[c+1], issuing one request
// per cycle; after max_count cycles every request of the batch has been
// issued with no conflicts. A batch costs about RANGE/S collect cycles, the
// sort latency (28 cycles for 128) and max_count issue cycles; batches are
// not overlapped in this implementation.
//
// Interface: `start` begins a head; the unit pops words of up to S indices
// from the index store (one-cycle read latency) until src_empty, and pulses
// done after the last batch. req_valid[c]/req_idx[c] give the request for
// channel c; req_ready low stalls the whole issue cycle.
// Sorting by 3 LSBs, pos/ptr/max_count scheduling and the range of 128
// follow the source; batch timing and handshakes are this design's.
module conflict_eliminator
  import salca_pkg::*;
#(
  parameter int unsigned RANGE = REORDER,
  parameter int unsigned NPC   = N_KV_PC,
  parameter int unsigned S     = 4,
  localparam int unsigned LR   = $clog2(RANGE),
  localparam int unsigned LC   = $clog2(NPC),
  localparam int unsigned LS   = $clog2(S)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  output logic            done,
  output logic            busy,
  // index source (index_store read port)
  output logic            src_pop,
  input  logic            src_empty,
  input  logic            src_valid,
  input  logic [LS:0]     src_cnt,
  input  logic [IDXW-1:0] src_idx [S],
  // per-channel requests
  output logic [NPC-1:0]  req_valid,
  output logic [IDXW-1:0] req_idx [NPC],
  input  logic            req_ready,
  // statistics
  output logic [31:0]     n_batches,
  output logic [31:0]     n_issue_cycles
);
  typedef enum logic [2:0] {C_IDLE, C_COLLECT, C_SORT, C_WAIT, C_SCHED} cstate_t;
  cstate_t state;

  logic [IDXW-1:0] buf_idx [RANGE];
  logic [LR:0]     count;
  logic            pend;
  logic            fire_pop;

  logic [LC:0]     skey_in  [RANGE];
  logic [LC:0]     skey_out [RANGE];
  logic [IDXW-1:0] sidx     [RANGE];
  logic            sort_go, sort_done;
  logic [IDXW-1:0] sorted   [RANGE];

  logic [LR:0]     cnt [NPC];
  logic [LR:0]     pos [NPC+1];
  logic [LR:0]     ptr [NPC];
  logic [LR:0]     max_count, issued;

  assign busy     = (state != C_IDLE);
  assign fire_pop = (state == C_COLLECT) && !src_empty &&
                    (count + (pend ? (LR+1)'(2*S) : (LR+1)'(S)) <= (LR+1)'(RANGE));
  assign src_pop  = fire_pop;

  always_comb begin
    for (int i = 0; i < RANGE; i++)
      skey_in[i] = ((LR+1)'(i) < count) ? {1'b0, buf_idx[i][LC-1:0]} : {1'b1, LC'(0)};
  end

  bitonic_sorter #(.N(RANGE), .KW(LC + 1), .PW(IDXW)) u_sort (
    .clk, .rst_n, .in_valid(sort_go), .in_key(skey_in), .in_pay(buf_idx),
    .out_valid(sort_done), .out_key(skey_out), .out_pay(sidx));

  always_comb begin
    for (int c = 0; c < NPC; c++) begin
      req_valid[c] = (state == C_SCHED) && (ptr[c] < pos[c+1]);
      req_idx[c]   = sorted[ptr[c][LR-1:0]];
    end
  end

  assign sort_go = (state == C_SORT);

  // per-channel request counts, updated with the (up to S) arriving indices
  logic [LR:0] cnt_n [NPC];
  always_comb begin
    for (int c = 0; c < NPC; c++) begin
      cnt_n[c] = cnt[c];
      for (int e = 0; e < S; e++)
        if ((LS+1)'(e) < src_cnt && src_idx[e][LC-1:0] == LC'(c)) cnt_n[c] = cnt_n[c] + 1'b1;
    end
  end

  // collect buffer: entry i takes arriving word element i - count
  always_ff @(posedge clk) begin
    if (src_valid)
      for (int i = 0; i < RANGE; i++)
        for (int e = 0; e < S; e++)
          if ((LS+1)'(e) < src_cnt && (LR+1)'(i) == count + (LR+1)'(e)) buf_idx[i] <= src_idx[e];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= C_IDLE; count <= '0; pend <= 1'b0; done <= 1'b0;
      max_count <= '0; issued <= '0; n_batches <= '0; n_issue_cycles <= '0;
      for (int c = 0; c < NPC; c++) begin cnt[c] <= '0; ptr[c] <= '0; end
      for (int c = 0; c <= NPC; c++) pos[c] <= '0;
    end else begin
      done <= 1'b0;
      pend <= fire_pop;
      if (src_valid) begin
        count <= count + (LR+1)'(src_cnt);
        cnt   <= cnt_n;
      end
      unique case (state)
        C_IDLE: if (start) begin
          state <= C_COLLECT; count <= '0;
          for (int c = 0; c < NPC; c++) cnt[c] <= '0;
        end
        C_COLLECT: begin
          // batch full, or source drained with nothing in flight
          if (!pend && !fire_pop && !src_valid) begin
            if (count + (LR+1)'(S) > (LR+1)'(RANGE) || (src_empty && count != 0))
              state <= C_SORT;
            else if (src_empty) begin state <= C_IDLE; done <= 1'b1; end
          end
        end
        C_SORT: begin
          logic [LR:0] mx, acc;
          mx = '0; acc = '0;
          for (int c = 0; c < NPC; c++) begin
            pos[c] <= acc; ptr[c] <= acc;
            acc = acc + cnt[c];
            if (cnt[c] > mx) mx = cnt[c];
          end
          pos[NPC] <= acc; max_count <= mx; issued <= '0;
          state <= C_WAIT;
        end
        C_WAIT: if (sort_done) begin
          sorted <= sidx; state <= C_SCHED; n_batches <= n_batches + 1'b1;
        end
        C_SCHED: if (req_ready) begin
          for (int c = 0; c < NPC; c++) if (ptr[c] < pos[c+1]) ptr[c] <= ptr[c] + 1'b1;
          issued <= issued + 1'b1;
          n_issue_cycles <= n_issue_cycles + 1'b1;
          if (issued + 1'b1 == max_count) begin
            state <= C_COLLECT; count <= '0;
            for (int c = 0; c < NPC; c++) cnt[c] <= '0;
          end
        end
        default: state <= C_IDLE;
      endcase
    end
  end

`ifndef SYNTHESIS
  // every issue cycle targets each PC at most once by construction; check
  // that each issued index really belongs to the channel it is issued on
  for (genvar c = 0; c < NPC; c++) begin : g_chk
    a_pc_match: assert property (@(posedge clk) disable iff (!rst_n)
      req_valid[c] |-> req_idx[c][LC-1:0] == LC'(c))
      else $error("conflict_eliminator: index on wrong channel");
  end
`endif

  logic unused;
  always_comb begin
    unused = 1'b0;
    for (int i = 0; i < RANGE; i++) unused ^= ^skey_out[i];
    for (int c = 0; c < NPC; c++) unused ^= ^cnt[c];
  end
endmodule
