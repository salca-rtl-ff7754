// salca_top: sparse attention decoding accelerator, one head at a time.
//
// Five stages turn one query and a long KV cache in HBM into the attention
// output while touching only the most relevant keys:
//   1 relevance estimation  core features (2-bit K, 3-bit q, heavy channels)
//                            streamed from HBM -> P_PRE scores per cycle
//                            -> Score RAM, S_max tracked
//   2 threshold locating     scores -> INT8 codes -> max pooling (or bypass)
//                            -> Quant RAM and the histogram Top-K unit,
//                            which returns the approximate threshold T
//   3 traverse               Quant RAM codes >= T -> compacted indices ->
//                            dense Index RAM
//   4 QK mul                 indices reordered per HBM pseudo channel,
//                            keys fetched, exact INT8 q.k, qk_max -> Qxk RAM
//   5 softmax / PV mul       values fetched for the same indices, safe
//                            softmax weights, P*V, normalised result stream
// Stage buffers between stages are double-buffered RAMs. A small sequencer
// runs the stages of one head in order (each stage needs the previous
// stage's whole result: S_max, T, the index set, qk_max); successive heads
// are not overlapped in this implementation.
//
// HBM is outside: feature reads (one beat = P_PRE keys, in-order responses),
// per-channel K requests (8 PCs, chosen by index[2:0]) with responses on
// N_DPU beat lanes of SEG INT8 elements, V requests with whole-vector
// in-order responses, and the result stream written back.
// Head configuration (tag, lengths, query, scale) must be held from start
// until done. Parameters default to the main configuration: D=128, 64 core
// channels, P_PRE=16, 64K tokens, histogram of 256, 8 K/V channels, reorder
// range 128.
module salca_top
  import salca_pkg::*;
#(
  parameter int unsigned DIM    = D,
  parameter int unsigned R      = R_CORE,
  parameter int unsigned P      = P_PRE,
  parameter int unsigned CTX    = MAX_CTX,
  parameter int unsigned RANGE  = REORDER,
  parameter int unsigned NPC    = N_KV_PC,
  parameter int unsigned SEG    = 32,
  parameter int unsigned N_DPU  = 4,
  parameter int unsigned POOL_R = 7,
  parameter int unsigned S_ST   = 4,
  localparam int unsigned LP    = $clog2(P),
  localparam int unsigned LS    = $clog2(S_ST),
  localparam int unsigned SWD   = CTX / P,
  localparam int unsigned SAW   = $clog2(SWD),
  localparam int unsigned QAW   = $clog2(CTX),
  localparam int unsigned BEATS = DIM / SEG
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // head configuration and control
  input  logic                 start,
  input  head_tag_t            tag,
  input  logic [IDXW:0]        n_tokens,
  input  logic [16:0]          k_target,
  input  logic                 pool_bypass,
  input  logic                 region_swap,
  input  logic [31:0]          feat_base,
  input  logic [31:0]          kv_base,
  input  logic signed [QW-1:0] q_core [R],
  input  logic signed [7:0]    q_full [DIM],
  input  logic [15:0]          sm_scale,
  output logic                 busy,
  output logic                 done,
  // HBM: core-feature reads
  output logic                 feat_req_valid,
  input  logic                 feat_req_ready,
  output logic [31:0]          feat_req_addr,
  input  logic                 feat_rsp_valid,
  input  logic [R*KW-1:0]      feat_rsp_codes [P],
  input  logic signed [FW-1:0] feat_rsp_scale [P],
  input  logic signed [FW-1:0] feat_rsp_zero  [P],
  // HBM: K reads, one request slot per pseudo channel
  output logic [NPC-1:0]       k_req_valid,
  input  logic                 k_req_ready,
  output logic [31:0]          k_req_addr [NPC],
  output logic [IDXW-1:0]      k_req_idx  [NPC],
  input  logic [N_DPU-1:0]     k_rsp_valid,
  output logic [N_DPU-1:0]     k_rsp_ready,
  input  logic [N_DPU-1:0]     k_rsp_last,
  input  logic [IDXW-1:0]      k_rsp_idx  [N_DPU],
  input  logic signed [7:0]    k_rsp_data [N_DPU][SEG],
  // HBM: V reads
  output logic                 v_req_valid,
  input  logic                 v_req_ready,
  output logic [31:0]          v_req_addr,
  output logic [IDXW-1:0]      v_req_idx,
  input  logic                 v_rsp_valid,
  output logic                 v_rsp_ready,
  input  logic signed [7:0]    v_rsp_data [DIM],
  // result write-back
  output logic                 res_valid,
  output logic [$clog2(DIM)-1:0] res_dim,
  output logic signed [15:0]   res_data,
  // observability
  output logic [7:0]           dbg_thrd,
  output logic [IDXW:0]        dbg_n_selected,
  output logic [31:0]          dbg_hist_bypass,
  output logic [31:0]          dbg_hist_stale,
  output logic [31:0]          dbg_ce_batches,
  output logic [31:0]          dbg_ce_issue_cycles
);
  typedef enum logic [3:0] {
    T_IDLE, T_S1, T_S2_WAIT, T_S2, T_S2_THR, T_S3, T_S3_WAIT, T_S4, T_S5
  } tstate_t;
  tstate_t st;

  logic            ff_done_seen, sq_busy_started, qk_v_any, v_hold;
  logic [IDXW-1:0] v_idx_q;

  // ============================================================ stage 1
  logic                 rel_v, rel_last, ff_done;
  logic signed [SW-1:0] rel_score [P];
  logic [SW-1:0]        s_max;
  logic [SAW:0]         s1_wa;
  logic [P*SW-1:0]      s1_wd;
  logic                 sram_wfree, sram_ravail;
  logic                 s1_start, ff_req_last;

  assign s1_start = (st == T_IDLE) && start;

  feature_fetcher #(.P(P)) u_fetch (
    .clk, .rst_n, .start(s1_start), .n_tokens, .head_base(feat_base), .region_swap,
    .req_valid(feat_req_valid), .req_ready(feat_req_ready), .req_addr(feat_req_addr),
    .req_last(ff_req_last), .done(ff_done));

  relevance_unit #(.P(P), .R(R)) u_rel (
    .clk, .rst_n, .start(s1_start), .q(q_core),
    .in_valid(feat_rsp_valid && st == T_S1), .in_last(1'b0),
    .k_codes(feat_rsp_codes), .k_scale(feat_rsp_scale), .k_zero(feat_rsp_zero),
    .out_valid(rel_v), .out_last(rel_last), .score(rel_score), .s_max);

  always_comb for (int i = 0; i < P; i++) s1_wd[i*SW +: SW] = rel_score[i];

  logic [IDXW:0] n_beats;
  assign n_beats = (n_tokens + (IDXW+1)'(P - 1)) / (IDXW+1)'(P);

  // Score RAM read side (stage 2)
  logic            s2_rd_en;
  logic [SAW:0]    s2_ra;
  logic [P*SW-1:0] s2_rd;
  logic            s1_commit, s2_release;

  pingpong_ram #(.WIDTH(P * SW), .DEPTH(SWD)) u_score_ram (
    .clk, .rst_n,
    .wr_en(rel_v), .wr_addr(s1_wa[SAW-1:0]), .wr_data(s1_wd),
    .wr_commit(s1_commit), .wr_free(sram_wfree),
    .rd_en(s2_rd_en), .rd_addr(s2_ra[SAW-1:0]), .rd_data(s2_rd),
    .rd_release(s2_release), .rd_avail(sram_ravail));

  // ============================================================ stage 2
  logic                 sq_ready, sq_v, sq_last;
  logic [7:0]           sq_code [P];
  logic signed [SW-1:0] s2_scores [P];
  logic                 s2_rv, s2_rlast;
  logic                 mp_ready, mp_v, mp_last;
  logic [7:0]           mp_code [P];
  logic                 tk_ready, thr_v;
  logic [7:0]           thr;
  logic [SAW:0]         s2_wa;
  logic [P*8-1:0]       s2_wd;
  logic                 qram_wfree, qram_ravail, s2_commit, s3_release;
  logic                 s2_qstart;

  always_comb for (int i = 0; i < P; i++) s2_scores[i] = s2_rd[i*SW +: SW];

  score_quant #(.P(P)) u_quant (
    .clk, .rst_n, .start(s2_qstart), .s_max, .ready(sq_ready),
    .in_valid(s2_rv), .in_last(s2_rlast), .score(s2_scores),
    .out_valid(sq_v), .out_last(sq_last), .code(sq_code));

  maxpool_unit #(.P(P), .R(POOL_R)) u_pool (
    .clk, .rst_n, .bypass(pool_bypass),
    .in_valid(sq_v), .in_last(sq_last), .in_ready(mp_ready), .in_code(sq_code),
    .out_valid(mp_v), .out_last(mp_last), .out_code(mp_code));

  topk_locator #(.P(P)) u_topk (
    .clk, .rst_n, .tag, .k_target,
    .in_valid(mp_v), .in_last(mp_last), .in_ready(tk_ready), .in_code(mp_code),
    .thrd_valid(thr_v), .thrd(thr),
    .ev_bypass(dbg_hist_bypass), .ev_stale(dbg_hist_stale));

  always_comb for (int i = 0; i < P; i++) s2_wd[i*8 +: 8] = mp_code[i];

  logic            s3_rd_en;
  logic [SAW:0]    s3_ra;
  logic [P*8-1:0]  s3_rd;

  pingpong_ram #(.WIDTH(P * 8), .DEPTH(SWD)) u_quant_ram (
    .clk, .rst_n,
    .wr_en(mp_v), .wr_addr(s2_wa[SAW-1:0]), .wr_data(s2_wd),
    .wr_commit(s2_commit), .wr_free(qram_wfree),
    .rd_en(s3_rd_en), .rd_addr(s3_ra[SAW-1:0]), .rd_data(s3_rd),
    .rd_release(s3_release), .rd_avail(qram_ravail));

  // ============================================================ stage 3
  logic [7:0]      s3_codes [P];
  logic            s3_rv, s3_rlast;
  logic [SAW:0]    s3_rbase;
  logic            tr_v, tr_last;
  logic [LP:0]     tr_cnt;
  logic [IDXW-1:0] tr_idx [P];
  logic            is_clear, is_done;
  logic [IDXW:0]   is_total;
  logic            is_pop, is_empty, is_v;
  logic [LS:0]     is_cnt;
  logic [IDXW-1:0] is_idx [S_ST];

  always_comb for (int i = 0; i < P; i++) s3_codes[i] = s3_rd[i*8 +: 8];

  traverse_unit #(.P(P)) u_trav (
    .clk, .rst_n, .thrd(dbg_thrd), .n_tokens,
    .in_valid(s3_rv), .in_last(s3_rlast), .in_base(IDXW'(s3_rbase) << LP),
    .in_code(s3_codes),
    .out_valid(tr_v), .out_last(tr_last), .out_count(tr_cnt), .out_idx(tr_idx));

  index_store #(.P(P), .S(S_ST), .CTX(CTX)) u_idx (
    .clk, .rst_n, .clear(is_clear),
    .in_valid(tr_v), .in_last(tr_last), .in_count(tr_cnt), .in_idx(tr_idx),
    .wr_done(is_done), .total(is_total),
    .pop(is_pop), .rd_empty(is_empty), .rd_valid(is_v), .rd_cnt(is_cnt), .rd_idx(is_idx));

  // ============================================================ stage 4
  logic                 ce_start, ce_done, ce_busy;
  logic [NPC-1:0]       ce_req_v;
  logic [IDXW-1:0]      ce_req_idx [NPC];
  logic                 qk_v, qk_start, qkm_v;
  logic [IDXW-1:0]      qk_idx;
  logic signed [SW-1:0] qk_score, qk_max;
  logic [IDXW:0]        n_issued, n_scored;
  logic                 ce_finished;
  logic                 xram_wfree, xram_ravail, s4_commit, s5_release;

  conflict_eliminator #(.RANGE(RANGE), .NPC(NPC), .S(S_ST)) u_ce (
    .clk, .rst_n, .start(ce_start), .done(ce_done), .busy(ce_busy),
    .src_pop(is_pop), .src_empty(is_empty), .src_valid(is_v), .src_cnt(is_cnt),
    .src_idx(is_idx),
    .req_valid(ce_req_v), .req_idx(ce_req_idx), .req_ready(k_req_ready),
    .n_batches(dbg_ce_batches), .n_issue_cycles(dbg_ce_issue_cycles));

  // K/V layout: token i lives in PC i[2:0], row i>>3, BEATS beats per vector;
  // K/V use stack 1 region 1 normally and stack 0 region 1 after a swap.
  function automatic logic [31:0] kv_addr(input logic [IDXW-1:0] idx, input logic v);
    logic [31:0] row;
    row = 32'(idx >> $clog2(NPC));
    return kv_base + (region_swap ? 32'h0 : 32'h8000_0000) + (v ? 32'h0400_0000 : 32'h0)
           + row * 32'(BEATS);
  endfunction

  always_comb begin
    for (int c = 0; c < NPC; c++) begin
      k_req_valid[c] = ce_req_v[c];
      k_req_idx[c]   = ce_req_idx[c];
      k_req_addr[c]  = kv_addr(ce_req_idx[c], 1'b0);
    end
  end

  qk_unit #(.DIM(DIM), .SEG(SEG), .N_DPU(N_DPU)) u_qk (
    .clk, .rst_n, .start(qk_start), .q(q_full),
    .in_valid(k_rsp_valid & {N_DPU{st == T_S4}}), .in_ready(k_rsp_ready), .in_last(k_rsp_last),
    .in_idx(k_rsp_idx), .in_data(k_rsp_data),
    .out_valid(qk_v), .out_idx(qk_idx), .out_score(qk_score),
    .qk_max, .qk_max_valid(qkm_v));

  logic [IDXW+SW-1:0] x_rd;
  logic               s5_rd_en;
  logic [QAW:0]       s5_ra;

  pingpong_ram #(.WIDTH(IDXW + SW), .DEPTH(CTX)) u_qxk_ram (
    .clk, .rst_n,
    .wr_en(qk_v), .wr_addr(n_scored[QAW-1:0]), .wr_data({qk_idx, qk_score}),
    .wr_commit(s4_commit), .wr_free(xram_wfree),
    .rd_en(s5_rd_en), .rd_addr(s5_ra[QAW-1:0]), .rd_data(x_rd),
    .rd_release(s5_release), .rd_avail(xram_ravail));

  // ============================================================ stage 5
  logic                 sm_start, sm_ready, sm_done;
  logic                 rd_pend;
  logic                 sf_push, sf_pop, sf_empty, sf_full;
  logic [SW-1:0]        sf_dout;
  logic [5:0]           sf_count;
  logic [IDXW:0]        n_vreq, n_vrsp;
  logic signed [SW-1:0] qk_max_h;

  sync_fifo #(.WIDTH(SW), .DEPTH(32)) u_score_fifo (
    .clk, .rst_n, .push(sf_push), .wr_data(x_rd[SW-1:0]), .pop(sf_pop),
    .rd_data(sf_dout), .empty(sf_empty), .full(sf_full), .count(sf_count));

  softmax_pv_unit #(.DIM(DIM)) u_sm (
    .clk, .rst_n, .start(sm_start), .qk_max(qk_max_h), .scale(sm_scale),
    .in_valid(v_rsp_valid && !sf_empty && st == T_S5), .in_ready(sm_ready),
    .in_last(n_vrsp + 1'b1 == n_scored),
    .in_score(sf_dout), .in_v(v_rsp_data),
    .res_valid, .res_dim, .res_data, .done(sm_done));

  assign v_rsp_ready = sm_ready && !sf_empty && (st == T_S5);
  assign sf_pop      = v_rsp_valid && v_rsp_ready;

  // V request issue: read Qxk RAM entry, next cycle request its index
  assign s5_rd_en    = (st == T_S5) && (s5_ra < (QAW+1)'(n_scored)) && !v_hold &&
                       (sf_count < 6'd28) && !rd_pend;
  assign v_req_valid = v_hold;
  assign v_req_idx   = v_idx_q;
  assign v_req_addr  = kv_addr(v_idx_q, 1'b1);
  assign sf_push     = rd_pend;

  // ============================================================ sequencer
  assign busy      = (st != T_IDLE);
  assign s1_commit = (st == T_S1) && ff_done_seen && (s1_wa == n_beats[SAW:0]);

  assign s2_qstart  = (st == T_S2_WAIT) && sram_ravail && tk_ready && !sq_busy_started;
  assign s2_rd_en   = (st == T_S2) && (s2_ra < n_beats[SAW:0]);
  assign s2_release = (st == T_S2_THR) && thr_v;
  assign s2_commit  = mp_v && mp_last;
  assign s3_rd_en   = (st == T_S3) && (s3_ra < n_beats[SAW:0]);
  assign s3_release = (st == T_S3_WAIT) && is_done;
  assign is_clear   = (st == T_S2_THR) && thr_v;
  assign ce_start   = (st == T_S3_WAIT) && is_done;
  assign qk_start   = ce_start;
  assign s4_commit  = (st == T_S4) && ce_finished && (n_scored == n_issued) && !qk_v_any;
  assign sm_start   = s4_commit;
  assign s5_release = (st == T_S5) && sm_done;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= T_IDLE; done <= 1'b0; s1_wa <= '0; s2_ra <= '0; s2_wa <= '0;
      s3_ra <= '0; s3_rbase <= '0; s2_rv <= 1'b0; s2_rlast <= 1'b0;
      s3_rv <= 1'b0; s3_rlast <= 1'b0; dbg_thrd <= '0; dbg_n_selected <= '0;
      ff_done_seen <= 1'b0; sq_busy_started <= 1'b0;
      n_issued <= '0; n_scored <= '0; ce_finished <= 1'b0; qk_v_any <= 1'b0;
      s5_ra <= '0; rd_pend <= 1'b0; v_hold <= 1'b0; v_idx_q <= '0;
      n_vreq <= '0; n_vrsp <= '0; qk_max_h <= '0;
    end else begin
      done     <= 1'b0;
      qk_v_any <= |k_rsp_valid || qk_v;
      s2_rv    <= s2_rd_en;
      s2_rlast <= s2_rd_en && (s2_ra + 1'b1 == n_beats[SAW:0]);
      s3_rv    <= s3_rd_en;
      s3_rlast <= s3_rd_en && (s3_ra + 1'b1 == n_beats[SAW:0]);
      if (s3_rd_en) s3_rbase <= s3_ra;
      if (rel_v) s1_wa <= s1_wa + 1'b1;
      if (mp_v)  s2_wa <= s2_wa + 1'b1;
      if (s2_rd_en) s2_ra <= s2_ra + 1'b1;
      if (s3_rd_en) s3_ra <= s3_ra + 1'b1;
      if (k_req_ready)
        n_issued <= n_issued + (IDXW+1)'($countones(ce_req_v));
      if (qk_v) n_scored <= n_scored + 1'b1;
      if (ce_done) ce_finished <= 1'b1;
      // stage 5 request side
      rd_pend <= s5_rd_en;
      if (s5_rd_en) s5_ra <= s5_ra + 1'b1;
      if (rd_pend) begin v_hold <= 1'b1; v_idx_q <= x_rd[IDXW+SW-1:SW]; end
      else if (v_hold && v_req_ready) v_hold <= 1'b0;
      if (v_hold && v_req_ready) n_vreq <= n_vreq + 1'b1;
      if (sf_pop) n_vrsp <= n_vrsp + 1'b1;

      unique case (st)
        T_IDLE: if (start) begin
          st <= T_S1; s1_wa <= '0; ff_done_seen <= 1'b0;
        end
        T_S1: begin
          if (ff_done) ff_done_seen <= 1'b1;
          if (s1_commit) begin st <= T_S2_WAIT; sq_busy_started <= 1'b0; end
        end
        T_S2_WAIT: begin
          if (s2_qstart) sq_busy_started <= 1'b1;
          if (sq_busy_started && sq_ready) begin
            st <= T_S2; s2_ra <= '0; s2_wa <= '0;
          end
        end
        T_S2: if (s2_commit) st <= T_S2_THR;
        T_S2_THR: if (thr_v) begin
          dbg_thrd <= thr; st <= T_S3; s3_ra <= '0;
        end
        T_S3: if (s3_ra == n_beats[SAW:0]) st <= T_S3_WAIT;
        T_S3_WAIT: if (is_done) begin
          st <= T_S4; dbg_n_selected <= is_total;
          n_issued <= '0; n_scored <= '0; ce_finished <= 1'b0;
        end
        T_S4: if (s4_commit) begin
          st <= T_S5; qk_max_h <= qk_max; s5_ra <= '0; n_vreq <= '0; n_vrsp <= '0;
        end
        T_S5: if (sm_done) begin st <= T_IDLE; done <= 1'b1; end
        default: st <= T_IDLE;
      endcase
    end
  end

  logic unused;
  assign unused = ^{rel_last, sram_wfree, qram_wfree, qram_ravail, xram_wfree, xram_ravail,
                    qkm_v, mp_ready, ce_busy, sf_full, n_vreq, sq_last,
                    ff_req_last, n_beats} ;
endmodule
