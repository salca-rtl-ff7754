// tb_salca_top: end-to-end test of the accelerator at its default (full)
// size: D=128, 64 core channels, 16 tokens per cycle, 64K-token buffers,
// 256-bin histogram, 8 K/V pseudo channels, reorder range 128.
//
// A behavioural HBM model answers the four memory ports with random ready
// and random latency: core features in order, K per pseudo channel on the
// four dot-product lanes (a key is 4 beats of 32 bytes), V in order. A
// reference model recomputes every step of a head in integer arithmetic
// (relevance scores, S_max, INT8 codes, max pooling or bypass, the
// histogram threshold, the kept index set, exact q.k) and the softmax/PV
// result in real numbers; the bench checks the threshold, the number and set
// of fetched keys, the K/V addresses (region and channel layout) and all D
// outputs (tolerance 1% of full scale plus 2 LSB).
//
// Each mechanism must happen at least once or the run fails:
//   stall        memory not ready while a request waits (features, K, V)
//   bypass       histogram read-after-write bypass (both delay registers
//                together) and max-pooling bypass mode
//   overflow     a head keeps more than 128 indices so the conflict
//                eliminator needs several batches; a head asks for more keys
//                than it has (threshold saturates at 0)
//   mode switch  HBM region swap between heads, pooling on/off between
//                heads and a new histogram tag (stale entries read as 0)
// The threshold must be found within n/16 + 256 + 10 cycles of the first
// pooled beat (one pass over the codes, then the bin scan).
module tb_salca_top;
  import salca_pkg::*;
  localparam int DIM = 128, R = 64, P = 16, NPC = 8, ND = 4, SEG = 32;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc++;

  // ---------------------------------------------------------------- DUT
  logic                 start, busy, done;
  head_tag_t            tag;
  logic [IDXW:0]        n_tokens;
  logic [16:0]          k_target;
  logic                 pool_bypass, region_swap;
  logic [31:0]          feat_base, kv_base;
  logic signed [QW-1:0] q_core [R];
  logic signed [7:0]    q_full [DIM];
  logic [15:0]          sm_scale;
  logic                 feat_req_valid, feat_req_ready, feat_rsp_valid;
  logic [31:0]          feat_req_addr;
  logic [R*KW-1:0]      feat_rsp_codes [P];
  logic signed [FW-1:0] feat_rsp_scale [P], feat_rsp_zero [P];
  logic [NPC-1:0]       k_req_valid;
  logic                 k_req_ready;
  logic [31:0]          k_req_addr [NPC];
  logic [IDXW-1:0]      k_req_idx [NPC];
  logic [ND-1:0]        k_rsp_valid, k_rsp_ready, k_rsp_last;
  logic [IDXW-1:0]      k_rsp_idx [ND];
  logic signed [7:0]    k_rsp_data [ND][SEG];
  logic                 v_req_valid, v_req_ready, v_rsp_valid, v_rsp_ready;
  logic [31:0]          v_req_addr;
  logic [IDXW-1:0]      v_req_idx;
  logic signed [7:0]    v_rsp_data [DIM];
  logic                 res_valid;
  logic [6:0]           res_dim;
  logic signed [15:0]   res_data;
  logic [7:0]           dbg_thrd;
  logic [IDXW:0]        dbg_n_selected;
  logic [31:0]          dbg_hist_bypass, dbg_hist_stale, dbg_ce_batches, dbg_ce_issue_cycles;

  salca_top dut (.*);

  int checks = 0, failures = 0;
  task automatic fail(input string msg);
    failures++;
    if (failures < 30) $display("FAIL @%0d: %s", cyc, msg);
  endtask

  initial begin
    repeat (3000000) @(posedge clk);
    fail("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- head data
  int n_cur;
  logic [R*KW-1:0]      f_codes [];
  logic signed [FW-1:0] f_scale [], f_zero [];
  logic signed [7:0]    kmem [][DIM];
  logic signed [7:0]    vmem [][DIM];
  logic [31:0]          feat_exp_base, kv_exp_base;

  // ---------------------------------------------------------------- counters
  int st_feat = 0, st_k = 0, st_v = 0;
  int ev_pool_bypass = 0, ev_pool_on = 0, ev_region_swap = 0, ev_multi_batch = 0;
  int ev_k_over_n = 0, ev_new_tag = 0;

  // ---------------------------------------------------------------- HBM: features
  int fq_beat [$];
  int fq_due [$];
  int f_last_due = 0;
  always @(negedge clk) feat_req_ready <= rst_n && ($urandom % 4 != 0);
  always @(posedge clk) if (rst_n) begin
    if (feat_req_valid && !feat_req_ready) st_feat++;
    if (feat_req_valid && feat_req_ready) begin
      int b, d;
      b = int'(feat_req_addr - feat_exp_base);
      checks++;
      if (b < 0 || b >= (n_cur + P - 1) / P) fail($sformatf("feature address %h", feat_req_addr));
      d = cyc + 3 + int'($urandom % 6);
      if (d < f_last_due) d = f_last_due;
      f_last_due = d;
      fq_beat.push_back(b); fq_due.push_back(d);
    end
  end
  always @(negedge clk) begin
    feat_rsp_valid <= 1'b0;
    if (fq_due.size() != 0 && fq_due[0] <= cyc) begin
      int b;
      b = fq_beat.pop_front(); void'(fq_due.pop_front());
      feat_rsp_valid <= 1'b1;
      for (int i = 0; i < P; i++) begin
        int t;
        t = b * P + i;
        feat_rsp_codes[i] <= (t < n_cur) ? f_codes[t] : '0;
        feat_rsp_scale[i] <= (t < n_cur) ? f_scale[t] : '0;
        feat_rsp_zero[i]  <= (t < n_cur) ? f_zero[t]  : '0;
      end
    end
  end

  // ---------------------------------------------------------------- HBM: K
  int kq_idx [ND][$];
  int kq_due [ND][$];
  int kbeat [ND];
  int k_seen [int];
  always @(negedge clk) k_req_ready <= rst_n && ($urandom % 5 != 0);
  always @(posedge clk) if (rst_n) begin
    if (k_req_valid != 0 && !k_req_ready) st_k++;
    if (k_req_ready) for (int c = 0; c < NPC; c++) if (k_req_valid[c]) begin
      int idx;
      idx = int'(k_req_idx[c]);
      checks++;
      if (idx % NPC != c) fail($sformatf("key %0d requested on channel %0d", idx, c));
      if (k_req_addr[c] != kv_exp_base + 32'((idx / NPC) * (DIM / SEG)))
        fail($sformatf("K address %h for key %0d", k_req_addr[c], idx));
      if (k_seen.exists(idx)) fail($sformatf("key %0d requested twice", idx));
      k_seen[idx] = 1;
      kq_idx[c % ND].push_back(idx);
      kq_due[c % ND].push_back(cyc + 2 + int'($urandom % 8));
    end
    for (int l = 0; l < ND; l++) if (k_rsp_valid[l] && k_rsp_ready[l]) begin
      if (kbeat[l] == DIM / SEG - 1) begin
        kbeat[l] = 0; void'(kq_idx[l].pop_front()); void'(kq_due[l].pop_front());
      end else kbeat[l]++;
    end
  end
  always @(negedge clk) begin
    for (int l = 0; l < ND; l++) begin
      if (kq_idx[l].size() != 0 && kq_due[l][0] <= cyc) begin
        k_rsp_valid[l] <= 1'b1;
        k_rsp_last[l]  <= (kbeat[l] == DIM / SEG - 1);
        k_rsp_idx[l]   <= IDXW'(kq_idx[l][0]);
        for (int e = 0; e < SEG; e++) k_rsp_data[l][e] <= kmem[kq_idx[l][0]][kbeat[l] * SEG + e];
      end else begin
        k_rsp_valid[l] <= 1'b0; k_rsp_last[l] <= 1'b0;
      end
    end
  end

  // ---------------------------------------------------------------- HBM: V
  int vq_idx [$];
  int vq_due [$];
  int v_last_due = 0, n_v_req = 0;
  always @(negedge clk) v_req_ready <= rst_n && ($urandom % 4 != 0);
  always @(posedge clk) if (rst_n) begin
    if (v_req_valid && !v_req_ready) st_v++;
    if (v_req_valid && v_req_ready) begin
      int idx, d;
      idx = int'(v_req_idx);
      checks++; n_v_req++;
      if (!k_seen.exists(idx)) fail($sformatf("V of unselected key %0d", idx));
      if (v_req_addr != kv_exp_base + 32'h0400_0000 + 32'((idx / NPC) * (DIM / SEG)))
        fail($sformatf("V address %h for key %0d", v_req_addr, idx));
      d = cyc + 3 + int'($urandom % 10);
      if (d < v_last_due) d = v_last_due;
      v_last_due = d;
      vq_idx.push_back(idx); vq_due.push_back(d);
    end
    if (v_rsp_valid && v_rsp_ready) begin void'(vq_idx.pop_front()); void'(vq_due.pop_front()); end
  end
  always @(negedge clk) begin
    if (vq_idx.size() != 0 && vq_due[0] <= cyc) begin
      v_rsp_valid <= 1'b1;
      for (int j = 0; j < DIM; j++) v_rsp_data[j] <= vmem[vq_idx[0]][j];
    end else v_rsp_valid <= 1'b0;
  end

  // ---------------------------------------------------------------- results
  real got_out [DIM];
  int  got_cnt [DIM];
  always @(posedge clk) if (rst_n && res_valid) begin
    got_out[res_dim] = real'(res_data) / 256.0;
    got_cnt[res_dim]++;
  end

  // threshold latency: first pooled beat to threshold
  int t_first_mp, t_thr;
  bit seen_mp;
  always @(posedge clk) if (rst_n) begin
    if (dut.mp_v && !seen_mp) begin seen_mp = 1; t_first_mp = cyc; end
    if (dut.thr_v && dut.st == dut.T_S2_THR) t_thr = cyc;
  end

  // ---------------------------------------------------------------- reference
  function automatic int quant_code(input int sc, input int unsigned smax);
    int ns;
    longint unsigned den, rc;
    longint pr, v;
    ns = 0;
    for (int b = 16; b < 32; b++) if (smax[b]) ns = b - 15;
    den = (smax == 0) ? 1 : longint'(smax >> ns);
    rc  = (longint'(127) << 20) / den;
    pr  = longint'(sc >>> ns) * longint'(rc);
    v   = (pr >>> 20) + 128;
    if (v < 0) v = 0;
    if (v > 255) v = 255;
    return int'(v);
  endfunction

  task automatic run_head(input int n, input int k, input bit byp, input bit swap,
                          input int layer, input int head, input int count, input int sc);
    int L, qs, ref_thr, nsel, acc, mx, t0;
    int unsigned smax;
    int score [], code [], pooled [];
    int hist [256];
    int qk [int];
    real num [DIM];
    real den, p, tol;
    int b0;

    n_cur = n;
    L = ((n + P - 1) / P) * P;
    f_codes = new[n]; f_scale = new[n]; f_zero = new[n];
    kmem = new[n]; vmem = new[n];
    for (int i = 0; i < n; i++) begin
      for (int w = 0; w < R * KW; w += 32) f_codes[i][w +: 32] = $urandom;
      f_scale[i] = FW'(1 + $urandom % 2047);
      f_zero[i]  = FW'(-int'($urandom % 3000));
      for (int j = 0; j < DIM; j++) begin kmem[i][j] = 8'($urandom); vmem[i][j] = 8'($urandom); end
    end
    foreach (q_core[j]) q_core[j] = QW'($urandom);
    foreach (q_full[j]) q_full[j] = 8'($urandom);

    // --- reference: stages 1 to 3
    qs = 0; foreach (q_core[j]) qs += int'(q_core[j]);
    score = new[L]; code = new[L]; pooled = new[L];
    smax = 0;
    for (int i = 0; i < L; i++) begin
      int d;
      d = 0;
      if (i < n) for (int j = 0; j < R; j++) d += int'(q_core[j]) * int'(f_codes[i][j*KW +: KW]);
      score[i] = (i < n) ? int'(f_scale[i]) * d + int'(f_zero[i]) * qs : 0;
      if ((score[i] < 0 ? -score[i] : score[i]) > int'(smax)) smax = (score[i] < 0 ? -score[i] : score[i]);
    end
    for (int i = 0; i < L; i++) code[i] = quant_code(score[i], smax);
    for (int i = 0; i < L; i++) begin
      pooled[i] = code[i];
      if (!byp) for (int d = -3; d <= 3; d++)
        if (i + d >= 0 && i + d < L && code[i+d] > pooled[i]) pooled[i] = code[i+d];
    end
    foreach (hist[a]) hist[a] = 0;
    for (int i = 0; i < L; i++) hist[pooled[i]]++;
    acc = 0; ref_thr = 0;
    for (int a = 255; a >= 0; a--) begin acc += hist[a]; if (acc >= k) begin ref_thr = a; break; end end
    qk.delete(); mx = -2147483647;
    for (int i = 0; i < n; i++) if (pooled[i] >= ref_thr) begin
      int s;
      s = 0;
      for (int j = 0; j < DIM; j++) s += int'(q_full[j]) * int'(kmem[i][j]);
      qk[i] = s;
      if (s > mx) mx = s;
    end
    nsel = qk.size();
    foreach (num[j]) num[j] = 0.0;
    den = 0.0;
    foreach (qk[i]) begin
      p = 2.0 ** (-(real'(mx - qk[i]) * real'(sc) / 256.0));
      den += p;
      for (int j = 0; j < DIM; j++) num[j] += p * real'(vmem[i][j]);
    end

    // --- run the head
    feat_exp_base = feat_base + (swap ? 32'h8000_0000 : 32'h0);
    kv_exp_base   = kv_base + (swap ? 32'h0 : 32'h8000_0000);
    k_seen.delete(); n_v_req = 0; seen_mp = 0; t_thr = 0;
    foreach (got_cnt[j]) got_cnt[j] = 0;
    b0 = int'(dbg_ce_batches);
    @(negedge clk);
    if (region_swap != swap) ev_region_swap++;
    if (byp) ev_pool_bypass++; else ev_pool_on++;
    if (k > n) ev_k_over_n++;
    if (tag != '{layer: LAYER_W'(layer), head: HEAD_W'(head), count: CNT_W'(count)}) ev_new_tag++;
    n_tokens = (IDXW+1)'(n); k_target = 17'(k); pool_bypass = byp; region_swap = swap;
    tag = '{layer: LAYER_W'(layer), head: HEAD_W'(head), count: CNT_W'(count)};
    sm_scale = 16'(sc);
    start = 1; t0 = cyc;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    @(negedge clk);

    checks++;
    if (int'(dbg_thrd) != ref_thr) fail($sformatf("n=%0d threshold %0d expected %0d", n, dbg_thrd, ref_thr));
    checks++;
    if (int'(dbg_n_selected) != nsel) fail($sformatf("n=%0d selected %0d expected %0d", n, dbg_n_selected, nsel));
    checks++;
    if (k_seen.size() != nsel || n_v_req != nsel) fail($sformatf("fetched K %0d V %0d of %0d", k_seen.size(), n_v_req, nsel));
    foreach (qk[i]) if (!k_seen.exists(i)) begin fail($sformatf("key %0d never fetched", i)); break; end
    checks++;
    if (t_thr - t_first_mp > L / P + 256 + 10) fail($sformatf("threshold took %0d cycles", t_thr - t_first_mp));
    if (nsel > 128 && int'(dbg_ce_batches) - b0 >= 2) ev_multi_batch++;
    tol = 127.0 * 0.01 + 2.0 / 256.0;
    for (int j = 0; j < DIM; j++) begin
      real r;
      r = num[j] / den;
      checks++;
      if (got_cnt[j] != 1) fail($sformatf("output %0d written %0d times", j, got_cnt[j]));
      else if (got_out[j] - r > tol || r - got_out[j] > tol)
        fail($sformatf("n=%0d out[%0d] = %f expected %f", n, j, got_out[j], r));
    end
    $display("head L%0d H%0d C%0d n=%0d k=%0d pool=%0d swap=%0d: thr=%0d kept=%0d batches=%0d cycles=%0d",
             layer, head, count, n, k, !byp, swap, dbg_thrd, dbg_n_selected,
             int'(dbg_ce_batches) - b0, cyc - t0);
  endtask

  initial begin
    start = 0; tag = '0; n_tokens = 0; k_target = 0; pool_bypass = 0; region_swap = 0;
    feat_base = 32'h0010_0000; kv_base = 32'h0200_0000; sm_scale = 0;
    foreach (q_core[j]) q_core[j] = 0;
    foreach (q_full[j]) q_full[j] = 0;
    foreach (kbeat[l]) kbeat[l] = 0;
    feat_rsp_valid = 0; v_rsp_valid = 0; k_rsp_valid = 0; k_rsp_last = 0;
    foreach (feat_rsp_codes[i]) begin feat_rsp_codes[i] = 0; feat_rsp_scale[i] = 0; feat_rsp_zero[i] = 0; end
    foreach (k_rsp_idx[l]) k_rsp_idx[l] = 0;
    foreach (k_rsp_data[l, e]) k_rsp_data[l][e] = 0;
    foreach (v_rsp_data[j]) v_rsp_data[j] = 0;
    repeat (5) @(negedge clk); rst_n = 1;
    repeat (300) @(negedge clk);          // histogram power-up sweep
    //       n     k    byp swap L  H  C  scale
    run_head(600,  60,  0,  0,   0, 0, 0, 2);
    run_head(2500, 400, 0,  0,   0, 1, 0, 1);
    run_head(333,  40,  1,  1,   1, 0, 0, 3);
    run_head(1200, 150, 0,  1,   0, 0, 1, 2);
    run_head(100,  5000, 1, 0,   0, 1, 1, 2);
    run_head(17,   3,   0,  0,   2, 5, 0, 4);

    $display("mechanisms: stall feat=%0d k=%0d v=%0d | hist bypass=%0d pool bypass=%0d | multi-batch=%0d k>n=%0d | region swap=%0d pool on=%0d new tag=%0d stale=%0d",
             st_feat, st_k, st_v, dbg_hist_bypass, ev_pool_bypass, ev_multi_batch, ev_k_over_n,
             ev_region_swap, ev_pool_on, ev_new_tag, dbg_hist_stale);
    checks++; if (st_feat == 0 || st_k == 0 || st_v == 0) fail("stall never happened");
    checks++; if (dbg_hist_bypass == 0) fail("histogram bypass never happened");
    checks++; if (ev_pool_bypass == 0) fail("pooling bypass never used");
    checks++; if (ev_multi_batch == 0) fail("reorder range overflow never happened");
    checks++; if (ev_k_over_n == 0) fail("k > n never happened");
    checks++; if (ev_region_swap == 0 || ev_pool_on == 0) fail("mode switch never happened");
    checks++; if (dbg_hist_stale == 0) fail("stale histogram entry never seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
