// tb_focus_unit_video: the Focus unit at its default size on video- and image-shaped
// workloads.
//
// Frame grid and pruning follow a typical video VLM layer: 14x14 visual tokens per
// frame (196 tokens) and 4 frames (M = 784 image tokens), 2 heads x 4 text tokens, and
// the first pruning layer keeping 40 % of the image tokens (k = 313).
//  1. Attention layer: head 0 streamed spatially, head 1 temporally; the kept positions
//     and offsets are compared with a reference ranking, and the selection plus scan
//     must finish within ceil(k/32) passes of M + 66 cycles plus the M-cycle scan.
//  2. One FC output tile of the 313 kept tokens, K split into two 32-column blocks.
//     Video redundancy is modelled by letting about half of the kept tokens reuse the
//     input vector of a kept 2x2x2 block neighbour, so their outputs are identical.
//     A 14x14 frame needs ceil(14/2)^2 = 49 slots per bank, more than the 32 the
//     layouter holds, so the layouter runs as a sliding window: the reference here
//     models the same window (a neighbour counts only if no later token has taken its
//     bank slot) as well as the cosine > 0.9 rule, and every similarity-map entry and
//     every distinct vector is compared with it.
// The same flow then runs on an image-shaped workload: one 27x27 frame (729 tokens,
// 291 kept), treated as a one-frame video, with 14*14 = 196 slots needed per bank.
// Counted and required per run: matches inside a frame, matches across frames (video
// only; none may occur with one frame), new vectors, neighbours of the previous frame
// lost to the window (video only: within one frame a neighbour is at most one row back,
// well inside the window), and gather back-pressure. The SIC part must finish within ceil(n/2) + 8n + 16 cycles
// after the last K block starts.
module tb_focus_unit_video;
  import focus_pkg::*;
  localparam int A = VEC_LEN, MC = M_MAX, MT = M_TILE, EW = ELEM_W, PSW = PSUM_W;
  localparam int WORDS = MC / A, GW = $clog2(WORDS), IW = $clog2(MC), XW = $clog2(MT);
  localparam int TILES = (MC + MT - 1) / MT, TW = $clog2(TILES);
  localparam int H = 2, T = 4, KSUB = 2;
  int W, HH, F, M, KEEP, HW2;   // workload shape, set per run
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic sc_clear, sc_ready, sc_valid, sc_temporal, sc_last, sel_start, sec_busy, sec_done;
  logic [GW-1:0] sc_group;
  logic [A-1:0][EW-1:0] sc_scores;
  logic [IW:0] cfg_m_len, cfg_k;
  logic keep_valid;
  logic [IW-1:0] keep_pos;
  logic [15:0] keep_off;
  logic map_wr_en, ps_valid, sub_go, sub_first, sub_last, cfg_use_offsets, sic_busy;
  logic [XW-1:0] map_wr_row, map_wr_idx, ps_idx, map_row, map_idx, cv_idx;
  logic [A-1:0][PSW-1:0] ps_vec;
  logic [XW:0] cfg_tile_len;
  logic [TW-1:0] cfg_tile;
  logic [4:0] cfg_shift;
  logic [15:0] cfg_w, cfg_hw;
  logic map_valid, cv_valid;
  logic [A-1:0][EW-1:0] cv_vec;

  focus_unit dut (.*);

  initial begin
    repeat (800000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- mechanism counters ----------------
  int c_match_s, c_match_t, c_new, c_evict, c_stall;
  always @(posedge clk) if (rst_n) begin
    if (dut.so_valid && !dut.so_ready) c_stall++;
  end

  // ---------------- output capture ----------------
  int got_map[$], got_row[$], got_cvi[$];
  logic [A-1:0][EW-1:0] got_cvv[$];
  int got_kpos[$], got_koff[$];
  always @(posedge clk) if (rst_n) begin
    if (map_valid) begin got_map.push_back(int'(map_idx)); got_row.push_back(int'(map_row)); end
    if (cv_valid) begin got_cvi.push_back(int'(cv_idx)); got_cvv.push_back(cv_vec); end
    if (keep_valid) begin got_kpos.push_back(int'(keep_pos)); got_koff.push_back(int'(keep_off)); end
  end

  function automatic longint dotp(logic [A-1:0][EW-1:0] x, logic [A-1:0][EW-1:0] y);
    longint s = 0;
    for (int i = 0; i < A; i++) s += longint'($signed(x[i])) * longint'($signed(y[i]));
    return s;
  endfunction

  // layouter slot of a position: bank * 32 + (offset mod 32)
  function automatic int slot_of(int p);
    int f, r, c;
    f = p / (W*HH); r = (p % (W*HH)) / W; c = p % W;
    return ((f % 2) * 4 + (r % 2) * 2 + (c % 2)) * BANK_DEPTH + ((r / 2) * HW2 + c / 2) % BANK_DEPTH;
  endfunction

  // ---------------- reference gather with the sliding window ----------------
  int exp_map[$], exp_cv[$];
  int rpos [MT];
  logic [A-1:0][EW-1:0] rvec [MT];
  task automatic ref_gather(int n);
    int uniq = 0;
    int idx_of [int];
    int row_of [int];
    int slot_last [int];
    exp_map.delete(); exp_cv.delete();
    for (int t = 0; t < n; t++) begin
      int p, f, r, c, bj, bq;
      longint kk, bd, bn;
      p = rpos[t]; f = p / (W*HH); r = (p % (W*HH)) / W; c = p % W;
      kk = dotp(rvec[t], rvec[t]);
      bj = 0; bd = 0; bn = 1; bq = -1;
      for (int j = 1; j < 8; j++) begin
        int df, dr, dc, q;
        longint d, qq;
        df = (j >> 2) & 1; dr = (j >> 1) & 1; dc = j & 1;
        if (f < df || r < dr || c < dc) continue;
        q = p - df*W*HH - dr*W - dc;
        if (!row_of.exists(q)) continue;
        if (slot_last[slot_of(q)] != q) begin c_evict++; continue; end
        d = dotp(rvec[t], rvec[row_of[q]]); qq = dotp(rvec[row_of[q]], rvec[row_of[q]]);
        if (d > 0 && d*d*100 > 81*kk*qq)
          if (bj == 0 || d*d*bn > bd*bd*qq) begin bj = j; bd = d; bn = qq; bq = q; end
      end
      row_of[p] = t;
      slot_last[slot_of(p)] = p;
      if (bj != 0) begin
        idx_of[p] = idx_of[bq];
        if (bj >= 4) c_match_t++; else c_match_s++;
      end else begin idx_of[p] = uniq++; exp_cv.push_back(t); c_new++; end
      exp_map.push_back(idx_of[p]);
    end
  endtask

  // ---------------- main ----------------
  logic [EW-1:0] att [H][T][MC];
  logic [EW-1:0] imp [MC];
  int kept_list[$];
  int krow [int];          // position -> tile row of kept tokens
  int share [MT];          // row whose input vector this row reuses, or -1
  int acc [MT][A];
  int map [MT], xin [MT][A], wgt [A][A];

  task automatic run_workload(string name, int w, int h, int nf);
    int cyc, n, p_cnt;
    W = w; HH = h; F = nf; M = w*h*nf; KEEP = (M * 40) / 100; HW2 = (w + 1) / 2;
    c_match_s = 0; c_match_t = 0; c_new = 0; c_evict = 0; c_stall = 0;
    kept_list.delete(); krow.delete(); got_kpos.delete(); got_koff.delete();
    sc_clear = 0; sc_valid = 0; sc_temporal = 0; sc_last = 0; sc_group = '0; sc_scores = '0;
    sel_start = 0; cfg_m_len = '0; cfg_k = '0;
    map_wr_en = 0; map_wr_row = '0; map_wr_idx = '0; ps_valid = 0; ps_idx = '0; ps_vec = '0;
    sub_go = 0; sub_first = 0; sub_last = 0; cfg_tile_len = '0; cfg_tile = '0;
    cfg_shift = 5'd2; cfg_use_offsets = 1; cfg_w = 16'(W); cfg_hw = 16'(W*HH);
    for (int j = 0; j < M; j++) imp[j] = '0;
    for (int h = 0; h < H; h++) for (int i = 0; i < T; i++) for (int j = 0; j < M; j++) begin
      att[h][i][j] = EW'($urandom_range(0, 4000));
      if (att[h][i][j] > imp[j]) imp[j] = att[h][i][j];
    end
    @(negedge clk) rst_n = 1;

    // ---- 1. attention layer ----
    @(negedge clk) sc_clear = 1;
    @(negedge clk) sc_clear = 0;
    while (!sc_ready) @(negedge clk);
    for (int i = 0; i < T; i++) for (int g = 0; g < (M + A - 1) / A; g++) begin    // spatial
      sc_valid = 1; sc_temporal = 0; sc_group = GW'(g); sc_last = 0;
      for (int l = 0; l < A; l++) sc_scores[l] = (g*A + l < M) ? att[0][i][g*A+l] : '0;
      @(negedge clk);
    end
    for (int g = 0; g < (M + A - 1) / A; g++) for (int i = 0; i < T; i++) begin    // temporal
      sc_valid = 1; sc_temporal = 1; sc_group = GW'(g); sc_last = (i == T-1);
      for (int l = 0; l < A; l++) sc_scores[l] = (g*A + l < M) ? att[1][i][g*A+l] : '0;
      @(negedge clk);
    end
    sc_valid = 0; sc_last = 0;
    sel_start = 1; cfg_m_len = (IW+1)'(M); cfg_k = (IW+1)'(KEEP);
    @(negedge clk) sel_start = 0;
    cyc = 0;
    while (!sec_done) begin cyc++; @(negedge clk); end
    checks++;
    if (cyc > ((KEEP + A - 1) / A) * (M + 2*A + 2) + M + 8) begin failures++; $display("SEC took %0d cycles", cyc); end
    begin
      int prev;
      prev = -1;
      for (int j = 0; j < M; j++) begin
        int r;
        r = 0;
        for (int i = 0; i < M; i++) if (imp[i] > imp[j] || (imp[i] == imp[j] && i < j)) r++;
        if (r < KEEP) begin
          kept_list.push_back(j);
          checks++;
          if (kept_list.size() > got_kpos.size() || got_kpos[kept_list.size()-1] != j
              || got_koff[kept_list.size()-1] != j - prev) begin
            failures++; $display("kept token %0d wrong", j);
          end
          prev = j;
        end
      end
      checks++;
      if (got_kpos.size() != KEEP) begin failures++; $display("%0d tokens kept", got_kpos.size()); end
    end

    // ---- 2. one FC output tile on the kept tokens ----
    n = KEEP;
    for (int t = 0; t < n; t++) begin rpos[t] = kept_list[t]; krow[kept_list[t]] = t; end
    // redundancy: about half of the rows reuse the input of a kept block neighbour
    for (int t = 0; t < n; t++) begin
      int p, f, r, c, j, q;
      p = rpos[t]; f = p / (W*HH); r = (p % (W*HH)) / W; c = p % W;
      share[t] = -1;
      j = $urandom_range(1, 7);
      if ($urandom_range(0, 1) == 1 && f >= ((j >> 2) & 1) && r >= ((j >> 1) & 1) && c >= (j & 1)) begin
        q = p - ((j >> 2) & 1)*W*HH - ((j >> 1) & 1)*W - (j & 1);
        if (krow.exists(q)) share[t] = krow[q];
      end
    end
    for (int t = 0; t < MT; t++) for (int e = 0; e < A; e++) acc[t][e] = 0;
    for (int s = 0; s < KSUB; s++) begin
      p_cnt = 0;
      for (int t = 0; t < n; t++)
        if (share[t] >= 0) map[t] = map[share[t]];
        else begin map[t] = p_cnt; p_cnt++; end
      for (int v = 0; v < p_cnt; v++) for (int i = 0; i < A; i++) xin[v][i] = $urandom_range(0, 12) - 6;
      for (int i = 0; i < A; i++) for (int o = 0; o < A; o++) wgt[i][o] = $urandom_range(0, 12) - 6;
      for (int t = 0; t < n; t++) @(negedge clk) begin
        map_wr_en = 1; map_wr_row = XW'(t); map_wr_idx = XW'(map[t]);
      end
      @(negedge clk) map_wr_en = 0;
      for (int v = 0; v < p_cnt; v++) begin
        ps_valid = 1; ps_idx = XW'(v);
        for (int o = 0; o < A; o++) begin
          int sum;
          sum = 0;
          for (int i = 0; i < A; i++) sum += xin[v][i] * wgt[i][o];
          ps_vec[o] = PSW'(sum);
        end
        @(negedge clk);
      end
      ps_valid = 0;
      for (int t = 0; t < n; t++) for (int o = 0; o < A; o++)
        for (int i = 0; i < A; i++) acc[t][o] += xin[map[t]][i] * wgt[i][o];
      sub_go = 1; sub_first = (s == 0); sub_last = (s == KSUB - 1);
      cfg_tile_len = (XW+1)'(n); cfg_tile = '0;
      @(negedge clk) sub_go = 0;
      if (s < KSUB - 1) while (sic_busy) @(negedge clk);
    end
    for (int t = 0; t < n; t++) for (int e = 0; e < A; e++) rvec[t][e] = EW'(acc[t][e] >>> 2);
    got_map.delete(); got_row.delete(); got_cvi.delete(); got_cvv.delete();
    ref_gather(n);
    cyc = 1;
    while (sic_busy) begin cyc++; @(negedge clk); end
    checks++;
    if (cyc > (n + 1) / 2 + 8*n + 16) begin failures++; $display("SIC took %0d cycles for %0d rows", cyc, n); end
    repeat (4) @(negedge clk);
    checks++;
    if (got_map.size() != n) begin failures++; $display("%0d map entries, expected %0d", got_map.size(), n); end
    foreach (exp_map[t]) if (t < got_map.size()) begin
      checks++;
      if (got_map[t] != exp_map[t] || got_row[t] != t) begin failures++; $display("row %0d: idx %0d expected %0d", t, got_map[t], exp_map[t]); end
    end
    checks++;
    if (got_cvi.size() != exp_cv.size()) begin failures++; $display("%0d vectors, expected %0d", got_cvi.size(), exp_cv.size()); end
    foreach (exp_cv[i]) if (i < got_cvi.size()) begin
      checks++;
      if (got_cvi[i] != i || got_cvv[i] != rvec[exp_cv[i]]) begin failures++; $display("vector %0d wrong", i); end
    end

    $display("%s: rows %0d distinct %0d: matches in-frame=%0d cross-frame=%0d new=%0d evicted-neighbours=%0d stall=%0d",
             name, n, exp_cv.size(), c_match_s, c_match_t, c_new, c_evict, c_stall);
    checks++; if (c_match_s == 0) begin failures++; $display("no in-frame match"); end
    checks++;
    if ((nf > 1) != (c_match_t > 0)) begin failures++; $display("cross-frame matches: %0d with %0d frames", c_match_t, nf); end
    checks++; if (c_new == 0)     begin failures++; $display("no new vector"); end
    checks++;
    if ((nf > 1) != (c_evict > 0)) begin failures++; $display("%0d neighbours evicted with %0d frames", c_evict, nf); end
    checks++; if (c_stall == 0)   begin failures++; $display("no gather back-pressure"); end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    run_workload("video 4 x 14x14", 14, 14, 4);
    repeat (5) @(negedge clk);
    run_workload("image 27x27", 27, 27, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
