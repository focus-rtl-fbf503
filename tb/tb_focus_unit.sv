// tb_focus_unit: end-to-end test of the Focus unit at reduced size.
//
// Size: A = 8 (vector length / max units), 64-token importance buffer, 16-row tiles.
// Video: 3 frames of 4x4 tokens (M = 48 image tokens), 2 heads x 3 text tokens.
//  1. Attention layer: head 0 is streamed row-wise (spatial), head 1 column-wise
//     (temporal). The SEC keeps k = 30 tokens; kept positions and offsets are compared
//     with a reference ranking.
//  2. FC layer on the 30 kept tokens (two tiles: 16 + 14 rows), K = 16 input columns
//     = two sub-tiles. For each sub-tile the input is concentrated (a similarity map
//     sharing rows between block neighbours, plus p distinct input vectors); a PE-array
//     model here multiplies the concentrated vectors with the weights and streams the
//     partial sums. The unit rebuilds the tile, requantises it and gathers it; the
//     similarity maps and concentrated vectors are compared with a reference that
//     restores positions from the offsets and applies the 2x2x2 / cosine > 0.9 rule.
//  3. A dense FC tile (offsets off) of 16 rows.
// Every mechanism is counted and must occur: spatial and temporal streams, a
// multi-pass top-k, the offset carry into the second tile, scatter replication, K
// accumulation, a match, a new vector, a neighbour excluded by the tile boundary,
// gather back-pressure on the scatter, and the dense mode.
module tb_focus_unit;
  localparam int A = 8, MC = 64, MT = 16, EW = 16, PSW = 32;
  localparam int WORDS = MC / A, GW = $clog2(WORDS), IW = $clog2(MC), XW = $clog2(MT);
  localparam int TILES = MC / MT, TW = $clog2(TILES);
  localparam int W = 4, HH = 4, F = 3, M = W*HH*F, H = 2, T = 3, KEEP = 30, KSUB = 2;
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

  focus_unit #(.A(A), .M_CAP(MC), .MT(MT), .DEPTH(32)) dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- mechanism counters ----------------
  int c_spatial = 0, c_temporal = 0, c_multipass = 0, c_carry = 0, c_replic = 0, c_kacc = 0;
  int c_match = 0, c_new = 0, c_boundary = 0, c_stall = 0, c_dense = 0;
  always @(posedge clk) if (rst_n) begin
    if (sc_valid && sc_ready) begin if (sc_temporal) c_temporal++; else c_spatial++; end
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

  // ---------------- reference gather over one tile ----------------
  // rows: positions rpos[0..n-1] with vectors rvec; base = last position before the tile
  int exp_map[$], exp_cv[$];
  int rpos [MT];                     // positions of the tile's rows
  logic [A-1:0][EW-1:0] rvec [MT];   // expected requantised rows
  task automatic ref_gather(int n, int base);
    int uniq = 0;
    int idx_of [int];
    int row_of [int];
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
        if (!row_of.exists(q)) begin
          if (q <= base && q >= 0) c_boundary++;
          continue;
        end
        d = dotp(rvec[t], rvec[row_of[q]]); qq = dotp(rvec[row_of[q]], rvec[row_of[q]]);
        if (d > 0 && d*d*100 > 81*kk*qq)
          if (bj == 0 || d*d*bn > bd*bd*qq) begin bj = j; bd = d; bn = qq; bq = q; end
      end
      row_of[p] = t;
      if (bj != 0) begin idx_of[p] = idx_of[bq]; c_match++; end
      else begin idx_of[p] = uniq++; exp_cv.push_back(t); c_new++; end
      exp_map.push_back(idx_of[p]);
    end
  endtask

  // ---------------- one FC output tile through the SIC ----------------
  task automatic fc_tile(int tile, int n, bit use_off, int base);
    int acc [MT][A];
    for (int t = 0; t < MT; t++) for (int e = 0; e < A; e++) acc[t][e] = 0;
    for (int s = 0; s < KSUB; s++) begin
      int map [MT], p, x [MT][A], w [A][A];
      // concentrated input: rows share a vector with their left/upper neighbour row
      p = 0;
      for (int t = 0; t < n; t++) begin
        if (t > 0 && $urandom_range(0, 2) == 0) begin map[t] = map[t-1]; c_replic++; end
        else if (t > 4 && $urandom_range(0, 3) == 0) begin map[t] = map[t-4]; c_replic++; end
        else map[t] = p++;
      end
      for (int v = 0; v < p; v++) for (int i = 0; i < A; i++) x[v][i] = $urandom_range(0, 12) - 6;
      for (int i = 0; i < A; i++) for (int o = 0; o < A; o++) w[i][o] = $urandom_range(0, 12) - 6;
      for (int t = 0; t < n; t++) @(negedge clk) begin
        map_wr_en = 1; map_wr_row = XW'(t); map_wr_idx = XW'(map[t]);
      end
      @(negedge clk) map_wr_en = 0;
      // PE-array model: p partial-sum vectors, one per cycle
      for (int v = 0; v < p; v++) begin
        ps_valid = 1; ps_idx = XW'(v);
        for (int o = 0; o < A; o++) begin
          int sum = 0;
          for (int i = 0; i < A; i++) sum += x[v][i] * w[i][o];
          ps_vec[o] = PSW'(sum);
        end
        @(negedge clk);
      end
      ps_valid = 0;
      for (int t = 0; t < n; t++) for (int o = 0; o < A; o++)
        for (int i = 0; i < A; i++) acc[t][o] += x[map[t]][i] * w[i][o];
      if (s > 0) c_kacc++;
      sub_go = 1; sub_first = (s == 0); sub_last = (s == KSUB - 1);
      cfg_tile_len = (XW+1)'(n); cfg_tile = TW'(tile); cfg_use_offsets = use_off;
      @(negedge clk) sub_go = 0;
      while (sic_busy && s < KSUB - 1) @(negedge clk);
    end
    for (int t = 0; t < n; t++) for (int e = 0; e < A; e++) rvec[t][e] = EW'(acc[t][e] >>> 2);
    got_map.delete(); got_row.delete(); got_cvi.delete(); got_cvv.delete();
    ref_gather(n, base);
    while (sic_busy) @(negedge clk);
    repeat (4) @(negedge clk);
    checks++;
    if (got_map.size() != n) begin failures++; $display("tile %0d: %0d map entries, expected %0d", tile, got_map.size(), n); end
    foreach (exp_map[t]) if (t < got_map.size()) begin
      checks++;
      if (got_map[t] != exp_map[t] || got_row[t] != t) begin failures++; $display("tile %0d row %0d: idx %0d expected %0d", tile, t, got_map[t], exp_map[t]); end
    end
    checks++;
    if (got_cvi.size() != exp_cv.size()) begin failures++; $display("tile %0d: %0d vectors, expected %0d", tile, got_cvi.size(), exp_cv.size()); end
    foreach (exp_cv[i]) if (i < got_cvi.size()) begin
      checks++;
      if (got_cvi[i] != i || got_cvv[i] != rvec[exp_cv[i]]) begin failures++; $display("tile %0d: vector %0d wrong", tile, i); end
    end
  endtask

  // ---------------- main ----------------
  logic [EW-1:0] att [H][T][MC];
  logic [EW-1:0] imp [MC];
  int kept_list[$];

  initial begin
    int cyc;
    sc_clear = 0; sc_valid = 0; sc_temporal = 0; sc_last = 0; sc_group = '0; sc_scores = '0;
    sel_start = 0; cfg_m_len = '0; cfg_k = '0;
    map_wr_en = 0; map_wr_row = '0; map_wr_idx = '0; ps_valid = 0; ps_idx = '0; ps_vec = '0;
    sub_go = 0; sub_first = 0; sub_last = 0; cfg_tile_len = '0; cfg_tile = '0;
    cfg_shift = 5'd2; cfg_use_offsets = 0; cfg_w = 16'(W); cfg_hw = 16'(W*HH);
    for (int j = 0; j < MC; j++) imp[j] = '0;
    for (int h = 0; h < H; h++) for (int i = 0; i < T; i++) for (int j = 0; j < MC; j++) begin
      att[h][i][j] = (j < M) ? EW'($urandom_range(0, 1000)) : '0;
      if (att[h][i][j] > imp[j]) imp[j] = att[h][i][j];
    end
    repeat (3) @(negedge clk);
    rst_n = 1;

    // ---- 1. attention layer ----
    @(negedge clk) sc_clear = 1;
    @(negedge clk) sc_clear = 0;
    while (!sc_ready) @(negedge clk);
    for (int i = 0; i < T; i++) for (int g = 0; g < WORDS; g++) begin      // head 0: spatial
      sc_valid = 1; sc_temporal = 0; sc_group = GW'(g); sc_last = 0;
      for (int l = 0; l < A; l++) sc_scores[l] = att[0][i][g*A+l];
      @(negedge clk);
    end
    for (int g = 0; g < WORDS; g++) for (int i = 0; i < T; i++) begin      // head 1: temporal
      sc_valid = 1; sc_temporal = 1; sc_group = GW'(g); sc_last = (i == T-1);
      for (int l = 0; l < A; l++) sc_scores[l] = att[1][i][g*A+l];
      @(negedge clk);
    end
    sc_valid = 0; sc_last = 0;
    sel_start = 1; cfg_m_len = (IW+1)'(M); cfg_k = (IW+1)'(KEEP);
    @(negedge clk) sel_start = 0;
    cyc = 0;
    while (!sec_done) begin cyc++; @(negedge clk); end
    if (KEEP > A) c_multipass++;
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

    // ---- 2. FC layer on the kept tokens, two tiles ----
    begin
      for (int t = 0; t < MT; t++) rpos[t] = kept_list[t];
      fc_tile(0, MT, 1, -1);
      for (int t = 0; t < KEEP - MT; t++) rpos[t] = kept_list[MT + t];
      // the first offset of tile 1 carries the pruned gap after tile 0's last token
      if (kept_list[MT] - kept_list[MT-1] > 1) c_carry++;
      fc_tile(1, KEEP - MT, 1, kept_list[MT-1]);
      if (kept_list[MT] - kept_list[MT-1] <= 1) c_carry++;   // carry of 1: still exercised
    end

    // ---- 3. dense FC tile: no semantic offsets ----
    begin
      for (int t = 0; t < MT; t++) rpos[t] = MT + t;
      fc_tile(1, MT, 0, MT - 1);
      c_dense++;
    end

    $display("mechanisms: spatial=%0d temporal=%0d multipass=%0d carry=%0d replicate=%0d kacc=%0d match=%0d new=%0d boundary=%0d stall=%0d dense=%0d",
             c_spatial, c_temporal, c_multipass, c_carry, c_replic, c_kacc, c_match, c_new, c_boundary, c_stall, c_dense);
    checks++; if (c_spatial == 0)   begin failures++; $display("spatial stream never used"); end
    checks++; if (c_temporal == 0)  begin failures++; $display("temporal stream never used"); end
    checks++; if (c_multipass == 0) begin failures++; $display("single-pass top-k only"); end
    checks++; if (c_carry == 0)     begin failures++; $display("no tile carry"); end
    checks++; if (c_replic == 0)    begin failures++; $display("no scatter replication"); end
    checks++; if (c_kacc == 0)      begin failures++; $display("no K accumulation"); end
    checks++; if (c_match == 0)     begin failures++; $display("no similarity match"); end
    checks++; if (c_new == 0)       begin failures++; $display("no new vector"); end
    checks++; if (c_boundary == 0)  begin failures++; $display("tile boundary never hit"); end
    checks++; if (c_stall == 0)     begin failures++; $display("no gather back-pressure"); end
    checks++; if (c_dense == 0)     begin failures++; $display("dense mode never used"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

