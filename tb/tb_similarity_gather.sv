// tb_similarity_gather: self-checking test of the Similarity Gather (layouter, matcher
// and collection together).
// Three 4x4 frames of 8-element vectors are built so that about half of the kept tokens
// are noisy copies of a block neighbour; a quarter of the tokens are pruned and the rest
// are fed with their semantic offsets, split into two tiles. A reference model here
// rebuilds positions from the offsets, applies the cosine > 0.9 rule (as exact integer
// comparisons) to the 7 block neighbours inside the same tile, picks the best, and
// assigns compact indices. Every similarity-map entry and every concentrated vector is
// compared with it, and each tile must take at most 8 cycles per row plus 4.
module tb_similarity_gather;
  localparam int A = 8, EW = 16, MT = 64, PW = 16, OW = 16, XW = $clog2(MT);
  localparam int W = 4, HH = 4, F = 3, N = W*HH*F;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic tile_start, in_valid, in_ready, map_valid, cv_valid, busy;
  logic signed [PW-1:0] base_pos;
  logic [PW-1:0] cfg_w, cfg_hw;
  logic [A-1:0][EW-1:0] in_vec, cv_vec;
  logic [OW-1:0] in_off;
  logic [XW-1:0] map_row, map_idx, cv_idx;

  similarity_gather #(.A(A), .EW(EW), .MT(MT), .DEPTH(32), .PW(PW), .OW(OW)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bit kept [N];
  logic [A-1:0][EW-1:0] vec [N];
  int ref_idx [N];
  int exp_map[$], exp_cv[$];        // expected map idx per row; expected cv position
  int got_map[$], got_row[$], got_cvi[$];
  logic [A-1:0][EW-1:0] got_cvv[$];
  int n_match = 0, n_new = 0;

  always @(posedge clk) if (rst_n) begin
    if (map_valid) begin got_map.push_back(int'(map_idx)); got_row.push_back(int'(map_row)); end
    if (cv_valid) begin got_cvi.push_back(int'(cv_idx)); got_cvv.push_back(cv_vec); end
  end

  function automatic longint dotp(logic [A-1:0][EW-1:0] x, logic [A-1:0][EW-1:0] y);
    longint s = 0;
    for (int i = 0; i < A; i++) s += longint'($signed(x[i])) * longint'($signed(y[i]));
    return s;
  endfunction

  // reference for one tile of kept positions [lo, hi] (base = last kept before lo)
  task automatic ref_tile(int lo, int hi, int base);
    int uniq = 0;
    exp_map.delete(); exp_cv.delete();
    for (int p = lo; p <= hi; p++) begin
      int f, r, c, bj, bq;
      longint kk, bd, bn;
      if (!kept[p]) continue;
      f = p / 16; r = (p % 16) / 4; c = p % 4;
      kk = dotp(vec[p], vec[p]);
      bj = 0; bd = 0; bn = 1; bq = -1;
      for (int j = 1; j < 8; j++) begin
        int df, dr, dc, q;
        longint d, qq;
        df = (j >> 2) & 1; dr = (j >> 1) & 1; dc = j & 1;
        if (f < df || r < dr || c < dc) continue;
        q = p - df*16 - dr*4 - dc;
        if (!kept[q] || q <= base) continue;
        d = dotp(vec[p], vec[q]); qq = dotp(vec[q], vec[q]);
        if (d > 0 && d*d*100 > 81*kk*qq) begin
          if (bj == 0 || d*d*bn > bd*bd*qq) begin bj = j; bd = d; bn = qq; bq = q; end
        end
      end
      if (bj != 0) begin ref_idx[p] = ref_idx[bq]; n_match++; end
      else begin ref_idx[p] = uniq++; exp_cv.push_back(p); n_new++; end
      exp_map.push_back(ref_idx[p]);
    end
  endtask

  task automatic run_tile(int lo, int hi, int base);
    int prev = base, cyc = 0, rows = 0;
    got_map.delete(); got_row.delete(); got_cvi.delete(); got_cvv.delete();
    ref_tile(lo, hi, base);
    @(negedge clk) tile_start = 1; base_pos = PW'(base);
    @(negedge clk) tile_start = 0;
    for (int p = lo; p <= hi; p++) begin
      if (!kept[p]) continue;
      in_valid = 1; in_vec = vec[p]; in_off = OW'(p - prev); prev = p; rows++;
      #1;
      while (!in_ready) begin @(negedge clk); #1; end
      @(negedge clk); cyc++;
    end
    in_valid = 0;
    repeat (10) @(negedge clk);
    checks++;
    if (got_map.size() != exp_map.size()) begin failures++; $display("map entries %0d expected %0d", got_map.size(), exp_map.size()); end
    foreach (exp_map[i]) if (i < got_map.size()) begin
      checks++;
      if (got_map[i] != exp_map[i] || got_row[i] != i) begin failures++; $display("row %0d: idx %0d expected %0d", i, got_map[i], exp_map[i]); end
    end
    checks++;
    if (got_cvi.size() != exp_cv.size()) begin failures++; $display("cv count %0d expected %0d", got_cvi.size(), exp_cv.size()); end
    foreach (exp_cv[i]) if (i < got_cvi.size()) begin
      checks++;
      if (got_cvi[i] != i || got_cvv[i] != vec[exp_cv[i]]) begin failures++; $display("cv %0d wrong", i); end
    end
  endtask

  initial begin
    int t0, t1, split, base2;
    tile_start = 0; in_valid = 0; in_vec = '0; in_off = '0; base_pos = '0;
    cfg_w = PW'(W); cfg_hw = PW'(W*HH);
    for (int p = 0; p < N; p++) begin
      int f, r, c;
      f = p / 16; r = (p % 16) / 4; c = p % 4;
      kept[p] = ($urandom_range(0, 3) != 0);
      for (int i = 0; i < A; i++) vec[p][i] = EW'($urandom_range(0, 200) - 100);
      if ($urandom_range(0, 1) == 1) begin
        int j, q;
        j = $urandom_range(1, 7);
        if (f >= ((j >> 2) & 1) && r >= ((j >> 1) & 1) && c >= (j & 1)) begin
          q = p - ((j >> 2) & 1)*16 - ((j >> 1) & 1)*4 - (j & 1);
          for (int i = 0; i < A; i++) vec[p][i] = EW'(int'($signed(vec[q][i])) + $urandom_range(0, 6) - 3);
        end
      end
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    // tile 1: positions 0..21, tile 2: 22..47
    split = 21; base2 = -1;
    for (int p = 0; p <= split; p++) if (kept[p]) base2 = p;
    t0 = int'($time);
    run_tile(0, split, -1);
    run_tile(split + 1, N - 1, base2);
    t1 = int'($time);
    // throughput: 8 cycles per row (+ start/flush), measured over both tiles
    begin
      int rows = 0;
      for (int p = 0; p < N; p++) if (kept[p]) rows++;
      checks++;
      if ((t1 - t0) / 10 > 8*rows + 2*(10 + 2 + 4)) begin failures++; $display("too slow: %0d cycles for %0d rows", (t1 - t0) / 10, rows); end
    end
    checks++;
    if (n_match < 5 || n_new < 5) begin failures++; $display("coverage: %0d matches %0d new", n_match, n_new); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
