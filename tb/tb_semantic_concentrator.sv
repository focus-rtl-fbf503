// tb_semantic_concentrator: end-to-end test of the Semantic Concentrator.
// Random text-to-image scores of 2 heads x 3 text rows over M = 28 image tokens
// (A = 4 max units) are streamed in; the SEC must keep exactly the k tokens with the
// largest max-over-heads-and-rows score (ties to the lower index), report them in
// position order, and give each the distance to the previously kept token. Repeated
// for several k, with the buffer cleared in between; the whole selection plus scan
// must finish within ceil(k/A)*(M+2A+2) + M + 8 cycles.
module tb_semantic_concentrator;
  localparam int A = 4, MC = 32, M = 28, SW = 16, H = 2, T = 3;
  localparam int WORDS = MC / A, GW = $clog2(WORDS), IW = $clog2(MC);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic sc_clear, sc_ready, sc_valid, sc_temporal, sc_last, sel_start, busy, done;
  logic [GW-1:0] sc_group;
  logic [A-1:0][SW-1:0] sc_scores;
  logic [IW:0] cfg_m_len, cfg_k;
  logic keep_valid;
  logic [IW-1:0] keep_pos;
  logic [15:0] keep_off;

  semantic_concentrator #(.A(A), .SW(SW), .M_CAP(MC), .OW(16)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [SW-1:0] att [H][T][MC];
  logic [SW-1:0] imp [MC];
  int got_pos[$], got_off[$];
  always @(posedge clk) if (rst_n && keep_valid) begin got_pos.push_back(int'(keep_pos)); got_off.push_back(int'(keep_off)); end

  task automatic layer(int kk);
    int cyc = 0, prev = -1, n = 0;
    bit keep [MC];
    for (int j = 0; j < MC; j++) imp[j] = '0;
    for (int h = 0; h < H; h++) for (int i = 0; i < T; i++) for (int j = 0; j < MC; j++) begin
      att[h][i][j] = (j < M) ? SW'($urandom_range(0, 200)) : '0;
      if (att[h][i][j] > imp[j]) imp[j] = att[h][i][j];
    end
    @(negedge clk) sc_clear = 1;
    @(negedge clk) sc_clear = 0;
    while (!sc_ready) @(negedge clk);
    for (int h = 0; h < H; h++) for (int i = 0; i < T; i++) for (int g = 0; g < WORDS; g++) begin
      sc_valid = 1; sc_group = GW'(g);
      for (int l = 0; l < A; l++) sc_scores[l] = att[h][i][g*A+l];
      @(negedge clk);
    end
    sc_valid = 0;
    got_pos.delete(); got_off.delete();
    sel_start = 1; cfg_m_len = (IW+1)'(M); cfg_k = (IW+1)'(kk);
    @(negedge clk) sel_start = 0;
    while (!done) begin cyc++; @(negedge clk); end
    checks++;
    if (cyc > ((kk + A - 1) / A) * (M + 2*A + 2) + M + 8) begin failures++; $display("k=%0d: %0d cycles", kk, cyc); end
    // reference keep set
    for (int j = 0; j < M; j++) begin
      int r = 0;
      for (int i = 0; i < M; i++) if (imp[i] > imp[j] || (imp[i] == imp[j] && i < j)) r++;
      keep[j] = (r < kk);
    end
    for (int j = 0; j < M; j++) if (keep[j]) begin
      checks++;
      if (n >= got_pos.size() || got_pos[n] != j || got_off[n] != j - prev) begin
        failures++;
        $display("k=%0d: kept #%0d expected pos %0d off %0d", kk, n, j, j - prev);
      end
      prev = j; n++;
    end
    checks++;
    if (got_pos.size() != kk) begin failures++; $display("k=%0d: %0d kept", kk, got_pos.size()); end
  endtask

  initial begin
    sc_clear = 0; sc_valid = 0; sc_temporal = 0; sc_last = 0; sc_group = '0; sc_scores = '0;
    sel_start = 0; cfg_m_len = '0; cfg_k = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    layer(11); layer(8); layer(3); layer(28);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
