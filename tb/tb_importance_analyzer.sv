// tb_importance_analyzer: self-checking test of the streaming importance analyzer.
// A reduced buffer (A=4 lanes, 24 tokens) is filled from random softmax scores of
// 3 heads x 5 text rows, first as a spatial (row-wise) stream, then, after a clear, as
// a temporal (column-wise) stream. Every token's importance read back through the read
// port is compared with the maximum computed here. Also checks that clear holds
// in_ready low for exactly one cycle per buffer word.
module tb_importance_analyzer;
  localparam int A = 4, M = 24, SW = 16, WORDS = M / A, H = 3, T = 5;
  localparam int GW = $clog2(WORDS), IW = $clog2(M);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic clear, in_valid, mode_temporal, in_last, in_ready;
  logic [GW-1:0] in_group;
  logic [A-1:0][SW-1:0] in_scores;
  logic [IW-1:0] rd_idx;
  logic [SW-1:0] rd_score;

  importance_analyzer #(.A(A), .SW(SW), .M_CAP(M)) dut (.*);

  logic [SW-1:0] att [H][T][M];
  logic [SW-1:0] ref_s [M];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic do_clear();
    int low = 0;
    @(negedge clk) clear = 1;
    @(negedge clk) clear = 0;
    while (!in_ready) begin low++; @(negedge clk); end
    checks++;
    if (low != WORDS) begin failures++; $display("clear took %0d cycles, expected %0d", low, WORDS); end
  endtask

  task automatic check_all(string tag);
    for (int j = 0; j < M; j++) begin
      rd_idx = IW'(j); #1;
      checks++;
      if (rd_score !== ref_s[j]) begin
        failures++; $display("%s: token %0d got %0h expected %0h", tag, j, rd_score, ref_s[j]);
      end
    end
  endtask

  initial begin
    clear = 0; in_valid = 0; mode_temporal = 0; in_last = 0; in_group = '0; in_scores = '0; rd_idx = '0;
    for (int j = 0; j < M; j++) ref_s[j] = '0;
    for (int h = 0; h < H; h++) for (int i = 0; i < T; i++) for (int j = 0; j < M; j++) begin
      att[h][i][j] = SW'($urandom_range(0, 16'h3c00));
      if (att[h][i][j] > ref_s[j]) ref_s[j] = att[h][i][j];
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    do_clear();
    // spatial stream: row by row, A columns per beat
    for (int h = 0; h < H; h++) for (int i = 0; i < T; i++) for (int g = 0; g < WORDS; g++) begin
      @(negedge clk);
      in_valid = 1; mode_temporal = 0; in_group = GW'(g); in_last = 0;
      for (int l = 0; l < A; l++) in_scores[l] = att[h][i][g*A+l];
    end
    @(negedge clk) in_valid = 0;
    check_all("spatial");
    // temporal stream: column group by column group, rows over time
    do_clear();
    for (int g = 0; g < WORDS; g++) for (int h = 0; h < H; h++) for (int i = 0; i < T; i++) begin
      @(negedge clk);
      in_valid = 1; mode_temporal = 1; in_group = GW'(g);
      in_last = (h == H-1) && (i == T-1);
      for (int l = 0; l < A; l++) in_scores[l] = att[h][i][g*A+l];
    end
    @(negedge clk) in_valid = 0; in_last = 0;
    check_all("temporal");
    // after a clear everything reads zero
    do_clear();
    for (int j = 0; j < M; j++) ref_s[j] = '0;
    check_all("cleared");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
