// tb_topk_sorter: self-checking test of the streaming top-k bubble sorter.
// A reduced chain (A=4) selects k of M=30 scores held in a table here (read
// combinationally like the importance buffer). For several k, including k not a
// multiple of A, k = M and k = 0, and score sets with many ties, the selected indices
// are compared with a reference ranking (higher score first, lower index on ties), and
// the run time is checked against ceil(k/A) passes of M + 2A + 2 cycles.
module tb_topk_sorter;
  localparam int A = 4, M = 30, SW = 16, IW = $clog2(((M + A - 1) / A) * A);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, sel_valid, busy, done;
  logic [IW:0] m_len, k;
  logic [IW-1:0] rd_idx, sel_idx;
  logic [SW-1:0] rd_score;
  logic [SW-1:0] score [32];
  assign rd_score = score[rd_idx];

  topk_sorter #(.A(A), .SW(SW), .M_CAP(M)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int got[$];
  always @(posedge clk) if (rst_n && sel_valid) got.push_back(int'(sel_idx));

  // rank of token j among all: number of tokens ahead of it
  function automatic int rank_of(int j, int n);
    int r = 0;
    for (int i = 0; i < n; i++)
      if (score[i] > score[j] || (score[i] == score[j] && i < j)) r++;
    return r;
  endfunction

  task automatic run(int kk, int ties);
    int cyc = 0, limit;
    bit seen [32];
    for (int i = 0; i < 32; i++) score[i] = ((ties != 0) ? SW'($urandom_range(0, 3)) : SW'($urandom));
    got.delete();
    @(negedge clk); start = 1; m_len = (IW+1)'(M); k = (IW+1)'(kk);
    @(negedge clk); start = 0;
    while (!done) begin cyc++; @(negedge clk); end
    limit = ((kk + A - 1) / A) * (M + 2*A + 2) + 2;
    checks++;
    if (cyc > limit) begin failures++; $display("k=%0d took %0d cycles > %0d", kk, cyc, limit); end
    checks++;
    if (got.size() != kk) begin failures++; $display("k=%0d: %0d selected", kk, got.size()); end
    for (int i = 0; i < 32; i++) seen[i] = 0;
    foreach (got[n]) begin
      checks++;
      if (got[n] >= M || seen[got[n]] || rank_of(got[n], M) >= kk) begin
        failures++; $display("k=%0d: wrong pick %0d (rank %0d)", kk, got[n], rank_of(got[n], M));
      end else seen[got[n]] = 1;
      // each pass emits in descending order: rank must equal position
      checks++;
      if (rank_of(got[n], M) != n) begin failures++; $display("k=%0d: pick %0d has rank %0d", kk, n, rank_of(got[n], M)); end
    end
  endtask

  initial begin
    start = 0; m_len = '0; k = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(4, 0); run(12, 0); run(7, 0); run(1, 0); run(30, 0); run(9, 1); run(13, 1); run(0, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
