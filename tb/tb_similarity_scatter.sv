// tb_similarity_scatter: self-checking test of the Similarity Scatter.
// A reduced tile (A=4 columns, 16 rows, 2A = 8 accumulators) is accumulated over three
// K sub-tiles. Each sub-tile has its own random similarity map (rows pointing at p < m
// concentrated vectors) and random partial sums for the concentrated vectors only. The
// finished tile, streamed out under random back-pressure, is compared with
// sum_i psum_i[map_i[t]] computed here; each scatter pass must take ceil(m/2) cycles.
// Run for a full tile (16 rows) and an odd tile (13 rows), twice each.
module tb_similarity_scatter;
  localparam int A = 4, PSW = 32, MT = 16, XW = $clog2(MT), KS = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic map_wr_en, ps_valid, go, go_first, go_last, busy, out_valid, out_ready, out_last;
  logic [XW-1:0] map_wr_row, map_wr_idx, ps_idx, out_row;
  logic [A-1:0][PSW-1:0] ps_vec, out_vec;
  logic [XW:0] m_len;

  similarity_scatter #(.A(A), .PSW(PSW), .MT(MT), .ACC_LANES(2*A)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int refv [MT][A];

  task automatic run(int m);
    int rows_seen = 0;
    for (int t = 0; t < MT; t++) for (int e = 0; e < A; e++) refv[t][e] = 0;
    for (int s = 0; s < KS; s++) begin
      int p, map [MT], cyc;
      int ps [MT][A];
      p = $urandom_range(1, m);
      for (int t = 0; t < m; t++) map[t] = (t < p) ? t : $urandom_range(0, p - 1);
      for (int i = 0; i < p; i++) for (int e = 0; e < A; e++) ps[i][e] = $urandom_range(0, 20000) - 10000;
      for (int t = 0; t < m; t++) for (int e = 0; e < A; e++) refv[t][e] += ps[map[t]][e];
      for (int t = 0; t < m; t++) begin
        @(negedge clk) map_wr_en = 1; map_wr_row = XW'(t); map_wr_idx = XW'(map[t]);
      end
      @(negedge clk) map_wr_en = 0;
      for (int i = 0; i < p; i++) begin
        ps_valid = 1; ps_idx = XW'(i);
        for (int e = 0; e < A; e++) ps_vec[e] = PSW'(ps[i][e]);
        @(negedge clk);
      end
      ps_valid = 0;
      go = 1; go_first = (s == 0); go_last = (s == KS - 1); m_len = (XW+1)'(m);
      @(negedge clk) go = 0;
      cyc = 0;
      while (busy && !out_valid) begin cyc++; @(negedge clk); end
      checks++;
      if (cyc != (m + 1) / 2) begin failures++; $display("scatter pass took %0d cycles, expected %0d", cyc, (m + 1) / 2); end
    end
    // drain with random back-pressure
    while (busy) begin
      out_ready = ($urandom_range(0, 2) != 0);
      #1;
      if (out_valid && out_ready) begin
        checks++;
        if (int'(out_row) != rows_seen || out_last != (rows_seen == m - 1)) begin
          failures++; $display("row order: got %0d expected %0d", out_row, rows_seen);
        end
        for (int e = 0; e < A; e++) begin
          checks++;
          if ($signed(out_vec[e]) != refv[rows_seen][e]) begin
            failures++; $display("row %0d col %0d: %0d expected %0d", rows_seen, e, $signed(out_vec[e]), refv[rows_seen][e]);
          end
        end
        rows_seen++;
      end
      @(negedge clk);
    end
    out_ready = 0;
    checks++;
    if (rows_seen != m) begin failures++; $display("%0d rows out, expected %0d", rows_seen, m); end
  endtask

  initial begin
    map_wr_en = 0; ps_valid = 0; go = 0; go_first = 0; go_last = 0; out_ready = 0;
    map_wr_row = '0; map_wr_idx = '0; ps_idx = '0; ps_vec = '0; m_len = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(16); run(13); run(16); run(13);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
