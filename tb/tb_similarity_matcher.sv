// tb_similarity_matcher: self-checking test of the cosine-similarity matcher.
// For 300 random blocks the key and seven neighbours are built as noisy copies,
// scaled copies, negated copies or unrelated vectors, with random neighbours disabled.
// The reference computes cosine similarity in floating point here; the matcher must
// report a match exactly when some enabled neighbour exceeds 0.9, pick the neighbour
// with the largest cosine, return the key's squared norm, and deliver the result in
// the 8th cycle after start.
module tb_similarity_matcher;
  localparam int A = 32, EW = 16, NW = 2*EW + $clog2(A) + 1;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, busy, res_valid, match;
  logic [2:0] best;
  logic [NW-1:0] key_nrm;
  logic [A-1:0][EW-1:0] key;
  logic [7:1][A-1:0][EW-1:0] nbr;
  logic [7:1][NW-1:0] nbr_nrm;
  logic [7:1] nbr_ok;

  similarity_matcher #(.A(A), .EW(EW)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint dotp(logic [A-1:0][EW-1:0] x, logic [A-1:0][EW-1:0] y);
    longint s = 0;
    for (int i = 0; i < A; i++) s += longint'($signed(x[i])) * longint'($signed(y[i]));
    return s;
  endfunction

  int n_match = 0, n_nomatch = 0;

  initial begin
    start = 0; key = '0; nbr = '0; nbr_nrm = '0; nbr_ok = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int it = 0; it < 300; it++) begin
      real cs, bestc;
      int expb, cyc;
      bit ambiguous;
      for (int i = 0; i < A; i++) key[i] = EW'($urandom_range(0, 4000) - 2000);
      if (it % 50 == 0) key = '0;   // zero vector: never similar
      for (int j = 1; j < 8; j++) begin
        int kind;
        kind = $urandom_range(0, 12);
        for (int i = 0; i < A; i++) begin
          int v;
          case (kind)
            0: v = int'($signed(key[i])) + $urandom_range(0, 400) - 200;
            1: v = int'($signed(key[i])) * 3 + $urandom_range(0, 2000) - 1000;
            2: v = -int'($signed(key[i]));
            3: v = int'($signed(key[i])) + $urandom_range(0, 3000) - 1500;
            default: v = $urandom_range(0, 4000) - 2000;
          endcase
          nbr[j][i] = EW'(v);
        end
        nbr_nrm[j] = NW'(dotp(nbr[j], nbr[j]));
        nbr_ok[j] = ($urandom_range(0, 5) != 0);
      end
      // reference
      expb = 0; bestc = -2.0; ambiguous = 0;
      for (int j = 1; j < 8; j++) begin
        longint kk, qq;
        kk = dotp(key, key); qq = dotp(nbr[j], nbr[j]);
        if (kk == 0 || qq == 0) cs = 0.0;
        else cs = real'(dotp(key, nbr[j])) / ($sqrt(real'(kk)) * $sqrt(real'(qq)));
        if (cs > 0.8999999 && cs < 0.9000001) ambiguous = 1;
        if (nbr_ok[j] && cs > 0.9) begin
          if (cs > bestc + 1e-12) begin bestc = cs; expb = j; end
          else if (cs > bestc - 1e-12) ambiguous = 1;
        end
      end
      @(negedge clk) start = 1;
      @(negedge clk) start = 0;
      cyc = 1;
      while (!res_valid) begin cyc++; @(negedge clk); end
      checks++;
      if (cyc != 8) begin failures++; $display("result after %0d cycles", cyc); end
      checks++;
      if (key_nrm != NW'(dotp(key, key))) begin failures++; $display("key norm wrong"); end
      if (!ambiguous) begin
        checks++;
        if (match != (expb != 0) || (match && best != 3'(expb))) begin
          failures++; $display("it %0d: match=%0b best=%0d expected %0d", it, match, best, expb);
        end
        if (expb != 0) n_match++; else n_nomatch++;
      end
      @(negedge clk);
    end
    checks++;
    if (n_match < 20 || n_nomatch < 20) begin failures++; $display("poor coverage %0d/%0d", n_match, n_nomatch); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
