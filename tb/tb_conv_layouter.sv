// tb_conv_layouter: self-checking test of the convolution-style layouter.
// Uses a 5x5 frame, as in the worked example of the layout: token (f=1,r=1,c=2) must
// land in bank 6 at offset 1 and token (f=1,r=4,c=3) in bank 5 at offset 7. Then four
// frames of tokens, some of them pruned, are streamed in position order. In every cycle
// the next key is looked up while the previous key is being written (exercising the
// write forwarding). For each key, all seven block neighbours are checked against a
// reference: present exactly when the neighbour lies inside the frame and was kept,
// with the vector, norm and index that were written for it. The eight block members
// must always sit in eight different banks. A second run uses 14x14 frames, larger than
// the 32-deep banks hold: the offsets wrap and the reference then expects a neighbour
// only while no later token has taken its slot (and requires that this happens).
module tb_conv_layouter;
  localparam int A = 4, EW = 16, PW = 16, NW = 2*EW + $clog2(A) + 1, XW = 10, DEPTH = 32;
  localparam int W = 5, HH = 5, F = 4, N = W*HH*F;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic clear, wr_en;
  logic [PW-1:0] cfg_w, cfg_hw, key_pos, wr_pos;
  logic [2:0] key_bank, wr_bank;
  logic [$clog2(DEPTH)-1:0] key_off, wr_off;
  logic [7:1][A-1:0][EW-1:0] nbr_vec;
  logic [7:1][NW-1:0] nbr_nrm;
  logic [7:1][XW-1:0] nbr_idx;
  logic [7:1][PW-1:0] nbr_pos;
  logic [7:1] nbr_hit;
  logic [A-1:0][EW-1:0] wr_vec;
  logic [NW-1:0] wr_nrm;
  logic [XW-1:0] wr_idx;

  conv_layouter #(.A(A), .EW(EW), .DEPTH(DEPTH), .PW(PW), .NW(NW), .XW(XW)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Streams nf frames of w x h tokens (about 80 % kept) in position order. In every
  // cycle the next key is looked up while the previous kept key is written. The
  // reference tracks, per bank slot, the last position written there, so a neighbour
  // is expected present only if it is inside the frame, kept, and still in its slot.
  int n_evict = 0;
  task automatic run_frames(int w, int h, int nf);
    int n, hw2, prev;
    bit kept [];
    logic [A-1:0][EW-1:0] vec [];
    int slot_last [int];
    n = w * h * nf; hw2 = (w + 1) / 2;
    kept = new[n]; vec = new[n];
    cfg_w = PW'(w); cfg_hw = PW'(w*h);
    @(negedge clk) clear = 1;
    @(negedge clk) clear = 0;
    for (int p = 0; p < n; p++) begin
      kept[p] = ($urandom_range(0, 4) != 0);
      for (int i = 0; i < A; i++) vec[p][i] = EW'($urandom);
    end
    prev = -1;
    for (int p = 0; p < n; p++) begin
      if (!kept[p]) continue;
      key_pos = PW'(p);
      wr_en = (prev >= 0);
      if (prev >= 0) begin
        int f, r, c;
        f = prev / (w*h); r = (prev % (w*h)) / w; c = prev % w;
        wr_bank = 3'((f % 2) * 4 + (r % 2) * 2 + (c % 2));
        wr_off  = 5'(((r / 2) * hw2 + (c / 2)) % DEPTH);
        wr_pos = PW'(prev); wr_vec = vec[prev]; wr_nrm = NW'(prev * 7); wr_idx = XW'(prev % 1024);
        slot_last[int'(wr_bank) * DEPTH + int'(wr_off)] = prev;
      end
      #1;
      begin
        int f, r, c, banks_seen;
        f = p / (w*h); r = (p % (w*h)) / w; c = p % w;
        banks_seen = 1 << key_bank;
        for (int j = 1; j < 8; j++) begin
          int df, dr, dc, q, qs;
          bit exp_hit;
          df = (j >> 2) & 1; dr = (j >> 1) & 1; dc = j & 1;
          q = p - df*w*h - dr*w - dc;
          exp_hit = (f >= df) && (r >= dr) && (c >= dc) && kept[q];
          if (exp_hit) begin
            qs = ((f - df) % 2 * 4 + (r - dr) % 2 * 2 + (c - dc) % 2) * DEPTH
               + (((r - dr) / 2) * hw2 + (c - dc) / 2) % DEPTH;
            if (!slot_last.exists(qs) || slot_last[qs] != q) begin exp_hit = 0; n_evict++; end
          end
          banks_seen |= 1 << (key_bank ^ 3'(j));
          checks++;
          if (nbr_hit[j] != exp_hit || (exp_hit && (nbr_vec[j] != vec[q] || nbr_nrm[j] != NW'(q*7)
              || nbr_idx[j] != XW'(q % 1024) || nbr_pos[j] != PW'(q)))) begin
            failures++; $display("%0dx%0d key %0d nbr %0d: hit %0b expected %0b", w, h, p, j, nbr_hit[j], exp_hit);
          end
        end
        checks++;
        if (banks_seen != 255) begin failures++; $display("bank conflict at key %0d", p); end
      end
      @(negedge clk);
      prev = p;
    end
    wr_en = 0;
  endtask

  initial begin
    clear = 0; wr_en = 0; cfg_w = PW'(W); cfg_hw = PW'(W*HH); key_pos = '0; wr_pos = '0;
    wr_bank = '0; wr_off = '0; wr_vec = '0; wr_nrm = '0; wr_idx = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // worked examples
    key_pos = PW'(1*25 + 1*5 + 2); #1;
    checks++; if (key_bank != 3'd6 || key_off != 1) begin failures++; $display("B-b2: bank %0d off %0d", key_bank, key_off); end
    key_pos = PW'(1*25 + 4*5 + 3); #1;
    checks++; if (key_bank != 3'd5 || key_off != 7) begin failures++; $display("B-e3: bank %0d off %0d", key_bank, key_off); end
    // frames that fit the banks: every present neighbour must be found
    run_frames(W, HH, F);
    checks++; if (n_evict != 0) begin failures++; $display("5x5 frames evicted %0d neighbours", n_evict); end
    // 14x14 frames need 49 slots per bank: the banks act as a sliding window
    run_frames(14, 14, 3);
    checks++; if (n_evict == 0) begin failures++; $display("14x14 frames never wrapped"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
