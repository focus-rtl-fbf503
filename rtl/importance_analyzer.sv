// importance_analyzer: streaming cross-modal importance analyzer of the Semantic
// Concentrator.
//
// For every image token j it keeps s_j = max over heads k and text rows i of the
// text-to-image softmax scores I(k)[i][j]. Scores arrive A at a time (A parallel max
// units) from the softmax unit, tagged with the column group in_group (columns
// in_group*A .. in_group*A+A-1). The running maxima live in the importance buffer,
// M_MAX/A words of A scores (12800 x 16 bit = 25 KB by default).
//
// Two stream orders are accepted, selected by mode_temporal:
//  * spatial (parallel) stream, mode_temporal=0: each beat is part of one attention row;
//    every beat read-modify-writes its buffer word in the same cycle.
//  * temporal (orthogonal) stream, mode_temporal=1: consecutive beats are successive rows
//    of the same column group; the A max units hold column maxima in lane registers and
//    merge them into the buffer on the beat flagged in_last.
// A clear pulse zeroes the buffer, one word per cycle; in_ready is low meanwhile.
// The read port (rd_idx -> rd_score, combinational) serves the top-k sorter.
//
// The max-over-heads-and-text reduction, the a parallel max units, both stream orders and
// the 25 KB buffer follow the paper. The word organisation, the clear sequence, the
// in_last merge of the temporal mode and reset behaviour are this design's choices.
// Scores are treated as unsigned codes (softmax outputs are non-negative).
module importance_analyzer
  import focus_pkg::*;
#(
  parameter int unsigned A     = VEC_LEN,
  parameter int unsigned SW    = ELEM_W,
  parameter int unsigned M_CAP = M_MAX,
  localparam int unsigned WORDS = (M_CAP + A - 1) / A,
  localparam int unsigned GW    = (WORDS > 1) ? $clog2(WORDS) : 1,
  localparam int unsigned IW    = $clog2(WORDS * A),
  localparam int unsigned LW    = (A > 1) ? $clog2(A) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clear,          // start zeroing the buffer
  output logic                 in_ready,       // low while clearing
  input  logic                 in_valid,
  input  logic                 mode_temporal,
  input  logic [GW-1:0]        in_group,
  input  logic [A-1:0][SW-1:0] in_scores,
  input  logic                 in_last,        // temporal mode: last row of this group
  input  logic [IW-1:0]        rd_idx,
  output logic [SW-1:0]        rd_score
);
  logic [A-1:0][SW-1:0] mem [WORDS];
  logic [A-1:0][SW-1:0] lane_q;      // temporal-mode column maxima
  logic                 lane_live;   // lane_q holds at least one row
  logic                 clearing;
  logic [GW-1:0]        clr_addr;

  logic [A-1:0][SW-1:0] word_rd, merged, lane_d;
  logic                 wr_en;
  logic [GW-1:0]        wr_addr;
  logic [A-1:0][SW-1:0] wr_data;

  assign in_ready = !clearing;
  assign word_rd  = mem[in_group];

  always_comb begin
    for (int l = 0; l < A; l++) begin
      lane_d[l] = lane_live ? umax(lane_q[l], in_scores[l]) : in_scores[l];
      merged[l] = umax(word_rd[l], mode_temporal ? lane_d[l] : in_scores[l]);
    end
    wr_en   = 1'b0;
    wr_addr = in_group;
    wr_data = merged;
    if (clearing) begin
      wr_en   = 1'b1;
      wr_addr = clr_addr;
      wr_data = '0;
    end else if (in_valid && (!mode_temporal || in_last)) begin
      wr_en = 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      clearing  <= 1'b0;
      clr_addr  <= '0;
      lane_live <= 1'b0;
      lane_q    <= '0;
    end else begin
      if (clear) begin
        clearing  <= 1'b1;
        clr_addr  <= '0;
        lane_live <= 1'b0;
      end else if (clearing) begin
        if (clr_addr == GW'(WORDS - 1)) clearing <= 1'b0;
        clr_addr <= clr_addr + 1'b1;
      end else if (in_valid && mode_temporal) begin
        lane_q    <= lane_d;
        lane_live <= !in_last;
      end
    end
  end

  logic [A-1:0][SW-1:0] rd_word;
  assign rd_word  = mem[GW'(rd_idx / IW'(A))];
  assign rd_score = rd_word[LW'(rd_idx % IW'(A))];

  // A group index beyond the buffer is a caller error.
  always_ff @(posedge clk) begin
    if (rst_n && in_valid && !clearing)
      assert (32'(in_group) < WORDS) else $error("importance_analyzer: group %0d out of range", in_group);
  end
endmodule
