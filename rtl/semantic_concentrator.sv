// semantic_concentrator (SEC): token-level pruning driven by cross-modal attention.
//
// Three stages run in sequence for one attention layer:
//  1. importance_analyzer reduces the text-to-image softmax scores of all heads to one
//     importance score per image token (sc_* stream, see that module);
//  2. on sel_start, topk_sorter picks the cfg_k most important of cfg_m_len tokens and
//     marks them in a keep bitmap (one bit per token);
//  3. the bitmap is then scanned in token order, one position per cycle, through the
//     offset_encoder. For every kept token the SEC emits keep_valid with its position
//     keep_pos and its offset keep_off to the previous kept token.
// keep_pos is the list of rows to load for the pruned P x V product; keep_off is stored
// with the pruned tokens so that the Similarity Concentrator can restore positions.
// busy is high from sel_start until the last offset has left; done pulses then.
// Timing: selection takes ceil(k/A) passes of about m_len+2A cycles, the scan m_len
// cycles. Analyzer, sorter and encoder follow the paper; the keep bitmap between sorter
// and encoder is this design's way of turning score order back into position order.
// Lint note: the keep bitmap is M_MAX bits wide (12800 by default) and is cleared in a
// single cycle at sel_start; lint reports that all-zero fill as a very wide replication.
// That is intended: one bit per token, cleared at once.
module semantic_concentrator
  import focus_pkg::*;
#(
  parameter int unsigned A     = VEC_LEN,
  parameter int unsigned SW    = ELEM_W,
  parameter int unsigned M_CAP = M_MAX,
  parameter int unsigned OW    = OFF_W,
  localparam int unsigned WORDS = (M_CAP + A - 1) / A,
  localparam int unsigned GW    = (WORDS > 1) ? $clog2(WORDS) : 1,
  localparam int unsigned IW    = $clog2(WORDS * A)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // importance analysis
  input  logic                 sc_clear,
  output logic                 sc_ready,
  input  logic                 sc_valid,
  input  logic                 sc_temporal,
  input  logic [GW-1:0]        sc_group,
  input  logic [A-1:0][SW-1:0] sc_scores,
  input  logic                 sc_last,
  // selection
  input  logic                 sel_start,
  input  logic [IW:0]          cfg_m_len,
  input  logic [IW:0]          cfg_k,
  output logic                 busy,
  output logic                 done,
  // kept tokens, in position order
  output logic                 keep_valid,
  output logic [IW-1:0]        keep_pos,
  output logic [OW-1:0]        keep_off
);
  logic [IW-1:0] rd_idx;
  logic [SW-1:0] rd_score;
  logic          sel_valid, sort_busy, sort_done;
  logic [IW-1:0] sel_idx;

  importance_analyzer #(.A(A), .SW(SW), .M_CAP(M_CAP)) u_analyzer (
    .clk, .rst_n, .clear(sc_clear), .in_ready(sc_ready), .in_valid(sc_valid),
    .mode_temporal(sc_temporal), .in_group(sc_group), .in_scores(sc_scores),
    .in_last(sc_last), .rd_idx, .rd_score);

  topk_sorter #(.A(A), .SW(SW), .M_CAP(M_CAP)) u_sorter (
    .clk, .rst_n, .start(sel_start), .m_len(cfg_m_len), .k(cfg_k), .rd_idx, .rd_score,
    .sel_valid, .sel_idx, .busy(sort_busy), .done(sort_done));

  // keep bitmap and position-order scan
  logic [WORDS*A-1:0] keep_map;
  logic               scanning, scan_v, scan_keep, scan_start;
  logic [IW:0]        scan_pos, m_q;
  logic [IW-1:0]      pos_d1;   // position of the beat inside the encoder
  logic               enc_valid;
  logic [OW-1:0]      enc_off;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      keep_map   <= '0;
      scanning   <= 1'b0;
      scan_pos   <= '0;
      m_q        <= '0;
      scan_v     <= 1'b0;
      scan_keep  <= 1'b0;
      scan_start <= 1'b0;
      pos_d1     <= '0;
    end else begin
      scan_v     <= 1'b0;
      scan_start <= 1'b0;
      if (sel_start) begin
        keep_map   <= '0;
        m_q        <= cfg_m_len;
        scan_start <= 1'b1;
      end
      if (sel_valid) keep_map[sel_idx] <= 1'b1;
      if (sort_done) begin
        scanning <= (m_q != 0);
        scan_pos <= '0;
      end else if (scanning) begin
        scan_v    <= 1'b1;
        scan_keep <= keep_map[scan_pos[IW-1:0]];
        pos_d1    <= scan_pos[IW-1:0];
        scan_pos  <= scan_pos + 1'b1;
        if (scan_pos == m_q - 1'b1) scanning <= 1'b0;
      end
    end
  end

  offset_encoder #(.OW(OW)) u_encoder (
    .clk, .rst_n, .start(scan_start), .in_valid(scan_v), .in_keep(scan_keep),
    .out_valid(enc_valid), .out_offset(enc_off));

  logic [IW-1:0] pos_d2;
  logic          tail_d1, tail_d2;   // last scan beat, delayed to the encoder output
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      pos_d2  <= '0;
      tail_d1 <= 1'b0;
      tail_d2 <= 1'b0;
      busy    <= 1'b0;
      done    <= 1'b0;
    end else begin
      pos_d2  <= pos_d1;
      tail_d1 <= scanning && (scan_pos == m_q - 1'b1) && !sort_done;
      tail_d2 <= tail_d1;
      done    <= 1'b0;
      if (sel_start) busy <= 1'b1;
      else if (tail_d2 || (sort_done && m_q == 0)) begin
        busy <= 1'b0;
        done <= 1'b1;
      end
    end
  end

  assign keep_valid = enc_valid;
  assign keep_pos   = pos_d2;
  assign keep_off   = enc_off;

  logic unused;
  assign unused = sort_busy;
endmodule
