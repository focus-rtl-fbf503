// topk_sorter: a-way streaming bubble sorter that picks the k most important tokens.
//
// A chain of A compare-and-swap cells (the analyzer's max units reused as a chain) forms
// a systolic priority queue: every cycle each cell keeps the larger of its own key and
// the key arriving from its left neighbour and passes the smaller one to the right. One
// pass streams all m_len importance scores, one per cycle, through the chain; afterwards
// the cells hold the A largest keys in descending order. Each pass only admits keys
// smaller than the smallest key the previous pass kept, so pass 1 finds the top A, pass 2
// the next A, and so on; ceil(k/A) passes take about M*k/A cycles in all. The last pass
// emits only the k mod A best cells when k is not a multiple of A.
//
// A key is {score, ~index}, so equal scores are ranked by lower token index first.
// Interface: pulse start with m_len and k; the sorter reads scores through rd_idx ->
// rd_score (combinational, from the importance buffer) and emits each selected index as a
// sel_valid pulse (A per pass, in descending score order); done pulses at the end.
// Timing per pass: m_len feed cycles + A drain cycles + up to A emit cycles.
//
// The chained max units, the pass structure and the M*k/a cost follow the paper; the
// exclusion threshold between passes, the tie rule and the emit sequence are this
// design's choices.
module topk_sorter
  import focus_pkg::*;
#(
  parameter int unsigned A     = VEC_LEN,
  parameter int unsigned SW    = ELEM_W,
  parameter int unsigned M_CAP = M_MAX,
  localparam int unsigned IW   = $clog2(((M_CAP + A - 1) / A) * A),
  localparam int unsigned KW   = SW + IW
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [IW:0]   m_len,   // number of image tokens M (1..M_CAP)
  input  logic [IW:0]   k,       // number of tokens to keep (0..m_len)
  output logic [IW-1:0] rd_idx,
  input  logic [SW-1:0] rd_score,
  output logic          sel_valid,
  output logic [IW-1:0] sel_idx,
  output logic          busy,
  output logic          done
);
  typedef enum logic [1:0] {S_IDLE, S_FEED, S_DRAIN, S_EMIT} state_t;
  state_t state;

  logic [A-1:0][KW-1:0] cell_key;
  logic [A-1:0]         cell_vld;
  logic [A-1:0][KW-1:0] pass_key;   // key travelling into cell i
  logic [A-1:0]         pass_vld;

  logic [IW:0]  feed_pos, m_q, k_left;
  logic [$clog2(A+1)-1:0] cnt;      // drain / emit counter
  logic [KW-1:0] thr;
  logic [$clog2(A)-1:0] ci;  // emit cell
  assign ci = cnt[$clog2(A)-1:0];
  logic          thr_on;            // a previous pass exists

  logic [KW-1:0] new_key;
  logic          new_ok;

  assign rd_idx  = feed_pos[IW-1:0];
  assign new_key = {rd_score, ~feed_pos[IW-1:0]};
  assign new_ok  = (state == S_FEED) && (!thr_on || new_key < thr);
  assign busy    = (state != S_IDLE);

  // number of cells this pass emits
  logic [IW:0] emit_n;
  assign emit_n = (k_left > (IW+1)'(A)) ? (IW+1)'(A) : k_left;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      cell_vld  <= '0;
      pass_vld  <= '0;
      cell_key  <= '0;
      pass_key  <= '0;
      feed_pos  <= '0;
      m_q       <= '0;
      k_left    <= '0;
      cnt       <= '0;
      thr       <= '0;
      thr_on    <= 1'b0;
      sel_valid <= 1'b0;
      sel_idx   <= '0;
      done      <= 1'b0;
    end else begin
      sel_valid <= 1'b0;
      done      <= 1'b0;
      // systolic chain: runs every cycle, the input of cell 0 is the fed key
      for (int i = 0; i < A; i++) begin
        logic          in_v;
        logic [KW-1:0] in_k;
        in_v = (i == 0) ? new_ok  : pass_vld[i];
        in_k = (i == 0) ? new_key : pass_key[i];
        if (in_v && (!cell_vld[i] || in_k > cell_key[i])) begin
          cell_key[i] <= in_k;
          cell_vld[i] <= 1'b1;
          if (i < A-1) begin
            pass_key[(i+1) % A] <= cell_key[i];
            pass_vld[(i+1) % A] <= cell_vld[i];
          end
        end else if (i < A-1) begin
          pass_key[(i+1) % A] <= in_k;
          pass_vld[(i+1) % A] <= in_v;
        end
      end
      pass_vld[0] <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          m_q      <= m_len;
          k_left   <= k;
          thr_on   <= 1'b0;
          feed_pos <= '0;
          cell_vld <= '0;
          pass_vld <= '0;
          if (k == 0 || m_len == 0) done <= 1'b1;
          else state <= S_FEED;
        end
        S_FEED: begin
          if (feed_pos == m_q - 1'b1) begin
            state <= S_DRAIN;
            cnt   <= '0;
          end
          feed_pos <= feed_pos + 1'b1;
        end
        S_DRAIN: begin
          if (cnt == ($clog2(A+1))'(A)) begin
            state <= S_EMIT;
            cnt   <= '0;
          end else cnt <= cnt + 1'b1;
        end
        S_EMIT: begin
          if ((IW+1)'(cnt) < emit_n && cell_vld[ci]) begin
            sel_valid <= 1'b1;
            sel_idx   <= ~cell_key[ci][IW-1:0];
            thr       <= cell_key[ci];
            cnt       <= cnt + 1'b1;
          end else begin
            // pass finished
            thr_on   <= 1'b1;
            cell_vld <= '0;
            pass_vld <= '0;
            feed_pos <= '0;
            if (k_left <= emit_n || (IW+1)'(cnt) < emit_n) begin
              // all k found, or the tokens ran out
              state <= S_IDLE;
              done  <= 1'b1;
            end else begin
              k_left <= k_left - emit_n;
              state  <= S_FEED;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
