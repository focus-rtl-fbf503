// similarity_gather: vector-level redundancy removal on one GEMM output tile.
//
// The rows of an m x A output tile (one A-element vector per kept token) stream in
// with the semantic offset of their token. For each row the gather
//  1. adds the offset to a running position to restore the token's original position
//     (tile_start loads the position of the last kept token before the tile, base_pos);
//  2. reads the seven other vectors of the token's 2x2x2 block from the
//     conv_layouter, in one cycle; the incoming token is the block's key, being the
//     last of the block in frame-row-column order;
//  3. runs the similarity_matcher (8 cycles);
//  4. collects: with no match the vector gets the next compact index (the number of
//     distinct vectors seen so far in the tile) and leaves on the cv_* port; with a match
//     it takes the compact index of the matched neighbour. Either way the index is the
//     row's similarity-map entry, on the map_* port, and the row is written into the
//     layouter with its norm and index.
// Neighbours before the tile are not compared: tile_start clears the layouter, and a
// neighbour at a position <= base_pos is also masked out of the comparison.
//
// Handshake: in_valid/in_ready. Outputs are one-cycle pulses with no back-pressure,
// one map entry per row and at most one vector per row. Throughput: one row per
// 8 cycles, so a tile of m rows needs 8m cycles plus a few.
// The block-wise matching, the key choice, the index reuse and the tile-local scope
// follow the paper; the handshake and the tile_start/base_pos convention are this
// design's choices.
module similarity_gather
  import focus_pkg::*;
#(
  parameter int unsigned A      = VEC_LEN,
  parameter int unsigned EW     = ELEM_W,
  parameter int unsigned MT     = M_TILE,
  parameter int unsigned DEPTH  = BANK_DEPTH,
  parameter int unsigned PW     = POS_W,
  parameter int unsigned OW     = OFF_W,
  localparam int unsigned XW    = $clog2(MT),
  localparam int unsigned NW    = 2*EW + $clog2(A) + 1,
  localparam int unsigned DW    = $clog2(DEPTH)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  tile_start,
  input  logic signed [PW-1:0]  base_pos,
  input  logic [PW-1:0]         cfg_w,
  input  logic [PW-1:0]         cfg_hw,
  input  logic                  in_valid,
  output logic                  in_ready,
  input  logic [A-1:0][EW-1:0]  in_vec,
  input  logic [OW-1:0]         in_off,
  output logic                  map_valid,
  output logic [XW-1:0]         map_row,
  output logic [XW-1:0]         map_idx,
  output logic                  cv_valid,
  output logic [XW-1:0]         cv_idx,
  output logic [A-1:0][EW-1:0]  cv_vec,
  output logic                  busy
);
  logic signed [PW-1:0] pos_q, base_q, key_pos;
  logic [XW-1:0]        row_q, uniq_q;

  // layouter
  logic [2:0]                 lk_bank;
  logic [DW-1:0]              lk_off;
  logic [7:1][A-1:0][EW-1:0]  l_vec;
  logic [7:1][NW-1:0]         l_nrm;
  logic [7:1][XW-1:0]         l_idx;
  logic [7:1][PW-1:0]         l_pos;
  logic [7:1]                 l_hit;
  logic                       wr_en;
  logic [XW-1:0]              wr_idx;

  // latched key and block
  logic [A-1:0][EW-1:0]       k_vec;
  logic signed [PW-1:0]       k_pos;
  logic [2:0]                 k_bank;
  logic [DW-1:0]              k_off;
  logic [XW-1:0]              k_row;
  logic [7:1][A-1:0][EW-1:0]  n_vec;
  logic [7:1][NW-1:0]         n_nrm;
  logic [7:1][XW-1:0]         n_idx;
  logic [7:1]                 n_ok;

  logic m_busy, m_res, m_match;
  logic [2:0] m_best;
  logic [NW-1:0] m_knrm;
  logic accept;

  assign key_pos  = pos_q + PW'(in_off);
  assign in_ready = !tile_start && (!m_busy || m_res);
  assign accept   = in_valid && in_ready;
  assign busy     = m_busy;

  conv_layouter #(.A(A), .EW(EW), .DEPTH(DEPTH), .PW(PW), .NW(NW), .XW(XW)) u_layouter (
    .clk, .rst_n, .clear(tile_start), .cfg_w, .cfg_hw,
    .key_pos(key_pos), .key_bank(lk_bank), .key_off(lk_off),
    .nbr_vec(l_vec), .nbr_nrm(l_nrm), .nbr_idx(l_idx), .nbr_pos(l_pos), .nbr_hit(l_hit),
    .wr_en, .wr_bank(k_bank), .wr_off(k_off), .wr_pos(k_pos), .wr_vec(k_vec),
    .wr_nrm(m_knrm), .wr_idx);

  similarity_matcher #(.A(A), .EW(EW), .NW(NW)) u_matcher (
    .clk, .rst_n, .start(accept), .key(k_vec), .nbr(n_vec), .nbr_nrm(n_nrm),
    .nbr_ok(n_ok), .busy(m_busy), .res_valid(m_res), .match(m_match), .best(m_best),
    .key_nrm(m_knrm));

  assign wr_en  = m_res;
  assign wr_idx = m_match ? n_idx[m_best] : uniq_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      pos_q     <= '0;
      base_q    <= '0;
      row_q     <= '0;
      uniq_q    <= '0;
      map_valid <= 1'b0;
      cv_valid  <= 1'b0;
      map_row   <= '0;
      map_idx   <= '0;
      cv_idx    <= '0;
      cv_vec    <= '0;
      k_vec     <= '0;
      k_pos     <= '0;
      k_bank    <= '0;
      k_off     <= '0;
      k_row     <= '0;
      n_vec     <= '0;
      n_nrm     <= '0;
      n_idx     <= '0;
      n_ok      <= '0;
    end else begin
      map_valid <= 1'b0;
      cv_valid  <= 1'b0;
      if (m_res) begin
        map_valid <= 1'b1;
        map_row   <= k_row;
        map_idx   <= wr_idx;
        if (!m_match) begin
          cv_valid <= 1'b1;
          cv_idx   <= uniq_q;
          cv_vec   <= k_vec;
          uniq_q   <= uniq_q + 1'b1;
        end
      end
      if (tile_start) begin
        pos_q  <= base_pos;
        base_q <= base_pos;
        row_q  <= '0;
        uniq_q <= '0;
      end else if (accept) begin
        pos_q   <= key_pos;
        row_q   <= row_q + 1'b1;
        k_vec   <= in_vec;
        k_pos   <= key_pos;
        k_bank  <= lk_bank;
        k_off   <= lk_off;
        k_row   <= row_q;
        n_vec   <= l_vec;
        n_nrm   <= l_nrm;
        n_idx   <= l_idx;
        for (int j = 1; j < 8; j++)
          n_ok[j] <= l_hit[j] && ($signed(l_pos[j]) > base_q);
      end
    end
  end
endmodule
