// focus_unit: the Focus concentration unit, placed between the PE array / softmax unit
// of a systolic-array accelerator and its memory interface.
//
// Semantic Concentrator (attention layers). Softmax scores of the text-to-image part of
// each head stream in on sc_*; after all heads, sel_start with cfg_m_len = M image
// tokens and cfg_k retained tokens selects the top k. The kept tokens leave on keep_*
// in position order (rows to load for P x V) with their offsets; the offsets are also
// stored in an on-chip offset table, and every M_TILE-th kept token records the
// position before its tile in a tile-base table, for later FC layers.
//
// Similarity Concentrator (FC layers). For each output tile (M_TILE rows x A columns):
// load the similarity map of input column block i (map_wr_*), stream the PE array's
// partial sums for the concentrated vectors (ps_*), pulse sub_go (sub_first on the
// first, sub_last on the last of the ceil(K/32) blocks). The similarity_scatter rebuilds
// and accumulates the full tile; after the last block the tile is requantised to 16 bits
// (arithmetic shift right by cfg_shift, saturation) and streamed into the
// similarity_gather with each row's offset from the offset table (or offset 1 when
// cfg_use_offsets = 0, for layers before the first pruning layer). The gather emits the
// tile's similarity map (map_*) and its distinct vectors (cv_*), which go to DRAM.
// cfg_tile is the M-tile number, cfg_w / cfg_hw the frame width and size in tokens.
//
// Not inside: the PE array, softmax unit, controller, input/weight buffers and DRAM of
// the host accelerator; their traffic is on the ports. The structure (SEC on the
// attention path, SIC with scatter and gather on the FC path, offsets handed from SEC to
// SIC) follows the paper; the offset and tile-base tables, the requantisation step and
// the port protocol are this design's choices.
module focus_unit
  import focus_pkg::*;
#(
  parameter int unsigned A     = VEC_LEN,
  parameter int unsigned M_CAP = M_MAX,
  parameter int unsigned MT    = M_TILE,
  parameter int unsigned DEPTH = BANK_DEPTH,
  localparam int unsigned EW    = ELEM_W,
  localparam int unsigned PSW   = PSUM_W,
  localparam int unsigned PW    = POS_W,
  localparam int unsigned OW    = OFF_W,
  localparam int unsigned WORDS = (M_CAP + A - 1) / A,
  localparam int unsigned GW    = (WORDS > 1) ? $clog2(WORDS) : 1,
  localparam int unsigned IW    = $clog2(WORDS * A),
  localparam int unsigned XW    = $clog2(MT),
  localparam int unsigned TILES = (WORDS * A + MT - 1) / MT,
  localparam int unsigned TW    = (TILES > 1) ? $clog2(TILES) : 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // ---- Semantic Concentrator ----
  input  logic                  sc_clear,
  output logic                  sc_ready,
  input  logic                  sc_valid,
  input  logic                  sc_temporal,
  input  logic [GW-1:0]         sc_group,
  input  logic [A-1:0][EW-1:0]  sc_scores,
  input  logic                  sc_last,
  input  logic                  sel_start,
  input  logic [IW:0]           cfg_m_len,
  input  logic [IW:0]           cfg_k,
  output logic                  sec_busy,
  output logic                  sec_done,
  output logic                  keep_valid,
  output logic [IW-1:0]         keep_pos,
  output logic [OW-1:0]         keep_off,
  // ---- Similarity Concentrator ----
  input  logic                  map_wr_en,
  input  logic [XW-1:0]         map_wr_row,
  input  logic [XW-1:0]         map_wr_idx,
  input  logic                  ps_valid,
  input  logic [XW-1:0]         ps_idx,
  input  logic [A-1:0][PSW-1:0] ps_vec,
  input  logic                  sub_go,
  input  logic                  sub_first,
  input  logic                  sub_last,
  input  logic [XW:0]           cfg_tile_len,
  input  logic [TW-1:0]         cfg_tile,
  input  logic [4:0]            cfg_shift,
  input  logic                  cfg_use_offsets,
  input  logic [PW-1:0]         cfg_w,
  input  logic [PW-1:0]         cfg_hw,
  output logic                  sic_busy,
  output logic                  map_valid,
  output logic [XW-1:0]         map_row,
  output logic [XW-1:0]         map_idx,
  output logic                  cv_valid,
  output logic [XW-1:0]         cv_idx,
  output logic [A-1:0][EW-1:0]  cv_vec
);
  // ================= SEC =================
  semantic_concentrator #(.A(A), .SW(EW), .M_CAP(M_CAP), .OW(OW)) u_sec (
    .clk, .rst_n, .sc_clear, .sc_ready, .sc_valid, .sc_temporal, .sc_group, .sc_scores,
    .sc_last, .sel_start, .cfg_m_len, .cfg_k, .busy(sec_busy), .done(sec_done),
    .keep_valid, .keep_pos, .keep_off);

  // offset table and tile-base table
  logic [OW-1:0]        off_mem [WORDS*A];
  logic signed [PW-1:0] base_mem [TILES];
  logic [IW:0]          kept_cnt;
  logic signed [PW-1:0] last_kept;

  always_ff @(posedge clk) begin
    if (keep_valid) off_mem[kept_cnt[IW-1:0]] <= keep_off;
    if (keep_valid && kept_cnt % (IW+1)'(MT) == 0)
      base_mem[TW'(kept_cnt / (IW+1)'(MT))] <= last_kept;
  end

  always_ff @(posedge clk) begin
    if (!rst_n || sel_start) begin
      kept_cnt  <= '0;
      last_kept <= -1;
    end else if (keep_valid) begin
      kept_cnt  <= kept_cnt + 1'b1;
      last_kept <= PW'(keep_pos);
    end
  end

  // ================= SIC =================
  logic                  so_valid, so_ready, so_last;
  logic [XW-1:0]         so_row;
  logic [A-1:0][PSW-1:0] so_vec;
  logic                  sc_busy_i, g_busy;

  similarity_scatter #(.A(A), .PSW(PSW), .MT(MT), .ACC_LANES(2*A)) u_scatter (
    .clk, .rst_n, .map_wr_en, .map_wr_row, .map_wr_idx, .ps_valid, .ps_idx, .ps_vec,
    .go(sub_go), .go_first(sub_first), .go_last(sub_last), .m_len(cfg_tile_len),
    .busy(sc_busy_i), .out_valid(so_valid), .out_ready(so_ready), .out_row(so_row),
    .out_vec(so_vec), .out_last(so_last));

  // requantise the accumulated tile to the 16-bit element format
  logic [A-1:0][EW-1:0] q_vec;
  always_comb begin
    for (int e = 0; e < A; e++) begin
      logic signed [PSW-1:0] v;
      v = $signed(so_vec[e]) >>> cfg_shift;
      if (v > $signed(PSW'(2**(EW-1) - 1)))      q_vec[e] = EW'(2**(EW-1) - 1);
      else if (v < -$signed(PSW'(2**(EW-1))))    q_vec[e] = EW'(2**(EW-1));
      else                                       q_vec[e] = v[EW-1:0];
    end
  end

  // the row's semantic offset
  logic [OW-1:0] row_off;
  logic [IW:0]   off_addr;
  assign off_addr = (IW+1)'(cfg_tile) * (IW+1)'(MT) + (IW+1)'(so_row);
  assign row_off  = cfg_use_offsets ? off_mem[off_addr[IW-1:0]] : OW'(1);

  // tile start for the gather: when the last K block is launched
  logic                 g_start;
  logic signed [PW-1:0] g_base;
  assign g_start = sub_go && sub_last;
  assign g_base  = cfg_use_offsets ? base_mem[cfg_tile]
                                   : PW'(cfg_tile) * PW'(MT) - PW'(1);

  similarity_gather #(.A(A), .EW(EW), .MT(MT), .DEPTH(DEPTH), .PW(PW), .OW(OW)) u_gather (
    .clk, .rst_n, .tile_start(g_start), .base_pos(g_base), .cfg_w, .cfg_hw,
    .in_valid(so_valid), .in_ready(so_ready), .in_vec(q_vec), .in_off(row_off),
    .map_valid, .map_row, .map_idx, .cv_valid, .cv_idx, .cv_vec, .busy(g_busy));

  assign sic_busy = sc_busy_i || g_busy || so_valid;

  logic unused;
  assign unused = so_last;
endmodule
