// conv_layouter: convolution-style layouter, the conflict-free buffer behind the
// Similarity Gather.
//
// Output rows arrive in token order; the gather gives the layouter each key token's
// absolute position key_pos (restored from semantic offsets). The layouter splits it
// into frame f, row r and column c (frame size cfg_hw = H*W, width cfg_w) and places
// the token at
//     Bank   = f%2*4 + r%2*2 + c%2
//     Offset = floor(r/2)*ceil(W/2) + floor(c/2)
// The eight tokens of any 2x2x2 block (frames f-1..f, rows r-1..r, columns c-1..c)
// differ in at least one of the three parities, so they always sit in eight different
// banks and are read in the same cycle without copies. Neighbour j (j = 1..7, bit 2 =
// one frame back, bit 1 = one row up, bit 0 = one column left) lives in bank
// key_bank ^ j.
//
// Each entry holds the vector, its squared L2 norm, its similarity-map index and the
// token's absolute position as a tag. nbr_hit[j] is set only when the neighbour lies
// inside the frame and the entry really holds that position, so pruned tokens and stale
// data never match. Reads are combinational; a write in the same cycle to the entry
// being read is forwarded. clear invalidates all entries (start of a tile).
// Each bank is DEPTH entries deep and the offset is taken modulo DEPTH, so the banks
// form a sliding window over the stream: a whole frame is held when
// ceil(H/2)*ceil(W/2) <= DEPTH; for larger frames a later row of the same frame
// overwrites the slot of an earlier one, the position tag then no longer matches and
// that neighbour counts as absent (fewer matches, never a wrong one).
//
// The bank/offset mapping and the 8 banks follow the paper, as does the depth (a
// 256-vector window over 8 banks). The modulo wrap for frames larger than the window is
// this design's reading of "sliding window". Tags, stored norms and indices, the forwarding and the
// division-based (f, r, c) recovery are this design's choices.
// Lint note: bank_off drops the upper bits of the offset product on purpose; that is
// the modulo-DEPTH wrap described above.
module conv_layouter
  import focus_pkg::*;
#(
  parameter int unsigned A     = VEC_LEN,
  parameter int unsigned EW    = ELEM_W,
  parameter int unsigned DEPTH = BANK_DEPTH,
  parameter int unsigned PW    = POS_W,
  parameter int unsigned NW    = 2*EW + $clog2(A) + 1,
  parameter int unsigned XW    = $clog2(M_TILE),
  localparam int unsigned DW   = $clog2(DEPTH)
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        clear,
  input  logic [PW-1:0]               cfg_w,     // frame width W
  input  logic [PW-1:0]               cfg_hw,    // frame size H*W
  // key lookup (combinational)
  input  logic [PW-1:0]               key_pos,
  output logic [2:0]                  key_bank,
  output logic [DW-1:0]               key_off,
  output logic [7:1][A-1:0][EW-1:0]   nbr_vec,
  output logic [7:1][NW-1:0]          nbr_nrm,
  output logic [7:1][XW-1:0]          nbr_idx,
  output logic [7:1][PW-1:0]          nbr_pos,
  output logic [7:1]                  nbr_hit,
  // write of the key entry after matching
  input  logic                        wr_en,
  input  logic [2:0]                  wr_bank,
  input  logic [DW-1:0]               wr_off,
  input  logic [PW-1:0]               wr_pos,
  input  logic [A-1:0][EW-1:0]        wr_vec,
  input  logic [NW-1:0]               wr_nrm,
  input  logic [XW-1:0]               wr_idx
);
  typedef struct packed {
    logic [A-1:0][EW-1:0] vec;
    logic [NW-1:0]        nrm;
    logic [XW-1:0]        idx;
    logic [PW-1:0]        pos;
  } entry_t;

  entry_t        mem [8][DEPTH];
  logic [DEPTH-1:0] vld [8];

  // position -> (f, r, c)
  logic [PW-1:0] f, rem, r, c, half_w;
  always_comb begin
    f      = key_pos / cfg_hw;
    rem    = key_pos % cfg_hw;
    r      = rem / cfg_w;
    c      = rem % cfg_w;
    half_w = (cfg_w + 1'b1) >> 1;
  end

  function automatic logic [DW-1:0] bank_off(input logic [PW-1:0] rr, input logic [PW-1:0] cc,
                                             input logic [PW-1:0] hw2);
    logic [2*PW-1:0] o;
    o = (2*PW)'(rr >> 1) * (2*PW)'(hw2) + (2*PW)'(cc >> 1);
    return o[DW-1:0];
  endfunction

  assign key_bank = {f[0], r[0], c[0]};
  assign key_off  = bank_off(r, c, half_w);

  always_comb begin
    for (int j = 1; j < 8; j++) begin
      logic          df, dr, dc, in_frame;
      logic [PW-1:0] nr, nc;
      logic [2:0]    b;
      logic [DW-1:0] o;
      entry_t        e;
      logic          ev;
      df = j[2]; dr = j[1]; dc = j[0];
      in_frame = !(df && f == 0) && !(dr && r == 0) && !(dc && c == 0);
      nr = r - PW'(dr);
      nc = c - PW'(dc);
      b  = key_bank ^ 3'(j);
      o  = bank_off(nr, nc, half_w);
      nbr_pos[j] = key_pos - (df ? cfg_hw : '0) - (dr ? cfg_w : '0) - PW'(dc);
      e  = mem[b][o];
      ev = vld[b][o];
      if (wr_en && wr_bank == b && wr_off == o) begin
        e  = '{vec: wr_vec, nrm: wr_nrm, idx: wr_idx, pos: wr_pos};
        ev = 1'b1;
      end
      nbr_vec[j] = e.vec;
      nbr_nrm[j] = e.nrm;
      nbr_idx[j] = e.idx;
      nbr_hit[j] = in_frame && ev && (e.pos == nbr_pos[j]);
    end
  end

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_bank][wr_off] <= '{vec: wr_vec, nrm: wr_nrm, idx: wr_idx, pos: wr_pos};
  end

  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      for (int b = 0; b < 8; b++) vld[b] <= '0;
    end else if (wr_en) begin
      vld[wr_bank][wr_off] <= 1'b1;
    end
  end

endmodule
