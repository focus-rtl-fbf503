// similarity_scatter: rebuilds full output tiles from GEMM results on concentrated
// vectors and accumulates them over the K dimension.
//
// The input of an FC layer arrives concentrated: for input column block i (K sub-tile
// i), only p_i distinct vectors remain, plus a similarity map giving, for each of the
// tile's rows, which of the p_i vectors stands for it. The PE array multiplies only the
// p_i vectors and streams out one A-element partial-sum vector per cycle (ps_* port,
// written into a temporary buffer at its compact index ps_idx). After the sub-tile,
// pulse go: the scatter walks the tile rows and adds, for every row t,
//     acc[t] += tmp[map[t]]
// into the output-stationary tile buffer (m rows x A partial sums). ACC_LANES = 2A
// adders handle two rows per cycle, so one sub-tile costs ceil(m_len/2) cycles.
// go_first makes the first sub-tile overwrite instead of add; go_last makes the scatter,
// once the rows are accumulated, stream the finished tile out (out_valid/out_ready, one
// row per cycle) towards the Similarity Gather.
// The map for sub-tile i is loaded through map_wr_* before go (it is the similarity map
// the previous layer's gather produced for that column block).
//
// The temporary buffer, map-driven replication, output-stationary accumulation over
// ceil(K/k) sub-tiles, the 2a = 64 accumulators and the hand-off to the gather follow
// the paper. The two-rows-per-cycle reading of "2a-wide", the two read ports of the
// temporary buffer, the row-interleaved output buffer and integer partial sums are this
// design's choices.
module similarity_scatter
  import focus_pkg::*;
#(
  parameter int unsigned A         = VEC_LEN,
  parameter int unsigned PSW       = PSUM_W,
  parameter int unsigned MT        = M_TILE,
  parameter int unsigned ACC_LANES = 2*VEC_LEN,
  localparam int unsigned XW       = $clog2(MT),
  localparam int unsigned R        = ACC_LANES / A,     // rows per cycle
  localparam int unsigned RD       = (MT + R - 1) / R,  // rows per output bank
  localparam int unsigned BW       = (RD > 1) ? $clog2(RD) : 1,
  localparam int unsigned LW       = (R > 1) ? $clog2(R) : 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    map_wr_en,
  input  logic [XW-1:0]           map_wr_row,
  input  logic [XW-1:0]           map_wr_idx,
  input  logic                    ps_valid,
  input  logic [XW-1:0]           ps_idx,
  input  logic [A-1:0][PSW-1:0]   ps_vec,
  input  logic                    go,
  input  logic                    go_first,
  input  logic                    go_last,
  input  logic [XW:0]             m_len,
  output logic                    busy,
  output logic                    out_valid,
  input  logic                    out_ready,
  output logic [XW-1:0]           out_row,
  output logic [A-1:0][PSW-1:0]   out_vec,
  output logic                    out_last
);
  typedef logic [A-1:0][PSW-1:0] vec_t;

  logic [XW-1:0] map_mem [MT];
  vec_t          tmp_mem [MT];
  vec_t          acc_rd  [R];      // output read of each accumulator bank

  typedef enum logic [1:0] {S_IDLE, S_ACC, S_OUT} state_t;
  state_t        state;
  logic [XW:0]   row, len_q;
  logic          first_q, last_q;

  always_ff @(posedge clk) begin
    if (map_wr_en) map_mem[map_wr_row] <= map_wr_idx;
    if (ps_valid)  tmp_mem[ps_idx]     <= ps_vec;
  end

  // accumulation: R rows per cycle, row t in bank t % R at address t / R
  for (genvar l = 0; l < R; l++) begin : g_bank
    vec_t          acc_mem [RD];
    logic [XW:0]   t;
    logic [BW-1:0] bi;
    vec_t          src, sum;
    always_comb begin
      t   = row + (XW+1)'(l);
      bi  = BW'(t / (XW+1)'(R));
      src = tmp_mem[map_mem[t[XW-1:0]]];
      for (int e = 0; e < A; e++)
        sum[e] = (first_q ? '0 : acc_mem[bi][e]) + src[e];
    end
    always_ff @(posedge clk) begin
      if (state == S_ACC && t < len_q) acc_mem[bi] <= sum;
    end
    assign acc_rd[l] = acc_mem[BW'(row / (XW+1)'(R))];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      row     <= '0;
      len_q   <= '0;
      first_q <= 1'b0;
      last_q  <= 1'b0;
    end else begin
      case (state)
        S_IDLE: if (go && m_len != 0) begin
          state   <= S_ACC;
          row     <= '0;
          len_q   <= m_len;
          first_q <= go_first;
          last_q  <= go_last;
        end
        S_ACC: begin
          if (row + (XW+1)'(R) >= len_q) begin
            row   <= '0;
            state <= last_q ? S_OUT : S_IDLE;
          end else row <= row + (XW+1)'(R);
        end
        S_OUT: if (out_ready) begin
          if (row == len_q - 1'b1) state <= S_IDLE;
          row <= row + 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy      = (state != S_IDLE);
  assign out_valid = (state == S_OUT);
  assign out_row   = row[XW-1:0];
  assign out_vec   = acc_rd[LW'(row % (XW+1)'(R))];
  assign out_last  = (state == S_OUT) && (row == len_q - 1'b1);

  always_ff @(posedge clk) begin
    if (rst_n) begin
      assert (!(go && busy)) else $error("similarity_scatter: go while busy");
      assert (!(ps_valid && busy)) else $error("similarity_scatter: partial sums while busy");
      assert (!(go && m_len > (XW+1)'(MT))) else $error("similarity_scatter: m_len above tile size");
    end
  end
endmodule
