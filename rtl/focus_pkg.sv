// focus_pkg: constants shared by the Focus concentration unit.
//
// The defaults follow the accelerator set-up the design is built for: a 32-wide PE
// array produces 32-element output vectors, similarity is judged on those 32-element
// vectors inside 2x2x2 spatio-temporal blocks, GEMM output tiles are 1024 rows tall,
// and the importance vector buffer is 25 KB. Everything else here (16-bit fixed-point
// elements, 32-bit partial sums, 16-bit positions and offsets) is this design's choice.
package focus_pkg;
  localparam int unsigned VEC_LEN   = 32;     // a = n = 32: vector length / PE array width
  localparam int unsigned ELEM_W    = 16;     // element and attention-score width
  localparam int unsigned PSUM_W    = 32;     // partial-sum / accumulator width
  localparam int unsigned M_TILE    = 1024;   // GEMM m tile size
  localparam int unsigned M_MAX     = 12800;  // 25 KB importance buffer / 2 bytes
  localparam int unsigned POS_W     = 16;     // token position, signed (-1 = "before 0")
  localparam int unsigned OFF_W     = 16;     // semantic offset width
  localparam int unsigned BANKS     = 8;      // 2x2x2 block -> 8 conflict-free banks
  localparam int unsigned BANK_DEPTH= 32;     // 256-vector layouter window / 8 banks
  localparam int unsigned THR_NUM   = 9;      // similarity threshold 0.9 = 9/10
  localparam int unsigned THR_DEN   = 10;

  // Larger of two unsigned codes. Softmax scores are non-negative, so the unsigned
  // order of their 16-bit codes is their numeric order.
  function automatic logic [ELEM_W-1:0] umax(input logic [ELEM_W-1:0] x, input logic [ELEM_W-1:0] y);
    return (x > y) ? x : y;
  endfunction
endpackage
