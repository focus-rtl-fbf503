// similarity_matcher: vector-wise cosine-similarity matcher of the Similarity Gather.
//
// One dot-product unit (A multipliers and an adder tree) is time-shared over eight
// steps per key vector p: step 0 computes the key's squared norm |p|^2, steps 1..7
// compute p.q_j for the seven other vectors of its 2x2x2 block. The neighbours' squared
// norms come precomputed from the layouter, so each step needs one dot product only.
// A neighbour matches when cos(p, q_j) > THR_NUM/THR_DEN (0.9). Instead of square roots
// and a divider the test is done on squares:
//     p.q > 0  and  (p.q)^2 * DEN^2 > NUM^2 * |p|^2 * |q|^2
// which is the same decision. Among matching neighbours the most similar one is kept,
// again compared on squares: (p.q_i)^2 |q_j|^2 > (p.q_j)^2 |q_i|^2. Neighbours with
// nbr_ok[j] = 0 (outside the frame or tile, or pruned) never match.
//
// Interface: pulse start when key, nbr_* and nbr_ok are valid; they must stay stable for
// the 8 steps. res_valid is high (combinationally) in the 8th cycle, together with match,
// best (1..7) and key_nrm, so a new key can start in the next cycle: 8 cycles per key,
// the "8 x m cycles per tile" bound.
// The single dot-product unit, the precomputed norms, the 7 comparisons and the 0.9
// threshold follow the paper; fixed-point integers instead of FP16 and the squared
// comparison are this design's choices.
module similarity_matcher
  import focus_pkg::*;
#(
  parameter int unsigned A       = VEC_LEN,
  parameter int unsigned EW      = ELEM_W,
  parameter int unsigned THR_N   = THR_NUM,
  parameter int unsigned THR_D   = THR_DEN,
  parameter int unsigned NW      = 2*EW + $clog2(A) + 1
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       start,
  input  logic [A-1:0][EW-1:0]       key,
  input  logic [7:1][A-1:0][EW-1:0]  nbr,
  input  logic [7:1][NW-1:0]         nbr_nrm,
  input  logic [7:1]                 nbr_ok,
  output logic                       busy,
  output logic                       res_valid,
  output logic                       match,
  output logic [2:0]                 best,
  output logic [NW-1:0]              key_nrm
);
  localparam int unsigned DPW = NW;        // signed dot product width
  localparam int unsigned SQW = 2*DPW;     // squared dot product
  localparam int unsigned BW  = 2*DPW + NW + 8;

  logic [2:0]               step;
  logic signed [DPW-1:0]    dot;
  logic [A-1:0][EW-1:0]     opb;
  logic [NW-1:0]            knrm_q;
  logic                     have_q;
  logic [2:0]               best_q;
  logic signed [DPW-1:0]    bdot_q;
  logic [NW-1:0]            bnrm_q;

  // the shared dot-product unit
  always_comb begin
    opb = (step == 3'd0) ? key : nbr[step];
    dot = '0;
    for (int i = 0; i < A; i++)
      dot += DPW'($signed(key[i]) * $signed(opb[i]));
  end

  // threshold and "better than best" on squares
  logic [SQW-1:0] dsq;
  logic [BW-1:0]  lhs, rhs, cmp_new, cmp_old;
  logic           pass, better, cand;
  logic [NW-1:0]  knrm;
  always_comb begin
    knrm    = (step == 3'd0) ? NW'(dot) : knrm_q;
    dsq     = SQW'(dot * dot);
    lhs     = BW'(dsq) * BW'(THR_D * THR_D);
    rhs     = BW'(THR_N * THR_N) * BW'(knrm_q) * BW'(nbr_nrm[step]);
    pass    = (step != 3'd0) && nbr_ok[step] && (dot > 0) && (lhs > rhs);
    cmp_new = BW'(dsq) * BW'(bnrm_q);
    cmp_old = BW'(SQW'(bdot_q * bdot_q)) * BW'(nbr_nrm[step]);
    better  = !have_q || (cmp_new > cmp_old);
    cand    = pass && better;
  end

  assign res_valid = busy && (step == 3'd7);
  assign match     = have_q || cand;
  assign best      = cand ? step : best_q;
  assign key_nrm   = knrm;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy   <= 1'b0;
      step   <= '0;
      knrm_q <= '0;
      have_q <= 1'b0;
      best_q <= '0;
      bdot_q <= '0;
      bnrm_q <= '0;
    end else begin
      if (busy) begin
        if (step == 3'd0) knrm_q <= knrm;
        if (cand) begin
          have_q <= 1'b1;
          best_q <= step;
          bdot_q <= dot;
          bnrm_q <= nbr_nrm[step];
        end
        step <= step + 1'b1;
        if (step == 3'd7) busy <= 1'b0;
      end
      if (start) begin
        busy   <= 1'b1;
        step   <= '0;
        have_q <= 1'b0;
      end
    end
  end
endmodule
