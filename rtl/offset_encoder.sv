// offset_encoder: localized offset encoding of the tokens kept by semantic pruning.
//
// The encoder sees the keep/prune decision of every image token in position order, one
// per beat. For each kept token it emits the distance to the previously kept token,
// offset = pos - prev_pos, with prev_pos = -1 after start (so a first kept token at
// position p gets p+1). Only a gap counter is kept, so the carry from one tile of kept
// tokens into the next comes for free: the first offset of a tile already includes the
// pruned positions at the end of the previous tile. Summing offsets restores the
// original positions, which the convolution-style layouter needs later.
// Timing: out_valid/out_offset are registered, one cycle after the kept token's beat.
// The paper gives the function (a small offset to the previous kept token, streamed and
// local); the gap counter, the -1 start and the 16-bit width are this design's choices.
module offset_encoder
  import focus_pkg::*;
#(
  parameter int unsigned OW = OFF_W
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,      // begin a new token sequence
  input  logic          in_valid,
  input  logic          in_keep,
  output logic          out_valid,
  output logic [OW-1:0] out_offset
);
  logic [OW-1:0] gap;   // pruned positions since the previous kept token

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      gap        <= '0;
      out_valid  <= 1'b0;
      out_offset <= '0;
    end else begin
      out_valid <= 1'b0;
      if (start) begin
        gap <= '0;
      end else if (in_valid) begin
        if (in_keep) begin
          out_valid  <= 1'b1;
          out_offset <= gap + 1'b1;
          gap        <= '0;
        end else begin
          gap <= gap + 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst_n && in_valid && !start && !in_keep)
      assert (gap != '1) else $error("offset_encoder: gap overflows %0d bits", OW);
  end
endmodule
