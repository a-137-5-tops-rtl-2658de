// act_fold: MAC-folding encoder for one 4-bit activation.
//
// The activation (0..15, unsigned after ReLU) is shifted by the constant 8 and
// coded in sign-magnitude, so the analog array sees values -8..7 instead of 0..15.
// A 3-bit magnitude reaches only 7, so -8 (ACT = 0) is sent as magnitude 7 plus the
// compensation bit ACT[C], whose MAC slot adds one more 1*W. Zero (ACT = 8) is sent
// as positive with magnitude 0. The shift by 8 and the ACT[C] slot follow the paper;
// the exact split of -8 into 7 + C is this design's reading of the pulse table.
// Purely combinational, no latency.
module act_fold
  import cim_pkg::*;
(
  input  logic [ACT_W-1:0] act,   // unsigned activation
  output act_fold_t        fold   // folded sign-magnitude activation
);
  logic signed [ACT_W:0] shifted;

  always_comb begin
    shifted   = $signed({1'b0, act}) - $signed((ACT_W+1)'(FOLD_OFS));
    fold.sign = shifted[ACT_W];
    if (shifted == -$signed((ACT_W+1)'(FOLD_OFS))) begin
      fold.mag  = 3'd7;
      fold.comp = 1'b1;
    end else begin
      fold.mag  = shifted[ACT_W] ? 3'(-shifted) : shifted[2:0];
      fold.comp = 1'b0;
    end
  end

endmodule
