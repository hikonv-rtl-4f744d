// hikonv_segment: output segmenter of a HiKonv product.
//
// A product of two packed words is sum(y[m] * 2^(S*m)), where each y[m] is one
// output of a short 1-D convolution. This block cuts SEGS segments out of the
// IN_W-bit product word and returns each y[m] as an (S+1)-bit two's
// complement number.
//
// Unsigned mode: y[m] = word[S*m +: S], zero-extended.
// Signed mode (as in the paper): a negative segment below borrows one from
// the segment above, so each signed S-bit segment is corrected by adding the
// MSB of the segment below:  y[m] = signed(word[S*m +: S]) + word[S*m-1].
// This is the exact reverse of the signed packing in hikonv_pack.
//
// Purely combinational. The result is correct whenever every true y[m] fits
// S bits: [0, 2^S-1] unsigned, and [-(2^(S-1)-1), 2^(S-1)-1] signed. The most
// negative S-bit value is excluded in signed mode, because the segment holds
// y[m] minus a borrow of one from the segment below. The guard bits in S
// (checked with hikonv_pkg::hk_guard_ok) keep every y[m] in this range.
module hikonv_segment #(
  parameter int unsigned SEGS   = 4,
  parameter int unsigned S      = 10,
  parameter int unsigned IN_W   = 45,
  parameter bit          SIGNED = 1'b1
) (
  input  logic [IN_W-1:0]           word,
  output logic [SEGS-1:0][S:0]      y
);

  for (genvar m = 0; m < SEGS; m++) begin : g_seg
    logic [S-1:0] seg;
    logic         corr;
    assign seg = word[S*m +: S];
    if (m == 0) begin : g_first
      assign corr = 1'b0;
    end else begin : g_rest
      assign corr = SIGNED & word[S*m-1];
    end
    assign y[m] = {SIGNED & seg[S-1], seg} + (S+1)'(corr);
  end

  initial assert (S * SEGS <= IN_W) else $error("hikonv_segment: word too narrow");

endmodule
