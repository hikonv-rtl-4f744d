// hikonv_pack: input packer of a HiKonv multiplier operand.
//
// Places CNT operands of EB bits into one OUT_W-bit word so that the word's
// value is sum(elem[n] * 2^(S*n)). Operand n occupies bits [S*n +: S]; the
// last operand occupies everything from S*(CNT-1) upwards.
//
// Unsigned mode: plain concatenation with zero extension.
// Signed mode (as in the paper): a negative operand, sign-extended, fills the
// slices above it with ones, which is worth -1 in the next slice. Each slice
// is therefore the operand minus the MSB of the slice below it:
//   slice[0] = elem[0],  slice[n] = elem[n] - slice[n-1][S-1].
// This needs only a 1-bit decrement per slice instead of a wide adder, and the
// borrow ripples from slice to slice.
//
// Purely combinational. Interface: elem[n] in, packed word out.
// Requires S > EB and OUT_W - S*(CNT-1) > EB (one spare bit at the top, a
// choice of this design, see hikonv_pkg).
module hikonv_pack #(
  parameter int unsigned CNT    = 2,
  parameter int unsigned EB     = 4,
  parameter int unsigned S      = 10,
  parameter int unsigned OUT_W  = 18,
  parameter bit          SIGNED = 1'b1
) (
  input  logic [CNT-1:0][EB-1:0] elem,
  output logic [OUT_W-1:0]       packed_o
);

  localparam int unsigned TOP_W = OUT_W - S * (CNT - 1);

  // borrow[n] is the MSB of slice n-1, subtracted from slice n.
  logic [CNT-1:0] borrow;
  assign borrow[0] = 1'b0;

  for (genvar n = 0; n < CNT; n++) begin : g_slice
    localparam int unsigned W = (n == CNT - 1) ? TOP_W : S;
    logic [W-1:0] ext;
    logic [W-1:0] slice;
    assign ext   = {{(W - EB){SIGNED & elem[n][EB-1]}}, elem[n]};
    assign slice = ext - W'(borrow[n]);
    assign packed_o[S*n +: W] = slice;
    if (n < CNT - 1) begin : g_borrow
      assign borrow[n+1] = SIGNED & slice[W-1];
    end
  end

  initial begin
    assert (S > EB) else $error("hikonv_pack: slice S must exceed EB");
    assert (TOP_W > EB) else $error("hikonv_pack: no spare bit above the top slice");
  end

endmodule
