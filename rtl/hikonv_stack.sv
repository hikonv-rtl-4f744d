// hikonv_stack: horizontal stacking of HiKonv products, F(N,K) -> F(X*N,K).
//
// A long 1-D convolution of an X*N-element sequence with a K-element kernel
// is the sum of X short ones, each shifted by N indices. Product x holds the
// N+K-1 outputs y_x[0..N+K-2]; its upper K-1 outputs overlap the lower K-1
// outputs of product x+1. Instead of segmenting both and adding outputs one
// by one, the bit-fields are added: the part of product x-1 above bit N*S
// (carried over as `carry`) is added onto product x, and a single adder
// thus forms K-1 outputs at once, as the paper does for its horizontal
// stacking. The sum is then segmented by hikonv_segment.
//
// carry = floor(T / 2^(N*S)) + T[N*S-1]: the arithmetic shift drops the low
// N segments, and the added bit undoes the borrow that a negative low part
// took from segment N (signed mode only). This keeps the carry exact.
//
// Interface: present a product with in_valid; in_first marks x = 0 (no
// carry is added) and in_last marks x = X-1. One clock later out_valid
// rises with out_y[0..N+K-2] = y[x*N + j]; outputs j < N are final, and on
// the last step (out_last) all N+K-1 are. Needs K-1 <= N so that only the
// previous product overlaps the current one. Accepts one product per clock.
module hikonv_stack #(
  parameter int unsigned N      = 2,
  parameter int unsigned K      = 3,
  parameter int unsigned S      = 10,
  parameter int unsigned PROD_W = 45,
  parameter bit          SIGNED = 1'b1
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      in_valid,
  input  logic                      in_first,
  input  logic                      in_last,
  input  logic [PROD_W-1:0]         prod,
  output logic                      out_valid,
  output logic                      out_last,
  output logic [N+K-2:0][S:0]       out_y
);

  localparam int unsigned SEGS = N + K - 1;
  localparam int unsigned NS   = N * S;

  logic [PROD_W-1:0] carry, total, carry_nxt;
  logic [SEGS-1:0][S:0] seg_y;

  assign total = prod + (in_first ? '0 : carry);

  always_comb begin
    if (SIGNED) carry_nxt = PROD_W'($signed(total) >>> NS) + PROD_W'(total[NS-1]);
    else        carry_nxt = total >> NS;
  end

  hikonv_segment #(.SEGS(SEGS), .S(S), .IN_W(PROD_W), .SIGNED(SIGNED)) u_seg (
    .word (total),
    .y    (seg_y)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      carry     <= '0;
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      out_y     <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        carry    <= carry_nxt;
        out_last <= in_last;
        out_y    <= seg_y;
      end
    end
  end

  initial assert (K - 1 <= N) else $error("hikonv_stack: needs K-1 <= N");

endmodule
