// tb_hikonv_conv1d_32x32: a long 1-D convolution on a 32x32-bit multiplier.
//
// This is the configuration used when HiKonv runs on a general-purpose
// processor's 32-bit multiplier: unsigned 4-bit features and taps, two guard
// bits, S = 10, N = 3 features per operand and a K = 3 tap kernel. The bench
// chains the HiKonv datapath blocks by hand: two packers, a 32x32 multiplier
// with a 64-bit result and the overlap stacker. It streams a 480-element
// random sequence through them, one block of three per clock, and compares
// all 482 outputs with a direct convolution. It also checks that the blocks'
// sizing functions give S = 10 and N = K = 3 for this multiplier.
module tb_hikonv_conv1d_32x32;
  import hikonv_pkg::*;

  localparam int P = 4, Q = 4, GB = 2;
  localparam int S = hk_slice(P, Q, GB);
  localparam int N = hk_fit(32, P, S);
  localparam int K = hk_fit(32, Q, S);
  localparam int LEN = 480, X = LEN / N, SEGS = N + K - 1;

  logic clk = 0, rst_n = 0;
  logic [N-1:0][P-1:0] fblk;
  logic [K-1:0][Q-1:0] taps;
  logic [31:0] a_pk, b_pk;
  logic [63:0] prod;
  logic ce = 0, v1 = 0, first1 = 0, last1 = 0;
  logic out_valid, out_last;
  logic [SEGS-1:0][S:0] out_y;
  int checks = 0, failures = 0;
  int f [LEN];
  int g [K];
  longint yref [LEN+K];

  always #5 clk = ~clk;

  hikonv_pack #(.CNT(N), .EB(P), .S(S), .OUT_W(32), .SIGNED(1'b0)) u_pf (.elem(fblk), .packed_o(a_pk));
  hikonv_pack #(.CNT(K), .EB(Q), .S(S), .OUT_W(32), .SIGNED(1'b0)) u_pg (.elem(taps), .packed_o(b_pk));
  hikonv_dsp_mac #(.AW(32), .BW(32), .PW(64)) u_mul (
    .clk(clk), .rst_n(rst_n), .ce(ce), .acc(1'b0), .a(b_pk), .b(a_pk), .c('0), .p(prod));
  hikonv_stack #(.N(N), .K(K), .S(S), .PROD_W(64), .SIGNED(1'b0)) u_st (
    .clk(clk), .rst_n(rst_n), .in_valid(v1), .in_first(first1), .in_last(last1), .prod(prod),
    .out_valid(out_valid), .out_last(out_last), .out_y(out_y));

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL %s", msg); end
  endtask

  initial begin
    int got_x = 0;
    check(S == 10 && N == 3 && K == 3, $sformatf("sizing S=%0d N=%0d K=%0d", S, N, K));
    for (int i = 0; i < LEN; i++) f[i] = $urandom % 16;
    for (int k = 0; k < K; k++) g[k] = $urandom % 16;
    for (int k = 0; k < K; k++) taps[k] = Q'(g[k]);
    for (int i = 0; i < LEN + K - 1; i++) begin
      yref[i] = 0;
      for (int k = 0; k < K; k++) if (i - k >= 0 && i - k < LEN) yref[i] += f[i-k] * g[k];
    end
    fblk = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    // issue block x in clock x; the product is ready one clock later, the
    // outputs two clocks later
    for (int t = 0; t < X + 2; t++) begin
      ce = (t < X);
      if (t < X) for (int n = 0; n < N; n++) fblk[n] = P'(f[t*N+n]);
      @(posedge clk); #1;
      v1 = (t < X); first1 = (t == 0); last1 = (t == X - 1);
      if (out_valid) begin
        for (int j = 0; j < SEGS; j++)
          if (j < N || out_last)
            check(longint'(out_y[j]) == yref[got_x*N+j],
                  $sformatf("y[%0d] got %0d expected %0d", got_x*N+j, out_y[j], yref[got_x*N+j]));
        got_x++;
      end
    end
    check(got_x == X, $sformatf("blocks out %0d expected %0d", got_x, X));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
