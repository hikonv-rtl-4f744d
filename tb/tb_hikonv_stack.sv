// tb_hikonv_stack: self-checking test of HiKonv horizontal stacking.
//
// For random 1-D convolutions of X*N-element inputs (X from 1 to 8) with
// K = 3 taps, summed over C channels (1 or 2), the bench forms each step's
// product as the plain integer sum over channels of
// (sum f[x*N+n] 2^(S*n)) * (sum g[k] 2^(S*k)), feeds the products one per
// clock (sometimes with idle clocks between), and checks every output
// against a direct convolution y[i] = sum_c sum_k f_c[i-k] g_c[k].
// Checks the one-clock latency (out_valid follows in_valid) too.
// Two DUTs run: signed 4-bit data and unsigned 4-bit data, N=2, K=3, S=10.
module tb_hikonv_stack;

  localparam int N = 2, K = 3, S = 10, PW = 45, SEGS = N + K - 1;
  localparam int XMAX = 8;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_first = 0, in_last = 0;
  logic [PW-1:0] prod;
  logic out_valid [2];
  logic out_last [2];
  logic [SEGS-1:0][S:0] out_y [2];
  int checks = 0, failures = 0;
  int sel;

  always #5 clk = ~clk;

  for (genvar d = 0; d < 2; d++) begin : g_dut
    hikonv_stack #(.N(N), .K(K), .S(S), .PROD_W(PW), .SIGNED(d == 0)) dut (
      .clk(clk), .rst_n(rst_n), .in_valid(in_valid && sel == d), .in_first(in_first),
      .in_last(in_last), .prod(prod), .out_valid(out_valid[d]), .out_last(out_last[d]),
      .out_y(out_y[d])
    );
  end

  longint f [2][XMAX*N];
  longint g [2][K];
  longint yref [XMAX*N+K];

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic run_case(int d, int X, int C, bit extreme = 1'b0);
    bit sgn = (d == 0);
    for (int c = 0; c < C; c++) begin
      for (int i = 0; i < X * N; i++)
        f[c][i] = extreme ? (sgn ? -8 : 15) : sgn ? longint'($urandom % 16) - 8 : longint'($urandom % 16);
      for (int k = 0; k < K; k++)
        g[c][k] = extreme ? (sgn ? -8 : 15) : sgn ? longint'($urandom % 16) - 8 : longint'($urandom % 16);
    end
    for (int i = 0; i < X * N + K - 1; i++) begin
      yref[i] = 0;
      for (int c = 0; c < C; c++)
        for (int k = 0; k < K; k++)
          if (i - k >= 0 && i - k < X * N) yref[i] += f[c][i-k] * g[c][k];
    end
    sel = d;
    for (int x = 0; x < X; x++) begin
      longint pv = 0;
      for (int c = 0; c < C; c++) begin
        longint av = 0, bv = 0;
        for (int n = 0; n < N; n++) av += f[c][x*N+n] <<< (S * n);
        for (int k = 0; k < K; k++) bv += g[c][k] <<< (S * k);
        pv += av * bv;
      end
      while (($urandom % 4) == 0) begin
        in_valid = 0;
        @(posedge clk); #1;
        check(!out_valid[d], "out_valid without input");
      end
      in_valid = 1; in_first = (x == 0); in_last = (x == X - 1); prod = PW'(pv);
      @(posedge clk); #1;
      in_valid = 0;
      check(out_valid[d], "out_valid one clock after in_valid");
      check(out_last[d] == (x == X - 1), "out_last");
      for (int j = 0; j < SEGS; j++) begin
        if (j < N || x == X - 1) begin
          longint got = sgn ? longint'($signed(out_y[d][j])) : longint'(out_y[d][j]);
          check(got == yref[x*N+j],
                $sformatf("dut%0d X=%0d C=%0d y[%0d] got %0d exp %0d", d, X, C, x*N+j, got, yref[x*N+j]));
        end
      end
    end
  endtask

  initial begin
    prod = '0;
    sel = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      run_case(0, 1 + $urandom % XMAX, 1 + $urandom % 2);
      run_case(1, 1 + $urandom % XMAX, 1);
    end
    // extremes: every operand at the most negative value, two channels
    run_case(0, XMAX, 2, 1'b1);
    run_case(1, XMAX, 1, 1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
