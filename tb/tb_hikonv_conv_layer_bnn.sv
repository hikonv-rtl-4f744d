// tb_hikonv_conv_layer_bnn: the HiKonv layer in a binary configuration.
//
// Features and weights are 1-bit unsigned values {0, 1} (SIGNED = 0), as in
// a binary convolution layer. With 3 guard bits the slice size is
// S = q + Gb = 4, so five features share the 18-bit multiplier input
// (N = 5) and the 3 taps of a 3x3 kernel use 3 of the 7 slices that would
// fit the 27-bit input. The layer has 8 input and 4 output channels on a
// 6x13 input map; 13 is not a multiple of 5, so rows end in zero extension.
// The bench loads random bits, runs the layer twice, compares every output
// with a direct nested-loop convolution, checks the clock count and that
// channel accumulation, overlap carry, last-block flush and zero extension
// all occur. Signed borrows do not exist in this mode and are not counted.
module tb_hikonv_conv_layer_bnn;

  localparam int P = 1, Q = 1, K = 3, M = 2, NPE = 2, GB = 3;
  localparam int CI = 8, CO = 4, HI = 6, WI = 13, ACC_W = 32;
  localparam int N = 5;
  localparam int HO = HI - K + 1, WO = WI - K + 1, X = (WI + N - 1) / N;
  localparam int FM_AW = $clog2(CI * HI * WI), WT_AW = $clog2(CO * CI * K * K);
  localparam int OUT_AW = $clog2(CO * HO * WO);
  localparam int RUNS = 2;
  localparam longint EXP_CYCLES = longint'(CO / NPE) * HO * (K * (CI / M) * X * M + 4 + WO);

  logic clk = 0, rst_n = 0, start = 0;
  logic busy, done;
  logic fm_we = 0, wt_we = 0;
  logic [FM_AW-1:0] fm_addr = '0;
  logic [P-1:0] fm_wdata = '0;
  logic [WT_AW-1:0] wt_addr = '0;
  logic [Q-1:0] wt_wdata = '0;
  logic [OUT_AW-1:0] out_addr = '0;
  logic signed [ACC_W-1:0] out_rdata;

  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  hikonv_conv_layer #(
    .P(P), .Q(Q), .SIGNED(1'b0), .GB(GB), .K(K), .M(M), .NPE(NPE), .CI(CI), .CO(CO), .HI(HI), .WI(WI), .ACC_W(ACC_W)
  ) dut (
    .clk(clk), .rst_n(rst_n), .start(start), .busy(busy), .done(done),
    .fm_we(fm_we), .fm_addr(fm_addr), .fm_wdata(fm_wdata),
    .wt_we(wt_we), .wt_addr(wt_addr), .wt_wdata(wt_wdata),
    .out_addr(out_addr), .out_rdata(out_rdata)
  );

  logic [P-1:0] img [CI*HI*WI];
  logic [Q-1:0] wts [CO*CI*K*K];

  // mechanism counters
  longint n_chan_acc = 0, n_carry = 0, n_flush = 0, n_zero_ext = 0;
  longint n_pack_borrow = 0, n_seg_borrow = 0;

  always @(posedge clk) if (rst_n) begin
    if (dut.issue && dut.m != 0) n_chan_acc++;
    if (dut.g_lane[0].u_stack.in_valid && !dut.g_lane[0].u_stack.in_first) n_carry++;
    if (dut.g_lane[0].u_stack.in_valid && dut.g_lane[0].u_stack.in_last) n_flush++;
    if (dut.issue && (int'(dut.x) * N + N - 1 >= WI)) n_zero_ext++;
    if (dut.issue && dut.u_pack_f.borrow[1]) n_pack_borrow++;
    if (dut.g_lane[0].u_stack.in_valid && dut.g_lane[0].u_stack.u_seg.g_seg[1].corr)
      n_seg_borrow++;
  end

  function automatic logic rnd4();
    return 1'($urandom);
  endfunction

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s", msg);
    end
  endtask

  task automatic load();
    for (int i = 0; i < CI * HI * WI; i++) begin
      img[i] = rnd4();
      fm_we = 1; fm_addr = FM_AW'(i); fm_wdata = img[i];
      @(posedge clk); #1;
    end
    fm_we = 0;
    for (int i = 0; i < CO * CI * K * K; i++) begin
      wts[i] = rnd4();
      wt_we = 1; wt_addr = WT_AW'(i); wt_wdata = wts[i];
      @(posedge clk); #1;
    end
    wt_we = 0;
  endtask

  task automatic run_and_check(int run);
    longint cycles = 0;
    start = 1;
    @(posedge clk); #1;
    start = 0;
    while (!done) begin
      @(posedge clk); #1;
      cycles++;
    end
    check(cycles == EXP_CYCLES, $sformatf("run %0d cycles %0d expected %0d", run, cycles, EXP_CYCLES));
    @(posedge clk); #1;
    check(!busy, "busy falls after done");
    for (int co = 0; co < CO; co++)
      for (int h = 0; h < HO; h++)
        for (int w = 0; w < WO; w++) begin
          longint ref_v = 0;
          for (int ci = 0; ci < CI; ci++)
            for (int kh = 0; kh < K; kh++)
              for (int kw = 0; kw < K; kw++)
                ref_v += longint'(img[(ci*HI + h + kh)*WI + w + kw]) *
                         longint'(wts[((co*CI + ci)*K + kh)*K + kw]);
          out_addr = OUT_AW'((co*HO + h)*WO + w);
          @(posedge clk); #1;
          check(longint'(out_rdata) == ref_v,
                $sformatf("run %0d O[%0d][%0d][%0d] got %0d expected %0d", run, co, h, w, out_rdata, ref_v));
        end
  endtask

  initial begin
    assert (dut.S == 4 && dut.N == N) else begin
      failures++;
      $display("FAIL derived S=%0d N=%0d", dut.S, dut.N);
    end
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int r = 0; r < RUNS; r++) begin
      load();
      run_and_check(r);
    end
    check(n_chan_acc > 0, "channel accumulation never happened");
    check(n_carry > 0, "overlap carry never happened");
    check(n_flush > 0, "last-step flush never happened");
    check(n_zero_ext > 0, "zero extension never happened");
    check(n_pack_borrow == 0, "packing borrow in unsigned mode");
    check(n_seg_borrow == 0, "segment borrow in unsigned mode");
    $display("mechanisms: chan_acc=%0d carry=%0d flush=%0d zero_ext=%0d pack_borrow=%0d seg_borrow=%0d",
             n_chan_acc, n_carry, n_flush, n_zero_ext, n_pack_borrow, n_seg_borrow);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (RUNS * (EXP_CYCLES + CI*HI*WI + CO*CI*K*K + 2*CO*HO*WO + 100)) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
