// hikonv_conv_layer: a quantized DNN convolution layer computed with HiKonv.
//
// The layer computes O[co][h][w] = sum over ci, kh, kw of
// I[ci][h+kh][w+kw] * W[co][ci][kh][kw] (stride 1, no padding, K x K kernel).
// Following the paper's decomposition, each (co, h, kh, ci) term is a long
// 1-D convolution of input row I[ci][h+kh][*] with the reversed kernel row
// g[k] = W[co][ci][kh][K-1-k]; output w of the layer is output w+K-1 of that
// 1-D convolution. Every 1-D convolution is cut into X = ceil(WI/N) steps:
//   - hikonv_pack packs N input pixels into the 18-bit multiplier input and
//     the K kernel taps into the 27-bit input (S bits apart, signed packing);
//   - hikonv_dsp_mac multiplies them, and adds the products of M input
//     channels onto each other (channel accumulation in the product domain);
//   - hikonv_stack adds the overlap of the previous step's product and cuts
//     out N outputs (all N+K-1 on the last step);
//   - the outputs are added into a row of ACC_W-bit accumulators.
// After all kernel rows and input-channel groups of an output row, the row is
// written to the output memory. NPE lanes work on NPE output channels at
// once; they share the packed input pixels and each has its own kernel taps,
// multiplier and stacker.
//
// Schedule: one multiplier operation per clock per lane, loops from outer to
// inner: output-channel group, output row h, kernel row kh, input-channel
// group, step x, channel m within the group. From the clock edge that
// samples `start` to the first clock with `done` high, a layer takes
// (CO/NPE) * HO * (K * (CI/M) * X * M + 4 + WO) clocks.
//
// Interface: the host writes pixels (address (ci*HI+h)*WI+w) and weights
// (address ((co*CI+ci)*K+kh)*K+kw) while idle, pulses `start`, waits for the
// one-clock `done` pulse and reads results (address (co*HO+h)*WO+w) with one
// clock of read latency. Memories are plain arrays and are not reset.
//
// From the paper: packing, segmentation, stacking, product-domain channel
// accumulation, the 27x18 multiplier with 4-bit operands (S=10, N=2, K=3).
// This design's own choices: the loop order, NPE, M, the memories and their
// address maps, the accumulator width and the host interface; the layer
// sizes default to a 3x3, 64-to-64-channel layer on a 10x20 output map.
module hikonv_conv_layer
  import hikonv_pkg::*;
#(
  parameter int unsigned P      = 4,    // feature bitwidth p
  parameter int unsigned Q      = 4,    // weight bitwidth q
  parameter bit          SIGNED = 1'b1,
  parameter int unsigned BIT_A  = 18,   // multiplier input carrying features
  parameter int unsigned BIT_B  = 27,   // multiplier input carrying weights
  parameter int unsigned PROD_W = 45,
  parameter int unsigned GB     = 2,    // guard bits
  parameter int unsigned K      = 3,    // kernel size
  parameter int unsigned M      = 2,    // input channels summed per product
  parameter int unsigned NPE    = 4,    // output-channel lanes
  parameter int unsigned CI     = 64,
  parameter int unsigned CO     = 64,
  parameter int unsigned HI     = 12,
  parameter int unsigned WI     = 22,
  parameter int unsigned ACC_W  = 32,
  // derived, not meant to be overridden
  parameter int unsigned S      = hk_slice(P, Q, GB),
  parameter int unsigned N      = hk_fit(BIT_A, P, S),
  parameter int unsigned HO     = HI - K + 1,
  parameter int unsigned WO     = WI - K + 1,
  parameter int unsigned X      = (WI + N - 1) / N,
  parameter int unsigned FM_AW  = $clog2(CI * HI * WI),
  parameter int unsigned WT_AW  = $clog2(CO * CI * K * K),
  parameter int unsigned OUT_AW = $clog2(CO * HO * WO)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // control
  input  logic                    start,
  output logic                    busy,
  output logic                    done,
  // input feature map load port
  input  logic                    fm_we,
  input  logic [FM_AW-1:0]        fm_addr,
  input  logic [P-1:0]            fm_wdata,
  // weight load port
  input  logic                    wt_we,
  input  logic [WT_AW-1:0]        wt_addr,
  input  logic [Q-1:0]            wt_wdata,
  // output feature map read port
  input  logic [OUT_AW-1:0]       out_addr,
  output logic signed [ACC_W-1:0] out_rdata
);

  localparam int unsigned SEGS = N + K - 1;
  localparam int unsigned COG  = CO / NPE;
  localparam int unsigned CIG  = CI / M;

  typedef enum logic [2:0] {S_IDLE, S_RUN, S_DRAIN, S_WRITE, S_DONE} state_t;

  // ---------------------------------------------------------------- memories
  logic [P-1:0]            fmem [CI*HI*WI];
  logic [Q-1:0]            wmem [CO*CI*K*K];
  logic signed [ACC_W-1:0] omem [CO*HO*WO];

  always_ff @(posedge clk) begin
    if (fm_we) fmem[fm_addr] <= fm_wdata;
    if (wt_we) wmem[wt_addr] <= wt_wdata;
  end

  // ---------------------------------------------------------------- control
  state_t state;
  logic [$clog2(COG+1)-1:0] cog;
  logic [$clog2(HO+1)-1:0]  h;
  logic [$clog2(K+1)-1:0]   kh;
  logic [$clog2(CIG+1)-1:0] cig;
  logic [$clog2(X+1)-1:0]   x;
  logic [$clog2(M+1)-1:0]   m;
  logic [$clog2(WO+1)-1:0]  wcnt;
  logic [2:0]               drain;

  logic issue;
  logic last_m, last_x, last_cig, last_kh, row_last;
  assign issue    = (state == S_RUN);
  assign last_m   = (32'(m) == M - 1);
  assign last_x   = (32'(x) == X - 1);
  assign last_cig = (32'(cig) == CIG - 1);
  assign last_kh  = (32'(kh) == K - 1);
  assign row_last = last_m && last_x && last_cig && last_kh;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_IDLE;
      cog <= '0; h <= '0; kh <= '0; cig <= '0; x <= '0; m <= '0;
      wcnt <= '0; drain <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          state <= S_RUN;
          cog <= '0; h <= '0; kh <= '0; cig <= '0; x <= '0; m <= '0;
        end
        S_RUN: begin
          if (row_last) begin
            state <= S_DRAIN;
            drain <= '0;
            m <= '0; x <= '0; cig <= '0; kh <= '0;
          end else if (!last_m) m <= m + 1'b1;
          else begin
            m <= '0;
            if (!last_x) x <= x + 1'b1;
            else begin
              x <= '0;
              if (!last_cig) cig <= cig + 1'b1;
              else begin
                cig <= '0;
                kh  <= kh + 1'b1;
              end
            end
          end
        end
        S_DRAIN: begin
          drain <= drain + 1'b1;
          if (drain == 3'd3) begin
            state <= S_WRITE;
            wcnt  <= '0;
          end
        end
        S_WRITE: begin
          if (32'(wcnt) == WO - 1) begin
            if (32'(h) != HO - 1) begin
              h <= h + 1'b1;
              state <= S_RUN;
            end else if (32'(cog) != COG - 1) begin
              h <= '0;
              cog <= cog + 1'b1;
              state <= S_RUN;
            end else state <= S_DONE;
          end
          wcnt <= wcnt + 1'b1;
        end
        S_DONE: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);
  assign done = (state == S_DONE);

  // ---------------------------------------------------------------- operand fetch
  // N pixels of row h+kh of channel cig*M+m, columns x*N .. x*N+N-1; columns
  // at or beyond WI are the zero extension of the row.
  logic [N-1:0][P-1:0] pix;
  logic [BIT_A-1:0]    a_packed;
  int unsigned         ci_cur, row_cur;

  assign ci_cur  = 32'(cig) * M + 32'(m);
  assign row_cur = 32'(h) + 32'(kh);

  always_comb begin
    for (int n = 0; n < N; n++) begin
      int unsigned col;
      col = x * N + n;
      pix[n] = (col < WI) ? fmem[(ci_cur * HI + row_cur) * WI + col] : '0;
    end
  end

  hikonv_pack #(.CNT(N), .EB(P), .S(S), .OUT_W(BIT_A), .SIGNED(SIGNED)) u_pack_f (
    .elem     (pix),
    .packed_o (a_packed)
  );

  // pipeline tags: stage 1 = multiplier result, stage 2 = stacker output
  logic                    v1, first1, last1;
  logic [$clog2(X+1)-1:0]  x1, x2;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      v1 <= 1'b0; first1 <= 1'b0; last1 <= 1'b0; x1 <= '0; x2 <= '0;
    end else begin
      v1     <= issue && last_m;
      first1 <= (x == 0);
      last1  <= last_x;
      x1     <= x;
      if (v1) x2 <= x1;
    end
  end

  // ---------------------------------------------------------------- lanes
  logic signed [ACC_W-1:0] acc [NPE][WO];
  logic [NPE-1:0]              sv;
  logic [NPE-1:0]              slast;
  logic [NPE-1:0][SEGS-1:0][S:0] sy;

  for (genvar l = 0; l < NPE; l++) begin : g_lane
    logic [K-1:0][Q-1:0] taps;
    logic [BIT_B-1:0]    b_packed;
    logic [PROD_W-1:0]   p;
    int unsigned         co_cur;

    assign co_cur = 32'(cog) * NPE + l;

    // g[k] = W[co][ci][kh][K-1-k]: the kernel row reversed
    always_comb begin
      for (int k = 0; k < K; k++)
        taps[k] = wmem[((co_cur * CI + ci_cur) * K + 32'(kh)) * K + (K - 1 - k)];
    end

    hikonv_pack #(.CNT(K), .EB(Q), .S(S), .OUT_W(BIT_B), .SIGNED(SIGNED)) u_pack_g (
      .elem     (taps),
      .packed_o (b_packed)
    );

    hikonv_dsp_mac #(.AW(BIT_B), .BW(BIT_A), .PW(PROD_W)) u_mac (
      .clk   (clk),
      .rst_n (rst_n),
      .ce    (issue),
      .acc   (m != 0),
      .a     (b_packed),
      .b     (a_packed),
      .c     ('0),
      .p     (p)
    );

    hikonv_stack #(.N(N), .K(K), .S(S), .PROD_W(PROD_W), .SIGNED(SIGNED)) u_stack (
      .clk       (clk),
      .rst_n     (rst_n),
      .in_valid  (v1),
      .in_first  (first1),
      .in_last   (last1),
      .prod      (p),
      .out_valid (sv[l]),
      .out_last  (slast[l]),
      .out_y     (sy[l])
    );
  end

  // ---------------------------------------------------------------- row accumulators
  // 1-D output j of step x2 is index x2*N+j; layer column w = x2*N+j-(K-1).
  always_ff @(posedge clk) begin
    if (!rst_n || (state == S_IDLE && start)) begin
      for (int l = 0; l < NPE; l++)
        for (int w = 0; w < WO; w++) acc[l][w] <= '0;
    end else begin
      for (int l = 0; l < NPE; l++) begin
        if (sv[l]) begin
          for (int j = 0; j < SEGS; j++) begin
            int wi;
            wi = int'(x2) * N + j - (K - 1);
            if ((j < N || slast[l]) && wi >= 0 && wi < WO)
              acc[l][wi] <= acc[l][wi] + ACC_W'($signed(sy[l][j]));
          end
        end
        if (state == S_WRITE) acc[l][wcnt] <= '0;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (state == S_WRITE)
      for (int l = 0; l < NPE; l++)
        omem[((32'(cog) * NPE + l) * HO + 32'(h)) * WO + 32'(wcnt)] <= acc[l][wcnt];
    out_rdata <= omem[out_addr];
  end

  initial begin
    assert (CI % M == 0) else $error("hikonv_conv_layer: CI must be a multiple of M");
    assert (CO % NPE == 0) else $error("hikonv_conv_layer: CO must be a multiple of NPE");
    assert (K <= hk_fit(BIT_B, Q, S)) else $error("hikonv_conv_layer: K taps do not fit BIT_B");
    assert (N >= 1 && K - 1 <= N) else $error("hikonv_conv_layer: needs 1 <= N and K-1 <= N");
    assert (hk_guard_ok(P, Q, S, M * K, SIGNED))
      else $error("hikonv_conv_layer: guard bits too few for M*K products per segment");
  end

endmodule
