// tb_hikonv_dsp_mac: self-checking test of the 27x18 multiply-add unit.
//
// Applies random signed operands each clock, with the accumulate select
// random, and checks one clock later that p = a*b + c (acc = 0) or
// p = a*b + previous p (acc = 1), computed here in 64-bit arithmetic and
// wrapped to 45 bits. Also checks reset and that a cleared clock enable
// holds p.
module tb_hikonv_dsp_mac;

  logic clk = 0, rst_n = 0, ce = 0, acc = 0;
  logic signed [26:0] a;
  logic signed [17:0] b;
  logic signed [44:0] c, p;
  longint model;
  int checks = 0, failures = 0;

  hikonv_dsp_mac #(.AW(27), .BW(18), .PW(45)) dut (
    .clk(clk), .rst_n(rst_n), .ce(ce), .acc(acc), .a(a), .b(b), .c(c), .p(p)
  );

  always #5 clk = ~clk;

  function automatic longint wrap45(longint v);
    logic signed [44:0] t;
    t = 45'(v);
    return longint'(t);
  endfunction

  initial begin
    a = '0; b = '0; c = '0;
    repeat (2) @(posedge clk);
    #1;
    checks++;
    if (p != 0) begin failures++; $display("FAIL reset"); end
    rst_n = 1;
    model = 0;
    for (int i = 0; i < 3000; i++) begin
      a   = 27'($urandom);
      b   = 18'($urandom);
      c   = 45'({$urandom, $urandom});
      acc = $urandom % 2;
      ce  = ($urandom % 8) != 0;
      if (ce) model = wrap45(longint'(a) * longint'(b) + (acc ? model : longint'(c)));
      @(posedge clk);
      #1;
      checks++;
      if (longint'(p) != model) begin
        failures++;
        $display("FAIL step %0d: p=%0d expected %0d", i, p, model);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
