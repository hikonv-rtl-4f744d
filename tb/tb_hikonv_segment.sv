// tb_hikonv_segment: self-checking test of the HiKonv output segmenter.
//
// Builds 45-bit words as sum(y[m] * 2^(10*m)) from four random outputs y[m]
// (signed in [-511, 511], unsigned in [0, 1023]) with 64-bit arithmetic, and
// checks that the segmenter returns exactly those y[m]. Extreme values are
// included. Purely combinational DUT.
module tb_hikonv_segment;

  localparam int S = 10;
  localparam int SEGS = 4;

  logic [44:0] w_s, w_u;
  logic [SEGS-1:0][S:0] y_s, y_u;
  int checks = 0, failures = 0;
  longint ys [SEGS];
  longint yu [SEGS];

  hikonv_segment #(.SEGS(SEGS), .S(S), .IN_W(45), .SIGNED(1'b1)) dut_s (.word(w_s), .y(y_s));
  hikonv_segment #(.SEGS(SEGS), .S(S), .IN_W(45), .SIGNED(1'b0)) dut_u (.word(w_u), .y(y_u));

  task automatic run_vector();
    longint vs = 0, vu = 0;
    for (int m = 0; m < SEGS; m++) begin
      vs += ys[m] <<< (S * m);
      vu += yu[m] << (S * m);
    end
    w_s = 45'(vs);
    w_u = 45'(vu);
    #1;
    for (int m = 0; m < SEGS; m++) begin
      checks += 2;
      if (longint'($signed(y_s[m])) != ys[m]) begin
        failures++;
        $display("FAIL signed y[%0d]: got %0d expected %0d", m, $signed(y_s[m]), ys[m]);
      end
      if (longint'(y_u[m]) != yu[m]) begin
        failures++;
        $display("FAIL unsigned y[%0d]: got %0d expected %0d", m, y_u[m], yu[m]);
      end
    end
  endtask

  initial begin
    for (int m = 0; m < SEGS; m++) begin ys[m] = -511; yu[m] = 1023; end
    run_vector();
    for (int m = 0; m < SEGS; m++) begin ys[m] = (m % 2) ? 511 : -1; yu[m] = 0; end
    run_vector();
    for (int i = 0; i < 3000; i++) begin
      for (int m = 0; m < SEGS; m++) begin
        ys[m] = longint'($urandom % 1023) - 511;
        yu[m] = longint'($urandom % 1024);
      end
      run_vector();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
