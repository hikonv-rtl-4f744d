// tb_hikonv_pack: self-checking test of the HiKonv input packer.
//
// Drives random operands into four packers (signed and unsigned, 2 operands
// into 18 bits and 3 operands into 27 bits, S = 10) and checks that each
// packed word, read as a signed number, equals sum(elem[n] * 2^(S*n))
// computed here with 64-bit integer arithmetic. Corner cases (all operands
// at the most negative value) are included. Purely combinational DUT; a
// short delay separates the vectors.
module tb_hikonv_pack;

  localparam int S = 10;

  logic [1:0][3:0] e2;
  logic [2:0][3:0] e3;
  logic [17:0] a_s, a_u;
  logic [26:0] b_s, b_u;

  int checks = 0, failures = 0;

  hikonv_pack #(.CNT(2), .EB(4), .S(S), .OUT_W(18), .SIGNED(1'b1)) dut_as (.elem(e2), .packed_o(a_s));
  hikonv_pack #(.CNT(2), .EB(4), .S(S), .OUT_W(18), .SIGNED(1'b0)) dut_au (.elem(e2), .packed_o(a_u));
  hikonv_pack #(.CNT(3), .EB(4), .S(S), .OUT_W(27), .SIGNED(1'b1)) dut_bs (.elem(e3), .packed_o(b_s));
  hikonv_pack #(.CNT(3), .EB(4), .S(S), .OUT_W(27), .SIGNED(1'b0)) dut_bu (.elem(e3), .packed_o(b_u));

  function automatic longint sval(logic [3:0] v);
    return longint'($signed(v));
  endfunction

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  task automatic run_vector();
    longint es2 = 0, eu2 = 0, es3 = 0, eu3 = 0;
    for (int n = 0; n < 2; n++) begin
      es2 += sval(e2[n]) <<< (S * n);
      eu2 += longint'(e2[n]) << (S * n);
    end
    for (int n = 0; n < 3; n++) begin
      es3 += sval(e3[n]) <<< (S * n);
      eu3 += longint'(e3[n]) << (S * n);
    end
    #1;
    check("signed 2x18", longint'($signed(a_s)), es2);
    check("unsigned 2x18", longint'(a_u), eu2);
    check("signed 3x27", longint'($signed(b_s)), es3);
    check("unsigned 3x27", longint'(b_u), eu3);
  endtask

  initial begin
    e2 = '{4'h8, 4'h8}; e3 = '{4'h8, 4'h8, 4'h8}; run_vector();
    e2 = '{4'h7, 4'h8}; e3 = '{4'h7, 4'hF, 4'h8}; run_vector();
    e2 = '{4'h0, 4'hF}; e3 = '{4'h0, 4'h0, 4'hF}; run_vector();
    for (int i = 0; i < 2000; i++) begin
      e2 = {$urandom} % 256;
      e3 = {$urandom} % 4096;
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
