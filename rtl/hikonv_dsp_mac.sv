// hikonv_dsp_mac: the wide multiplier that HiKonv drives, modelled on the
// DSP48E2 slice used in the FPGA evaluation (27-bit and 18-bit multiplier
// inputs, 45-bit addend, one multiply-add per clock).
//
// Each enabled clock it computes  p <= a * b + (acc ? p : c)  with a, b and c
// as signed numbers. `acc` adds the new product onto the previous result;
// HiKonv uses this to sum the packed products of several input channels
// before the result is segmented (channel-wise accumulation in the product
// domain). The slice's pre-adder and pattern detector are not modelled.
//
// Timing: one register stage, the result appears on `p` the clock after the
// operands. Synchronous active-low reset clears `p`.
module hikonv_dsp_mac #(
  parameter int unsigned AW = 27,
  parameter int unsigned BW = 18,
  parameter int unsigned PW = 45
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 ce,
  input  logic                 acc,
  input  logic signed [AW-1:0] a,
  input  logic signed [BW-1:0] b,
  input  logic signed [PW-1:0] c,
  output logic signed [PW-1:0] p
);

  logic signed [PW-1:0] prod;
  assign prod = a * b;

  always_ff @(posedge clk) begin
    if (!rst_n)  p <= '0;
    else if (ce) p <= prod + (acc ? p : c);
  end

endmodule
