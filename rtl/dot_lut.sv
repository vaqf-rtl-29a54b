// dot_lut: the quantized ("LUT") lane of the compute engine.
//
// With binary weights a multiply is either an addition or a subtraction: for
// one output channel and one head this lane adds each of TNQ signed BQ-bit
// activations whose weight bit is 1 (+1) and subtracts those whose weight bit
// is 0 (-1), then sums the results.  On an FPGA this needs only LUT logic, no
// DSP slices.  The weight-bit encoding (1 = +1) follows the sign rule of the
// binarization; the binary scale factor is not applied here but folded into
// the output shift.  Purely combinational; lane k of `act` is bits
// [BQ*k +: BQ].
module dot_lut #(
  parameter int TNQ   = 32,
  parameter int BQ    = vaqf_pkg::DEF_BQ,
  parameter int ACC_W = vaqf_pkg::DEF_ACC_W
) (
  input  logic [TNQ*BQ-1:0]  act,
  input  logic [TNQ-1:0]     wbit,
  output logic [ACC_W-1:0]   sum
);
  always_comb begin
    logic signed [ACC_W-1:0] s;
    logic signed [ACC_W-1:0] a;
    s = '0;
    for (int k = 0; k < TNQ; k++) begin
      a = ACC_W'($signed(act[k*BQ +: BQ]));
      if (wbit[k]) s += a;
      else         s -= a;
    end
    sum = s;
  end
endmodule
