// dot_dsp: the unquantized ("DSP") multiply-accumulate lane of the compute
// engine.
//
// For one output channel m and one head h it multiplies TN signed 16-bit
// activations by TN signed 16-bit weights and returns the sum of the
// products, i.e. the inner loop L4 of the tiled loop nest fully unrolled
// ("o += w * i").  On an FPGA each product maps to one DSP slice.  The
// module is purely combinational; the compute engine registers the result
// into the output-tile accumulators, giving one result per clock.  Lane k of
// a packed vector occupies bits [16k +: 16].  The adder tree and the wrapping
// ACC_W-bit result are this design's choices.
module dot_dsp #(
  parameter int TN    = vaqf_pkg::DEF_TN,
  parameter int ACC_W = vaqf_pkg::DEF_ACC_W
) (
  input  logic [TN*16-1:0]   act,
  input  logic [TN*16-1:0]   wgt,
  output logic [ACC_W-1:0]   sum
);
  always_comb begin
    logic signed [ACC_W-1:0] s;
    s = '0;
    for (int k = 0; k < TN; k++) begin
      s += ACC_W'($signed(act[k*16 +: 16]) * $signed(wgt[k*16 +: 16]));
    end
    sum = s;
  end
endmodule
