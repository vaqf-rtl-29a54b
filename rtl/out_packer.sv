// out_packer: output requantization and data packing.
//
// Converts up to GQ accumulators of one output word into one S_PORT-bit
// memory word.  Every accumulator is shifted right arithmetically by
// `shift` (this scale also absorbs the binary-weight scale factor), then
//   * unquantized output (quant_out = 0): optionally added to the matching
//     16-bit lane of the skip-connection word (`residual`), saturated to 16
//     bits, and packed G = S_PORT/16 per word at bits [16l +: 16];
//   * quantized output (quant_out = 1): saturated to BQ bits and packed
//     GQ = floor(S_PORT/BQ) per word at bits [BQ*l +: BQ] (for BQ = 6 the top
//     4 bits stay zero).
// Lanes at or beyond `nvalid` (past the last output channel) are zero.
// Purely combinational.  Packing along the output channels follows the
// paper; the shift-and-saturate requantization and the place of the skip
// addition are this design's own choices.
module out_packer #(
  parameter int BQ    = vaqf_pkg::DEF_BQ,
  parameter int ACC_W = vaqf_pkg::DEF_ACC_W,
  parameter int G     = vaqf_pkg::pack_g(vaqf_pkg::ACT_W),
  parameter int GQ    = vaqf_pkg::pack_g(BQ),
  parameter int LW    = $clog2(GQ + 1)
) (
  input  logic [GQ-1:0][ACC_W-1:0]        acc,
  input  logic [LW-1:0]                   nvalid,
  input  logic                            quant_out,
  input  logic                            residual,
  input  logic [5:0]                      shift,
  input  logic [vaqf_pkg::S_PORT-1:0]     skip,
  output logic [vaqf_pkg::S_PORT-1:0]     word
);
  localparam int EW = ACC_W + 2;
  localparam logic signed [EW-1:0] MAX16 = EW'(32767);
  localparam logic signed [EW-1:0] MIN16 = -EW'(32768);
  localparam logic signed [EW-1:0] MAXQ  = EW'((1 << (BQ - 1)) - 1);
  localparam logic signed [EW-1:0] MINQ  = -EW'(1 << (BQ - 1));

  always_comb begin
    logic signed [EW-1:0] v;
    word = '0;
    for (int l = 0; l < GQ; l++) begin
      v = EW'($signed(acc[l]) >>> shift);
      if (!quant_out) begin
        if (l < G && l < int'(nvalid)) begin
          if (residual) v = v + EW'($signed(skip[l*16 +: 16]));
          if (v > MAX16) v = MAX16;
          if (v < MIN16) v = MIN16;
          word[l*16 +: 16] = v[15:0];
        end
      end else begin
        if (l < int'(nvalid)) begin
          if (v > MAXQ) v = MAXQ;
          if (v < MINQ) v = MINQ;
          word[l*BQ +: BQ] = v[BQ-1:0];
        end
      end
    end
  end
endmodule
