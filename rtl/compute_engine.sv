// compute_engine: the shared matrix-multiplication engine for FC and
// multi-head-attention layers.
//
// For one group of tiles (an input tile and a weight tile already in their
// buffers) it walks the tokens f = 0..F-1 and, for each, the head groups
// t_h = 0, PH, 2*PH, ... < NH, one (f, t_h) pair per clock (the pipelined
// loop L1 with II = 1).  Within a clock the loops over output channels
// (L2), parallel heads (L3) and input channels (L4) are fully unrolled:
//   * unquantized layer (quant = 0): TM x PH dot_dsp lanes, each TN 16x16
//     multiplies (TM*PH*TN DSP MACs per clock);
//   * quantized layer (quant = 1): TMQ x PH dot_lut lanes, each TNQ
//     add/subtracts with binary weights (TMQ*PH*TNQ LUT operations).
// The `mha` control signal decides what happens to the PH head results: in
// an attention layer each is accumulated into its own head row of the output
// tile; in an FC layer they are added together (the head groups are just a
// split of the input channels) and accumulated into row 0.  `first` marks
// the first input-channel tile of an output tile, whose results overwrite
// the accumulators instead of adding to them.
//
// Timing: `start` (one clock) -> busy for exactly F*ceil(NH/PH) clocks ->
// `done` pulses in the clock after the last accumulation.  Buffer reads are
// combinational and the accumulation is the output buffer's registered
// write, so there is no pipeline fill.  The loop order, unrolling and the two
// arithmetic paths follow the paper; the start/done handshake is this
// design's own.
module compute_engine #(
  parameter int NH    = vaqf_pkg::DEF_NH,
  parameter int PH    = vaqf_pkg::DEF_PH,
  parameter int TN    = vaqf_pkg::DEF_TN,
  parameter int TM    = vaqf_pkg::DEF_TM,
  parameter int TMQ   = vaqf_pkg::DEF_TMQ,
  parameter int BQ    = vaqf_pkg::DEF_BQ,
  parameter int F_MAX = vaqf_pkg::DEF_F_MAX,
  parameter int ACC_W = vaqf_pkg::DEF_ACC_W,
  // derived
  parameter int G     = vaqf_pkg::pack_g(vaqf_pkg::ACT_W),
  parameter int GQ    = vaqf_pkg::pack_g(BQ),
  parameter int TNQ   = TN * GQ / G,
  parameter int TMX   = vaqf_pkg::imax(TM, TMQ),
  parameter int IN_W  = vaqf_pkg::imax(TN * 16, TNQ * BQ),
  parameter int WG_W  = vaqf_pkg::imax(TN * 16, TNQ),
  parameter int HW    = $clog2(NH + PH),
  parameter int FW    = $clog2(F_MAX + 1)
) (
  input  logic                                clk,
  input  logic                                rst_n,
  input  logic                                start,
  input  logic [8:0]                          f_tok,
  input  logic                                quant,
  input  logic                                mha,
  input  logic                                first,
  output logic                                busy,
  output logic                                done,
  // input-tile read
  output logic [HW-1:0]                       in_rd_th,
  output logic [FW-1:0]                       in_rd_f,
  input  logic [PH-1:0][IN_W-1:0]             in_rd_data,
  // weight-tile read
  output logic [HW-1:0]                       wgt_rd_th,
  input  logic [PH-1:0][TMX-1:0][WG_W-1:0]    wgt_rd_data,
  // output-tile accumulate
  output logic [PH-1:0]                       acc_en,
  output logic [PH-1:0][HW-1:0]               acc_head,
  output logic [FW-1:0]                       acc_f,
  output logic                                acc_first,
  output logic [PH-1:0][TMX-1:0][ACC_W-1:0]   acc_val
);
  logic [FW-1:0] f_q;
  logic [HW-1:0] th_q;
  logic          first_q, quant_q, mha_q;
  logic [8:0]    ftok_q;

  // loop counters: f outer, t_h inner
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; f_q <= '0; th_q <= '0;
      first_q <= 1'b0; quant_q <= 1'b0; mha_q <= 1'b0; ftok_q <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy <= 1'b1; f_q <= '0; th_q <= '0;
        first_q <= first; quant_q <= quant; mha_q <= mha; ftok_q <= f_tok;
      end else if (busy) begin
        if (int'(th_q) + PH >= NH) begin
          th_q <= '0;
          if (int'(f_q) + 1 >= int'(ftok_q)) begin
            busy <= 1'b0; done <= 1'b1;
          end else begin
            f_q <= f_q + 1'b1;
          end
        end else begin
          th_q <= th_q + HW'(PH);
        end
      end
    end
  end

  assign in_rd_th  = th_q;
  assign in_rd_f   = f_q;
  assign wgt_rd_th = th_q;

  // unrolled MAC lanes
  logic [PH-1:0][TMX-1:0][ACC_W-1:0] ps_dsp, ps_lut, psum;
  for (genvar h = 0; h < PH; h++) begin : g_h
    for (genvar m = 0; m < TMX; m++) begin : g_m
      if (m < TM) begin : g_dsp
        dot_dsp #(.TN(TN), .ACC_W(ACC_W)) u_dsp (
          .act(in_rd_data[h][TN*16-1:0]), .wgt(wgt_rd_data[h][m][TN*16-1:0]), .sum(ps_dsp[h][m]));
      end else begin : g_nodsp
        assign ps_dsp[h][m] = '0;
      end
      if (m < TMQ) begin : g_lut
        dot_lut #(.TNQ(TNQ), .BQ(BQ), .ACC_W(ACC_W)) u_lut (
          .act(in_rd_data[h][TNQ*BQ-1:0]), .wbit(wgt_rd_data[h][m][TNQ-1:0]), .sum(ps_lut[h][m]));
      end else begin : g_nolut
        assign ps_lut[h][m] = '0;
      end
      // heads past NH (when PH does not divide NH) contribute nothing
      assign psum[h][m] = (int'(th_q) + h < NH) ? (quant_q ? ps_lut[h][m] : ps_dsp[h][m]) : '0;
    end
  end

  // head handling: keep apart (attention) or reduce (FC)
  always_comb begin
    logic [ACC_W-1:0] s;
    s         = '0;
    acc_f     = f_q;
    acc_first = mha_q ? first_q : (first_q && th_q == '0);
    acc_val   = '0;
    acc_en    = '0;
    acc_head  = '0;
    if (mha_q) begin
      for (int h = 0; h < PH; h++) begin
        acc_en[h]   = busy && (int'(th_q) + h < NH);
        acc_head[h] = th_q + HW'(h);
        acc_val[h]  = psum[h];
      end
    end else begin
      acc_en[0] = busy;
      for (int m = 0; m < TMX; m++) begin
        s = '0;
        for (int h = 0; h < PH; h++) s += psum[h][m];
        acc_val[0][m] = s;
      end
    end
  end
endmodule
