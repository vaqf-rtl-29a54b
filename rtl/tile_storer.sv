// tile_storer: writes one finished output tile back to off-chip memory.
//
// It reads the output-tile bank that the compute engine has finished, P_OUT
// tokens per clock, turns each group of Go accumulators (Go = G = 4 for a
// 16-bit output, GQ for a BQ-bit output) into one packed word with
// out_packer, and writes it.  An FC layer stores head row 0 only; a
// multi-head-attention layer stores all NH head rows, so its store takes NH
// times longer:
//   (mha ? NH : 1) * (TMc/Go) * ceil(F/P_OUT) clocks, plus a one- or two-clock
//   pipeline tail.
// When `residual` is set the matching word of the skip-connection tensor
// (same layout, 16-bit) is read in the same clock and added lane by lane in
// the packer.
//
// Output layout (word addresses, this design's own choice):
//   out_base + (hd*F + f) * ceil(M/Go) + m/Go, channels packed along the word.
// Words whose first channel lies past M are not written; lanes past M are 0.
// TMc (TM or TMQ, chosen by the layer's quant_in bit like the compute
// engine) must be a multiple of Go, as the paper requires of T_m and T_m^q.
// Stage 0 reads the bank and issues the skip read; stage 1 packs and writes.
module tile_storer
  import vaqf_pkg::*;
#(
  parameter int NH    = DEF_NH,
  parameter int TM    = DEF_TM,
  parameter int TMQ   = DEF_TMQ,
  parameter int BQ    = DEF_BQ,
  parameter int F_MAX = DEF_F_MAX,
  parameter int P_OUT = DEF_P_OUT,
  parameter int ACC_W = DEF_ACC_W,
  // derived
  parameter int G     = pack_g(ACT_W),
  parameter int GQ    = pack_g(BQ),
  parameter int TMX   = imax(TM, TMQ),
  parameter int HW    = $clog2(NH + 4),
  parameter int FW    = $clog2(F_MAX + 1),
  parameter int JW    = $clog2(TMX + 1),
  parameter int LW    = $clog2(GQ + 1)
) (
  input  logic                                  clk,
  input  logic                                  rst_n,
  input  logic                                  start,
  input  layer_cfg_t                            cfg,
  input  logic [15:0]                           mt,
  output logic                                  busy,
  output logic                                  done,
  // output-tile bank read
  output logic [HW-1:0]                         ob_rd_head,
  output logic [P_OUT-1:0][FW-1:0]              ob_rd_f,
  input  logic [P_OUT-1:0][TMX-1:0][ACC_W-1:0]  ob_rd_data,
  // skip-connection reads
  output logic [P_OUT-1:0]                      skip_rd_en,
  output logic [P_OUT-1:0][ADDR_W-1:0]          skip_rd_addr,
  input  logic [P_OUT-1:0][S_PORT-1:0]          skip_rd_data,
  // off-chip writes
  output logic [P_OUT-1:0]                      out_wr_en,
  output logic [P_OUT-1:0][ADDR_W-1:0]          out_wr_addr,
  output logic [P_OUT-1:0][S_PORT-1:0]          out_wr_data
);
  int unsigned go, tmc, rowo, nheads;
  always_comb begin
    go     = cfg.quant_out ? GQ : G;
    tmc    = cfg.quant_in ? TMQ : TM;
    rowo   = (int'(cfg.m_ch) + go - 1) / go;
    nheads = cfg.mha ? NH : 1;
  end

  logic [15:0]   mt_q;
  logic          sact;
  logic [HW-1:0] shd;
  logic [JW-1:0] sj;
  logic [FW-1:0] sf0;

  // stage 0
  logic [P_OUT-1:0]                     v0;
  logic [P_OUT-1:0][ADDR_W-1:0]         a0;
  logic [P_OUT-1:0][GQ-1:0][ACC_W-1:0]  lanes0;
  logic [LW-1:0]                        nv0;
  always_comb begin
    int unsigned f, m0, idx, rem;
    m0  = int'(mt_q) * tmc + int'(sj) * go;
    rem = (m0 < int'(cfg.m_ch)) ? int'(cfg.m_ch) - m0 : 0;
    nv0 = LW'((rem < go) ? rem : go);
    ob_rd_head = shd;
    for (int j = 0; j < P_OUT; j++) begin
      f = int'(sf0) + j;
      ob_rd_f[j] = FW'(f);
      v0[j] = sact && (f < int'(cfg.f_tok)) && (m0 < int'(cfg.m_ch));
      a0[j] = ADDR_W'((int'(shd) * int'(cfg.f_tok) + f) * rowo + m0 / go);
      skip_rd_en[j]   = v0[j] && cfg.residual;
      skip_rd_addr[j] = cfg.skip_base + a0[j];
      for (int l = 0; l < GQ; l++) begin
        idx = int'(sj) * go + l;
        lanes0[j][l] = (idx < TMX) ? ob_rd_data[j][idx] : '0;
      end
    end
  end

  // stage 1
  logic [P_OUT-1:0]                     v1;
  logic [P_OUT-1:0][ADDR_W-1:0]         a1;
  logic [P_OUT-1:0][GQ-1:0][ACC_W-1:0]  lanes1;
  logic [LW-1:0]                        nv1;

  for (genvar j = 0; j < P_OUT; j++) begin : g_pack
    out_packer #(.BQ(BQ), .ACC_W(ACC_W)) u_pack (
      .acc(lanes1[j]), .nvalid(nv1), .quant_out(cfg.quant_out), .residual(cfg.residual),
      .shift(cfg.shift), .skip(skip_rd_data[j]), .word(out_wr_data[j]));
  end
  assign out_wr_en = v1;
  always_comb
    for (int j = 0; j < P_OUT; j++) out_wr_addr[j] = cfg.out_base + a1[j];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; mt_q <= '0; sact <= 1'b0;
      shd <= '0; sj <= '0; sf0 <= '0;
      v1 <= '0; a1 <= '0; lanes1 <= '0; nv1 <= '0;
    end else begin
      done <= 1'b0;
      v1 <= v0; a1 <= a0; lanes1 <= lanes0; nv1 <= nv0;
      if (start && !busy) begin
        busy <= 1'b1; mt_q <= mt; sact <= 1'b1;
        shd <= '0; sj <= '0; sf0 <= '0;
      end else if (busy) begin
        if (sact) begin
          if (int'(sf0) + P_OUT >= int'(cfg.f_tok)) begin
            sf0 <= '0;
            if (int'(sj) + 1 >= int'(tmc / go)) begin
              sj <= '0;
              if (int'(shd) + 1 >= int'(nheads)) sact <= 1'b0;
              else shd <= shd + 1'b1;
            end else sj <= sj + 1'b1;
          end else sf0 <= sf0 + FW'(P_OUT);
        end else if (v1 == '0) begin
          busy <= 1'b0; done <= 1'b1;
        end
      end
    end
  end
endmodule
