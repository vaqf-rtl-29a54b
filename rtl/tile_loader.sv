// tile_loader: loads one input tile and one weight tile from off-chip memory
// into the free slot of the tile buffers.
//
// Two independent address generators run at the same time, one on the
// P_IN input ports and one on the P_WGT weight ports, so the tile-load time
// is the larger of the two counts
//   input : NH * (TN/G) * ceil(F / P_IN)      clocks
//   weight: NH * (TN/G) * ceil(TMc / P_WGT)  clocks
// (TN/G = TNQ/GQ, so the word count per head is the same for both layer
// kinds).  Each port reads one S_PORT-bit word; the buffers unpack it.
//
// Off-chip layouts (word addresses, this design's own choice, with the
// channels packed along the word as the paper prescribes):
//   activations  in_base  + f * ceil(N/Gc) + c/Gc          (token-major)
//   weights      wgt_base + m * ceil(N/Gc) + c/Gc          (output-channel-major;
//                binary weights GQ per word in bits [GQ-1:0])
//   image (conv) in_base + ((ch*H + y)*W + x) / G, 16-bit pixels, 4 per word,
//                channel-planar; input channel c = ch*P*P + py*P + px of the
//                patch at token f = fy*(W/P) + fx (the patch-embedding
//                convolution executed as an FC layer).
// Gc is G (unquantized layer) or GQ (quantized).  Head group hd covers input
// channels hd*N/NH ...; tile kt takes TNc = TN or TNQ of them.  Weight rows
// past M are written as zeros without a memory read.
//
// Memory ports have a fixed read latency of one clock and no back-pressure.
// Timing: `start` -> busy -> `done` pulse two clocks after the last read.
module tile_loader
  import vaqf_pkg::*;
#(
  parameter int NH    = DEF_NH,
  parameter int TN    = DEF_TN,
  parameter int TM    = DEF_TM,
  parameter int TMQ   = DEF_TMQ,
  parameter int BQ    = DEF_BQ,
  parameter int F_MAX = DEF_F_MAX,
  parameter int P_IN  = DEF_P_IN,
  parameter int P_WGT = DEF_P_WGT,
  // derived
  parameter int G     = pack_g(ACT_W),
  parameter int GQ    = pack_g(BQ),
  parameter int TNQ   = TN * GQ / G,
  parameter int TMX   = imax(TM, TMQ),
  parameter int KW    = TN / G,
  parameter int HW    = $clog2(NH + 4),
  parameter int FW    = $clog2(F_MAX + 1),
  parameter int MW    = $clog2(TMX + 1),
  parameter int SW    = $clog2(imax(TN / G, 2))
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              start,
  input  layer_cfg_t                        cfg,
  input  logic [15:0]                       mt,
  input  logic [15:0]                       kt,
  output logic                              busy,
  output logic                              done,
  // off-chip reads
  output logic [P_IN-1:0]                   in_rd_en,
  output logic [P_IN-1:0][ADDR_W-1:0]       in_rd_addr,
  input  logic [P_IN-1:0][S_PORT-1:0]       in_rd_data,
  output logic [P_WGT-1:0]                  wgt_rd_en,
  output logic [P_WGT-1:0][ADDR_W-1:0]      wgt_rd_addr,
  input  logic [P_WGT-1:0][S_PORT-1:0]      wgt_rd_data,
  // input-tile buffer writes
  output logic [P_IN-1:0]                   ib_wr_en,
  output logic [HW-1:0]                     ib_wr_head,
  output logic [SW-1:0]                     ib_wr_seg,
  output logic [P_IN-1:0][FW-1:0]           ib_wr_f,
  output logic [P_IN-1:0][S_PORT-1:0]       ib_wr_data,
  // weight-tile buffer writes
  output logic [P_WGT-1:0]                  wb_wr_en,
  output logic [HW-1:0]                     wb_wr_head,
  output logic [SW-1:0]                     wb_wr_seg,
  output logic [P_WGT-1:0][MW-1:0]          wb_wr_m,
  output logic [P_WGT-1:0][S_PORT-1:0]      wb_wr_data
);
  // per-layer values
  logic        quant;
  int unsigned gc, tnc, tmc, cph, row;
  always_comb begin
    quant = cfg.quant_in;
    gc    = quant ? GQ : G;
    tnc   = quant ? TNQ : TN;
    tmc   = quant ? TMQ : TM;
    cph   = int'(cfg.n_ch) / NH;
    row   = quant ? (int'(cfg.n_ch) + GQ - 1) / GQ : (int'(cfg.n_ch) + G - 1) / G;
  end

  logic [15:0] mt_q, kt_q;

  // ---------------- input tile ----------------
  logic          iact;
  logic [HW-1:0] ihd;
  logic [SW-1:0] ik;
  logic [FW-1:0] if0;
  logic [P_IN-1:0]         ir_v;
  logic [P_IN-1:0][FW-1:0] ir_f;
  logic [HW-1:0]           ir_hd;
  logic [SW-1:0]           ir_k;

  always_comb begin
    int unsigned c, f, ch, py, px, fy, fx, wpx, pm;
    c  = int'(ihd) * cph + int'(kt_q) * tnc + int'(ik) * gc;
    pm = (32'd1 << cfg.patch_lg) - 1;
    for (int j = 0; j < P_IN; j++) begin
      f = int'(if0) + j;
      in_rd_en[j] = iact && (f < int'(cfg.f_tok));
      ch  = c >> (2 * cfg.patch_lg);
      py  = (c >> cfg.patch_lg) & pm;
      px  = c & pm;
      fy  = (cfg.img_wp != 0) ? f / int'(cfg.img_wp) : 0;
      fx  = (cfg.img_wp != 0) ? f % int'(cfg.img_wp) : 0;
      wpx = int'(cfg.img_wp) << cfg.patch_lg;
      in_rd_addr[j] = cfg.conv
        ? cfg.in_base + ADDR_W'(((ch * int'(cfg.img_h) + (fy << cfg.patch_lg) + py) * wpx
                                 + (fx << cfg.patch_lg) + px) / G)
        : cfg.in_base + ADDR_W'(f * row + c / gc);
    end
  end

  // ---------------- weight tile ----------------
  logic          wact;
  logic [HW-1:0] whd;
  logic [SW-1:0] wk;
  logic [MW-1:0] wm0;
  logic [P_WGT-1:0]         wr_v, wr_z, wb_issue, wb_zero;
  logic [P_WGT-1:0][MW-1:0] wr_m;
  logic [HW-1:0]            wr_hd;
  logic [SW-1:0]            wr_k;

  always_comb begin
    int unsigned c, ml, mg;
    c = int'(whd) * cph + int'(kt_q) * tnc + int'(wk) * gc;
    for (int j = 0; j < P_WGT; j++) begin
      ml = int'(wm0) + j;
      mg = int'(mt_q) * tmc + ml;
      wb_issue[j]    = wact && (ml < tmc);
      wb_zero[j]     = mg >= int'(cfg.m_ch);
      wgt_rd_en[j]   = wb_issue[j] && !wb_zero[j];
      wgt_rd_addr[j] = cfg.wgt_base + ADDR_W'(mg * row + c / gc);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; mt_q <= '0; kt_q <= '0;
      iact <= 1'b0; ihd <= '0; ik <= '0; if0 <= '0;
      wact <= 1'b0; whd <= '0; wk <= '0; wm0 <= '0;
      ir_v <= '0; ir_f <= '0; ir_hd <= '0; ir_k <= '0;
      wr_v <= '0; wr_z <= '0; wr_m <= '0; wr_hd <= '0; wr_k <= '0;
    end else begin
      done <= 1'b0;
      // response stage: the word requested last clock arrives now
      for (int j = 0; j < P_IN; j++) begin
        ir_v[j] <= in_rd_en[j];
        ir_f[j] <= FW'(int'(if0) + j);
      end
      ir_hd <= ihd; ir_k <= ik;
      for (int j = 0; j < P_WGT; j++) begin
        wr_v[j] <= wb_issue[j];
        wr_z[j] <= wb_zero[j];
        wr_m[j] <= MW'(int'(wm0) + j);
      end
      wr_hd <= whd; wr_k <= wk;

      if (start && !busy) begin
        busy <= 1'b1; mt_q <= mt; kt_q <= kt;
        iact <= 1'b1; ihd <= '0; ik <= '0; if0 <= '0;
        wact <= 1'b1; whd <= '0; wk <= '0; wm0 <= '0;
      end else if (busy) begin
        if (iact) begin
          if (int'(if0) + P_IN >= int'(cfg.f_tok)) begin
            if0 <= '0;
            if (int'(ik) == KW - 1) begin
              ik <= '0;
              if (int'(ihd) == NH - 1) iact <= 1'b0;
              else ihd <= ihd + 1'b1;
            end else ik <= ik + 1'b1;
          end else if0 <= if0 + FW'(P_IN);
        end
        if (wact) begin
          if (int'(wm0) + P_WGT >= int'(tmc)) begin
            wm0 <= '0;
            if (int'(wk) == KW - 1) begin
              wk <= '0;
              if (int'(whd) == NH - 1) wact <= 1'b0;
              else whd <= whd + 1'b1;
            end else wk <= wk + 1'b1;
          end else wm0 <= wm0 + MW'(P_WGT);
        end
        if (!iact && !wact && ir_v == '0 && wr_v == '0) begin
          busy <= 1'b0; done <= 1'b1;
        end
      end
    end
  end

  assign ib_wr_en   = ir_v;
  assign ib_wr_head = ir_hd;
  assign ib_wr_seg  = ir_k;
  assign ib_wr_f    = ir_f;
  assign ib_wr_data = in_rd_data;
  assign wb_wr_en   = wr_v;
  assign wb_wr_head = wr_hd;
  assign wb_wr_seg  = wr_k;
  assign wb_wr_m    = wr_m;
  always_comb
    for (int j = 0; j < P_WGT; j++) wb_wr_data[j] = wr_z[j] ? '0 : wgt_rd_data[j];
endmodule
