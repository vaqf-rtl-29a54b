// vaqf_top: binary-weight / low-bit-activation ViT layer accelerator.
//
// Executes one matrix-multiplication layer of a vision transformer per
// `start`: the patch-embedding convolution (run as an FC layer), the Q/K/V,
// projection and MLP FC layers, and the per-head attention products.  The
// same compute engine serves unquantized layers (16-bit fixed point on
// TM*PH*TN multipliers) and quantized layers (BQ-bit activations with +-1
// weights on TMQ*PH*TNQ adders/subtractors), chosen per layer by
// cfg.quant_in.  Data moves between off-chip memory and three double-buffered
// tile memories through packed S_PORT-bit words: P_IN input read ports,
// P_WGT weight read ports, P_OUT output write ports and P_OUT skip-connection
// read ports.  All memory read ports return data one clock after the request.
// Softmax, scaling, GELU and layer normalization are left to the host; their
// tensors are ordinary off-chip data here.
//
// Structure: vaqf_ctrl schedules; tile_loader fills in_tile_buf and
// wgt_tile_buf; compute_engine accumulates into out_tile_buf; tile_storer
// packs (out_packer) and writes back.  The default parameters give the W1A8
// configuration with 12 heads, 4 in parallel, TN = 16, TM = TMQ = 24,
// TNQ = 32 and tiles of up to 197 tokens.
module vaqf_top
  import vaqf_pkg::*;
#(
  parameter int NH    = DEF_NH,
  parameter int PH    = DEF_PH,
  parameter int TN    = DEF_TN,
  parameter int TM    = DEF_TM,
  parameter int TMQ   = DEF_TMQ,
  parameter int BQ    = DEF_BQ,
  parameter int F_MAX = DEF_F_MAX,
  parameter int P_IN  = DEF_P_IN,
  parameter int P_WGT = DEF_P_WGT,
  parameter int P_OUT = DEF_P_OUT,
  parameter int ACC_W = DEF_ACC_W
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           start,
  input  layer_cfg_t                     cfg,
  output logic                           busy,
  output logic                           done,
  output logic [P_IN-1:0]                in_rd_en,
  output logic [P_IN-1:0][ADDR_W-1:0]    in_rd_addr,
  input  logic [P_IN-1:0][S_PORT-1:0]    in_rd_data,
  output logic [P_WGT-1:0]               wgt_rd_en,
  output logic [P_WGT-1:0][ADDR_W-1:0]   wgt_rd_addr,
  input  logic [P_WGT-1:0][S_PORT-1:0]   wgt_rd_data,
  output logic [P_OUT-1:0]               skip_rd_en,
  output logic [P_OUT-1:0][ADDR_W-1:0]   skip_rd_addr,
  input  logic [P_OUT-1:0][S_PORT-1:0]   skip_rd_data,
  output logic [P_OUT-1:0]               out_wr_en,
  output logic [P_OUT-1:0][ADDR_W-1:0]   out_wr_addr,
  output logic [P_OUT-1:0][S_PORT-1:0]   out_wr_data,
  output logic [31:0]                    n_overlap,
  output logic [31:0]                    n_st_overlap,
  output logic [31:0]                    n_ld_stall,
  output logic [31:0]                    n_bank_stall
);
  localparam int G    = pack_g(ACT_W);
  localparam int GQ   = pack_g(BQ);
  localparam int TNQ  = TN * GQ / G;
  localparam int TMX  = imax(TM, TMQ);
  localparam int IN_W = imax(TN * 16, TNQ * BQ);
  localparam int WG_W = imax(TN * 16, TNQ);
  localparam int HW   = $clog2(NH + PH);
  localparam int FW   = $clog2(F_MAX + 1);
  localparam int MW   = $clog2(TMX + 1);
  localparam int SW   = $clog2(imax(TN / G, 2));

  // controller <-> units
  logic        ld_start, ld_slot, ld_done, ld_busy;
  logic [15:0] ld_mt, ld_kt, st_mt;
  logic        ce_start, ce_slot, ce_bank, ce_first, ce_done, ce_busy;
  logic        st_start, st_bank, st_done, st_busy;

  vaqf_ctrl #(.NH(NH), .TN(TN), .TM(TM), .TMQ(TMQ), .BQ(BQ)) u_ctrl (
    .clk, .rst_n, .start, .cfg, .busy, .done,
    .ld_start, .ld_slot, .ld_mt, .ld_kt, .ld_done,
    .ce_start, .ce_slot, .ce_bank, .ce_first, .ce_done,
    .st_start, .st_bank, .st_mt, .st_done,
    .n_overlap, .n_st_overlap, .n_ld_stall, .n_bank_stall);

  // loader -> buffers
  logic [P_IN-1:0]               ib_wr_en;
  logic [HW-1:0]                 ib_wr_head, wb_wr_head;
  logic [SW-1:0]                 ib_wr_seg, wb_wr_seg;
  logic [P_IN-1:0][FW-1:0]       ib_wr_f;
  logic [P_IN-1:0][S_PORT-1:0]   ib_wr_data;
  logic [P_WGT-1:0]              wb_wr_en;
  logic [P_WGT-1:0][MW-1:0]      wb_wr_m;
  logic [P_WGT-1:0][S_PORT-1:0]  wb_wr_data;

  tile_loader #(.NH(NH), .TN(TN), .TM(TM), .TMQ(TMQ), .BQ(BQ), .F_MAX(F_MAX),
                .P_IN(P_IN), .P_WGT(P_WGT), .HW(HW)) u_loader (
    .clk, .rst_n, .start(ld_start), .cfg, .mt(ld_mt), .kt(ld_kt), .busy(ld_busy), .done(ld_done),
    .in_rd_en, .in_rd_addr, .in_rd_data, .wgt_rd_en, .wgt_rd_addr, .wgt_rd_data,
    .ib_wr_en, .ib_wr_head, .ib_wr_seg, .ib_wr_f, .ib_wr_data,
    .wb_wr_en, .wb_wr_head, .wb_wr_seg, .wb_wr_m, .wb_wr_data);

  // engine <-> buffers
  logic [HW-1:0]                       in_rd_th, wgt_rd_th;
  logic [FW-1:0]                       in_rd_f, acc_f;
  logic [PH-1:0][IN_W-1:0]             ib_rd_data;
  logic [PH-1:0][TMX-1:0][WG_W-1:0]    wb_rd_data;
  logic [PH-1:0]                       acc_en;
  logic [PH-1:0][HW-1:0]               acc_head;
  logic                                acc_first;
  logic [PH-1:0][TMX-1:0][ACC_W-1:0]   acc_val;

  in_tile_buf #(.NH(NH), .PH(PH), .TN(TN), .BQ(BQ), .F_MAX(F_MAX), .P_IN(P_IN)) u_ibuf (
    .clk, .wr_en(ib_wr_en), .wr_slot(ld_slot), .wr_quant(cfg.quant_in), .wr_head(ib_wr_head),
    .wr_seg(ib_wr_seg), .wr_f(ib_wr_f), .wr_data(ib_wr_data),
    .rd_slot(ce_slot), .rd_th(in_rd_th), .rd_f(in_rd_f), .rd_data(ib_rd_data));

  wgt_tile_buf #(.NH(NH), .PH(PH), .TN(TN), .TM(TM), .TMQ(TMQ), .BQ(BQ), .P_WGT(P_WGT)) u_wbuf (
    .clk, .wr_en(wb_wr_en), .wr_slot(ld_slot), .wr_quant(cfg.quant_in), .wr_head(wb_wr_head),
    .wr_seg(wb_wr_seg), .wr_m(wb_wr_m), .wr_data(wb_wr_data),
    .rd_slot(ce_slot), .rd_th(wgt_rd_th), .rd_data(wb_rd_data));

  compute_engine #(.NH(NH), .PH(PH), .TN(TN), .TM(TM), .TMQ(TMQ), .BQ(BQ), .F_MAX(F_MAX),
                   .ACC_W(ACC_W)) u_engine (
    .clk, .rst_n, .start(ce_start), .f_tok(cfg.f_tok), .quant(cfg.quant_in), .mha(cfg.mha),
    .first(ce_first), .busy(ce_busy), .done(ce_done),
    .in_rd_th, .in_rd_f, .in_rd_data(ib_rd_data), .wgt_rd_th, .wgt_rd_data(wb_rd_data),
    .acc_en, .acc_head, .acc_f, .acc_first, .acc_val);

  logic [HW-1:0]                        ob_rd_head;
  logic [P_OUT-1:0][FW-1:0]             ob_rd_f;
  logic [P_OUT-1:0][TMX-1:0][ACC_W-1:0] ob_rd_data;

  out_tile_buf #(.NH(NH), .PH(PH), .TM(TM), .TMQ(TMQ), .F_MAX(F_MAX), .P_OUT(P_OUT),
                 .ACC_W(ACC_W)) u_obuf (
    .clk, .acc_en, .acc_bank(ce_bank), .acc_head, .acc_f, .acc_first, .acc_val,
    .rd_bank(st_bank), .rd_head(ob_rd_head), .rd_f(ob_rd_f), .rd_data(ob_rd_data));

  tile_storer #(.NH(NH), .TM(TM), .TMQ(TMQ), .BQ(BQ), .F_MAX(F_MAX), .P_OUT(P_OUT),
                .ACC_W(ACC_W), .HW(HW)) u_storer (
    .clk, .rst_n, .start(st_start), .cfg, .mt(st_mt), .busy(st_busy), .done(st_done),
    .ob_rd_head, .ob_rd_f, .ob_rd_data, .skip_rd_en, .skip_rd_addr, .skip_rd_data,
    .out_wr_en, .out_wr_addr, .out_wr_data);

  // configuration rules the tiling relies on
  always_ff @(posedge clk) begin
    if (start && !busy) begin
      a_cfg_n: assert ((int'(cfg.n_ch) % (NH * (cfg.quant_in ? TNQ : TN))) == 0)
        else $error("N must be a multiple of NH*TN (NH*TNQ when quantized)");
      a_cfg_f: assert (cfg.f_tok != 0 && int'(cfg.f_tok) <= F_MAX)
        else $error("F out of range");
      a_cfg_conv: assert (!cfg.conv || !cfg.quant_in)
        else $error("the patch-embedding layer is unquantized");
    end
  end
endmodule
