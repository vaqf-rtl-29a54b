// wgt_tile_buf: double-buffered weight-tile memory.
//
// Holds one weight tile per slot: NH head groups x TMX output channels, each
// entry the TN 16-bit weights (unquantized layer) or the TNQ 1-bit binary
// weights (quantized layer) of that head group and output channel.  The
// binary weights arrive GQ to a memory word, packed along the input
// channels, so a quantized entry is filled in TNQ/GQ segments of GQ bits.
// The compute engine reads, every cycle, all TMX x PH entries of the heads
// t_h..t_h+PH-1 (combinational read); heads beyond NH read as zero.
// Write side: P_WGT ports for one slot, head and segment, each for its own
// output channel.
module wgt_tile_buf #(
  parameter int NH    = vaqf_pkg::DEF_NH,
  parameter int PH    = vaqf_pkg::DEF_PH,
  parameter int TN    = vaqf_pkg::DEF_TN,
  parameter int TM    = vaqf_pkg::DEF_TM,
  parameter int TMQ   = vaqf_pkg::DEF_TMQ,
  parameter int BQ    = vaqf_pkg::DEF_BQ,
  parameter int P_WGT = vaqf_pkg::DEF_P_WGT,
  // derived
  parameter int G     = vaqf_pkg::pack_g(vaqf_pkg::ACT_W),
  parameter int GQ    = vaqf_pkg::pack_g(BQ),
  parameter int TNQ   = TN * GQ / G,
  parameter int TMX   = vaqf_pkg::imax(TM, TMQ),
  parameter int WG_W  = vaqf_pkg::imax(TN * 16, TNQ),
  parameter int HW    = $clog2(NH + PH),
  parameter int MW    = $clog2(TMX + 1),
  parameter int SW    = $clog2(vaqf_pkg::imax(TN / G, 2))
) (
  input  logic                          clk,
  input  logic [P_WGT-1:0]              wr_en,
  input  logic                          wr_slot,
  input  logic                          wr_quant,
  input  logic [HW-1:0]                 wr_head,
  input  logic [SW-1:0]                 wr_seg,
  input  logic [P_WGT-1:0][MW-1:0]      wr_m,
  input  logic [P_WGT-1:0][vaqf_pkg::S_PORT-1:0] wr_data,
  input  logic                          rd_slot,
  input  logic [HW-1:0]                 rd_th,
  output logic [PH-1:0][TMX-1:0][WG_W-1:0] rd_data
);
  logic [WG_W-1:0] mem [2][NH][TMX];

  always_ff @(posedge clk) begin
    for (int j = 0; j < P_WGT; j++) begin
      if (wr_en[j] && int'(wr_head) < NH && int'(wr_m[j]) < TMX) begin
        if (wr_quant)
          mem[wr_slot][wr_head][wr_m[j]][int'(wr_seg)*GQ +: GQ] <= wr_data[j][GQ-1:0];
        else
          mem[wr_slot][wr_head][wr_m[j]][int'(wr_seg)*64 +: 64] <= wr_data[j];
      end
    end
  end

  always_comb begin
    for (int h = 0; h < PH; h++)
      for (int m = 0; m < TMX; m++)
        rd_data[h][m] = (int'(rd_th) + h < NH) ? mem[rd_slot][int'(rd_th) + h][m] : '0;
  end
endmodule
