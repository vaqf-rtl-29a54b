// in_tile_buf: double-buffered input-tile memory.
//
// Holds one input tile per slot: NH head groups x F tokens, each entry the
// TN unquantized 16-bit activations (or TNQ quantized BQ-bit activations) of
// one head group and one token.  Both formats share the same storage, so an
// entry is max(TN*16, TNQ*BQ) bits wide; because TNQ = TN*GQ/G this is
// normally exactly TN*16 bits, which is the point of the TN/TNQ rule.  One
// slot is filled by the tile loader while the compute engine reads the other
// (double buffering).
//
// Write side: P_IN ports, all for the same slot, head and word segment but
// different tokens; each writes one 64-bit memory word, unpacked in place
// (segment k of an unquantized entry is bits [64k +: 64], of a quantized one
// bits [GQ*BQ*k +: GQ*BQ]).  Read side: P_H heads t_h..t_h+PH-1 of one token,
// combinational (asynchronous) read; heads beyond NH read as zero.
module in_tile_buf #(
  parameter int NH    = vaqf_pkg::DEF_NH,
  parameter int PH    = vaqf_pkg::DEF_PH,
  parameter int TN    = vaqf_pkg::DEF_TN,
  parameter int BQ    = vaqf_pkg::DEF_BQ,
  parameter int F_MAX = vaqf_pkg::DEF_F_MAX,
  parameter int P_IN  = vaqf_pkg::DEF_P_IN,
  // derived
  parameter int G     = vaqf_pkg::pack_g(vaqf_pkg::ACT_W),
  parameter int GQ    = vaqf_pkg::pack_g(BQ),
  parameter int TNQ   = TN * GQ / G,
  parameter int IN_W  = vaqf_pkg::imax(TN * 16, TNQ * BQ),
  parameter int HW    = $clog2(NH + PH),
  parameter int FW    = $clog2(F_MAX + 1),
  parameter int SW    = $clog2(vaqf_pkg::imax(TN / G, 2))
) (
  input  logic                          clk,
  // write (tile loader)
  input  logic [P_IN-1:0]               wr_en,
  input  logic                          wr_slot,
  input  logic                          wr_quant,
  input  logic [HW-1:0]                 wr_head,
  input  logic [SW-1:0]                 wr_seg,
  input  logic [P_IN-1:0][FW-1:0]       wr_f,
  input  logic [P_IN-1:0][vaqf_pkg::S_PORT-1:0] wr_data,
  // read (compute engine)
  input  logic                          rd_slot,
  input  logic [HW-1:0]                 rd_th,
  input  logic [FW-1:0]                 rd_f,
  output logic [PH-1:0][IN_W-1:0]       rd_data
);
  logic [IN_W-1:0] mem [2][NH][F_MAX];

  always_ff @(posedge clk) begin
    for (int j = 0; j < P_IN; j++) begin
      if (wr_en[j] && int'(wr_head) < NH && int'(wr_f[j]) < F_MAX) begin
        if (wr_quant)
          mem[wr_slot][wr_head][wr_f[j]][int'(wr_seg)*GQ*BQ +: GQ*BQ] <= wr_data[j][GQ*BQ-1:0];
        else
          mem[wr_slot][wr_head][wr_f[j]][int'(wr_seg)*64 +: 64] <= wr_data[j];
      end
    end
  end

  always_comb begin
    for (int h = 0; h < PH; h++) begin
      if (int'(rd_th) + h < NH && int'(rd_f) < F_MAX)
        rd_data[h] = mem[rd_slot][int'(rd_th) + h][rd_f];
      else
        rd_data[h] = '0;
    end
  end
endmodule
