// out_tile_buf: double-buffered output-tile accumulator memory.
//
// Each of the two banks holds NH x F entries of TMX accumulators
// (ACC_W bits each).  An FC layer uses only head 0, because the head
// results are summed before they arrive; a multi-head-attention layer keeps
// one row per head.  The compute engine drives PH accumulate ports: each
// adds a TMX-lane vector to entry [bank][head][f], or overwrites it when
// `acc_first` marks the first input-channel tile of an output tile.  The
// read is asynchronous and the write lands at the clock edge, so the same
// entry may be accumulated on consecutive cycles.  The store unit reads
// P_OUT entries of the other bank per cycle (combinational read).
module out_tile_buf #(
  parameter int NH    = vaqf_pkg::DEF_NH,
  parameter int PH    = vaqf_pkg::DEF_PH,
  parameter int TM    = vaqf_pkg::DEF_TM,
  parameter int TMQ   = vaqf_pkg::DEF_TMQ,
  parameter int F_MAX = vaqf_pkg::DEF_F_MAX,
  parameter int P_OUT = vaqf_pkg::DEF_P_OUT,
  parameter int ACC_W = vaqf_pkg::DEF_ACC_W,
  parameter int TMX   = vaqf_pkg::imax(TM, TMQ),
  parameter int HW    = $clog2(NH + PH),
  parameter int FW    = $clog2(F_MAX + 1)
) (
  input  logic                                clk,
  // accumulate (compute engine)
  input  logic [PH-1:0]                       acc_en,
  input  logic                                acc_bank,
  input  logic [PH-1:0][HW-1:0]               acc_head,
  input  logic [FW-1:0]                       acc_f,
  input  logic                                acc_first,
  input  logic [PH-1:0][TMX-1:0][ACC_W-1:0]   acc_val,
  // read (store unit)
  input  logic                                rd_bank,
  input  logic [HW-1:0]                       rd_head,
  input  logic [P_OUT-1:0][FW-1:0]            rd_f,
  output logic [P_OUT-1:0][TMX-1:0][ACC_W-1:0] rd_data
);
  logic [TMX-1:0][ACC_W-1:0] mem [2][NH][F_MAX];

  always_ff @(posedge clk) begin
    for (int h = 0; h < PH; h++) begin
      if (acc_en[h] && int'(acc_head[h]) < NH && int'(acc_f) < F_MAX) begin
        for (int m = 0; m < TMX; m++) begin
          mem[acc_bank][acc_head[h]][acc_f][m] <=
            (acc_first ? '0 : mem[acc_bank][acc_head[h]][acc_f][m]) + acc_val[h][m];
        end
      end
    end
  end

  always_comb begin
    for (int j = 0; j < P_OUT; j++)
      rd_data[j] = (int'(rd_head) < NH && int'(rd_f[j]) < F_MAX) ? mem[rd_bank][rd_head][rd_f[j]] : '0;
  end
endmodule
