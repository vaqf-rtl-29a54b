// tb_ddr: behavioural model of the off-chip memory seen by the accelerator.
//
// One array of S_PORT-bit words shared by all ports.  Every read port
// returns the addressed word one clock after its enable (the fixed latency
// the accelerator assumes); write ports store at the clock edge.  Addresses
// wrap at DEPTH.  Testbenches fill and inspect `mem` hierarchically.
module tb_ddr #(
  parameter int P_IN  = 16,
  parameter int P_WGT = 4,
  parameter int P_OUT = 4,
  parameter int DEPTH = 1 << 18
) (
  input  logic                    clk,
  input  logic [P_IN-1:0]         in_rd_en,
  input  logic [P_IN-1:0][31:0]   in_rd_addr,
  output logic [P_IN-1:0][63:0]   in_rd_data,
  input  logic [P_WGT-1:0]        wgt_rd_en,
  input  logic [P_WGT-1:0][31:0]  wgt_rd_addr,
  output logic [P_WGT-1:0][63:0]  wgt_rd_data,
  input  logic [P_OUT-1:0]        skip_rd_en,
  input  logic [P_OUT-1:0][31:0]  skip_rd_addr,
  output logic [P_OUT-1:0][63:0]  skip_rd_data,
  input  logic [P_OUT-1:0]        out_wr_en,
  input  logic [P_OUT-1:0][31:0]  out_wr_addr,
  input  logic [P_OUT-1:0][63:0]  out_wr_data
);
  logic [63:0] mem [DEPTH];
  int unsigned n_reads, n_writes;
  initial begin n_reads = 0; n_writes = 0; end

  always_ff @(posedge clk) begin
    for (int j = 0; j < P_IN; j++)
      if (in_rd_en[j]) begin in_rd_data[j] <= mem[in_rd_addr[j] % DEPTH]; n_reads++; end
    for (int j = 0; j < P_WGT; j++)
      if (wgt_rd_en[j]) begin wgt_rd_data[j] <= mem[wgt_rd_addr[j] % DEPTH]; n_reads++; end
    for (int j = 0; j < P_OUT; j++)
      if (skip_rd_en[j]) begin skip_rd_data[j] <= mem[skip_rd_addr[j] % DEPTH]; n_reads++; end
    for (int j = 0; j < P_OUT; j++)
      if (out_wr_en[j]) begin mem[out_wr_addr[j] % DEPTH] <= out_wr_data[j]; n_writes++; end
  end
endmodule
