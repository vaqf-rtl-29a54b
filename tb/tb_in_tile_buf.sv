// tb_in_tile_buf: writes random packed words into both slots of the input
// tile buffer in both formats (16-bit: 64-bit segments; 8-bit: GQ*BQ-bit
// segments) and reads every entry back through the P_H-head read port,
// comparing with a shadow copy kept by the testbench.  Reduced size:
// NH = 3, PH = 2 (so the last head group is partial), TN = 8, F = 5.
module tb_in_tile_buf;
  localparam int NH = 3, PH = 2, TN = 8, BQ = 8, F_MAX = 5, P_IN = 2;
  localparam int IN_W = 128, HW = 3, FW = 3, SW = 1;
  logic clk = 1'b0;
  logic [P_IN-1:0] wr_en; logic wr_slot, wr_quant; logic [HW-1:0] wr_head; logic [SW-1:0] wr_seg;
  logic [P_IN-1:0][FW-1:0] wr_f; logic [P_IN-1:0][63:0] wr_data;
  logic rd_slot; logic [HW-1:0] rd_th; logic [FW-1:0] rd_f; logic [PH-1:0][IN_W-1:0] rd_data;
  int checks = 0, failures = 0;
  logic [IN_W-1:0] shadow [2][NH][F_MAX];
  in_tile_buf #(.NH(NH), .PH(PH), .TN(TN), .BQ(BQ), .F_MAX(F_MAX), .P_IN(P_IN)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    wr_en = '0;
    for (int round = 0; round < 4; round++) begin
      // fill every entry of both slots, one format per round
      for (int s = 0; s < 2; s++)
        for (int h = 0; h < NH; h++)
          for (int k = 0; k < 2; k++)
            for (int f0 = 0; f0 < F_MAX; f0 += P_IN) begin
              @(negedge clk);
              wr_slot = 1'(s); wr_quant = 1'(round % 2); wr_head = HW'(h); wr_seg = SW'(k);
              for (int j = 0; j < P_IN; j++) begin
                wr_en[j] = (f0 + j < F_MAX);
                wr_f[j] = FW'(f0 + j);
                wr_data[j] = {$urandom, $urandom};
                if (f0 + j < F_MAX) shadow[s][h][f0 + j][k*64 +: 64] = wr_data[j]; // 64 = GQ*BQ too
              end
            end
      @(negedge clk) wr_en = '0;
      for (int s = 0; s < 2; s++)
        for (int th = 0; th < NH; th += PH)
          for (int f = 0; f < F_MAX; f++) begin
            rd_slot = 1'(s); rd_th = HW'(th); rd_f = FW'(f);
            #1;
            for (int h = 0; h < PH; h++) begin
              logic [IN_W-1:0] e;
              e = (th + h < NH) ? shadow[s][th + h][f] : '0;
              checks++;
              if (rd_data[h] !== e) begin
                failures++;
                if (failures < 5) $display("FAIL s=%0d h=%0d f=%0d", s, th + h, f);
              end
            end
          end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
