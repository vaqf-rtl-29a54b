// tb_wgt_tile_buf: fills both slots of the weight tile buffer with 16-bit
// weight words (64-bit segments) and with binary weights (GQ = 8 bits per
// word, segment k at bits [8k +: 8]) and checks the all-channels read of
// every head group against a shadow copy.  Reduced size: NH = 3, PH = 2,
// TN = 8 (TNQ = 16), TM = 4, TMQ = 6.
module tb_wgt_tile_buf;
  localparam int NH = 3, PH = 2, TN = 8, TM = 4, TMQ = 6, BQ = 8, P_WGT = 2;
  localparam int TMX = 6, WG_W = 128, HW = 3, MW = 3, SW = 1, GQ = 8;
  logic clk = 1'b0;
  logic [P_WGT-1:0] wr_en; logic wr_slot, wr_quant; logic [HW-1:0] wr_head; logic [SW-1:0] wr_seg;
  logic [P_WGT-1:0][MW-1:0] wr_m; logic [P_WGT-1:0][63:0] wr_data;
  logic rd_slot; logic [HW-1:0] rd_th; logic [PH-1:0][TMX-1:0][WG_W-1:0] rd_data;
  int checks = 0, failures = 0;
  logic [WG_W-1:0] shadow [2][NH][TMX];
  wgt_tile_buf #(.NH(NH), .PH(PH), .TN(TN), .TM(TM), .TMQ(TMQ), .BQ(BQ), .P_WGT(P_WGT)) dut (.*);
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
      for (int s = 0; s < 2; s++)
        for (int h = 0; h < NH; h++)
          for (int k = 0; k < 2; k++)
            for (int m0 = 0; m0 < TMX; m0 += P_WGT) begin
              @(negedge clk);
              wr_slot = 1'(s); wr_quant = 1'(round % 2); wr_head = HW'(h); wr_seg = SW'(k);
              for (int j = 0; j < P_WGT; j++) begin
                wr_en[j] = 1'b1;
                wr_m[j] = MW'(m0 + j);
                wr_data[j] = {$urandom, $urandom};
                if (wr_quant) shadow[s][h][m0 + j][k*GQ +: GQ] = wr_data[j][GQ-1:0];
                else          shadow[s][h][m0 + j][k*64 +: 64] = wr_data[j];
              end
            end
      @(negedge clk) wr_en = '0;
      for (int s = 0; s < 2; s++)
        for (int th = 0; th < NH; th += PH) begin
          rd_slot = 1'(s); rd_th = HW'(th);
          #1;
          for (int h = 0; h < PH; h++)
            for (int m = 0; m < TMX; m++) begin
              logic [WG_W-1:0] e;
              e = (th + h < NH) ? shadow[s][th + h][m] : '0;
              checks++;
              if (rd_data[h][m] !== e) begin
                failures++;
                if (failures < 5) $display("FAIL s=%0d h=%0d m=%0d", s, th + h, m);
              end
            end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
