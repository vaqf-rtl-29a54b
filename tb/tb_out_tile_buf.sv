// tb_out_tile_buf: random accumulate traffic on the PH accumulate ports
// (overwrite on `acc_first`, add otherwise, repeated hits on one entry in
// consecutive clocks) into both banks, then reads every entry through the
// P_OUT read ports and compares with a shadow model.  Reduced size: NH = 4,
// PH = 2, TM = TMQ = 3, F = 6.
module tb_out_tile_buf;
  localparam int NH = 4, PH = 2, TM = 3, TMQ = 3, F_MAX = 6, P_OUT = 2, ACC_W = 32;
  localparam int TMX = 3, HW = 3, FW = 3;
  logic clk = 1'b0;
  logic [PH-1:0] acc_en; logic acc_bank; logic [PH-1:0][HW-1:0] acc_head; logic [FW-1:0] acc_f;
  logic acc_first; logic [PH-1:0][TMX-1:0][ACC_W-1:0] acc_val;
  logic rd_bank; logic [HW-1:0] rd_head; logic [P_OUT-1:0][FW-1:0] rd_f;
  logic [P_OUT-1:0][TMX-1:0][ACC_W-1:0] rd_data;
  int checks = 0, failures = 0;
  int shadow [2][NH][F_MAX][TMX];
  bit seen [2][NH][F_MAX];
  out_tile_buf #(.NH(NH), .PH(PH), .TM(TM), .TMQ(TMQ), .F_MAX(F_MAX), .P_OUT(P_OUT), .ACC_W(ACC_W)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    acc_en = '0;
    // first pass initialises every entry with acc_first
    for (int b = 0; b < 2; b++)
      for (int h = 0; h < NH; h += PH)
        for (int f = 0; f < F_MAX; f++) begin
          @(negedge clk);
          acc_bank = 1'(b); acc_f = FW'(f); acc_first = 1'b1;
          for (int p = 0; p < PH; p++) begin
            acc_en[p] = 1'b1; acc_head[p] = HW'(h + p);
            for (int m = 0; m < TMX; m++) begin
              acc_val[p][m] = ACC_W'($urandom % 1000);
              shadow[b][h + p][f][m] = int'(acc_val[p][m]);
            end
          end
        end
    // random accumulation, same entry often several clocks in a row
    for (int t = 0; t < 400; t++) begin
      int b, f, h0;
      b = int'($urandom % 2); f = int'($urandom % F_MAX); h0 = int'($urandom % (NH / PH)) * PH;
      repeat (1 + (t % 3)) begin
        @(negedge clk);
        acc_bank = 1'(b); acc_f = FW'(f); acc_first = ((t % 17) == 0);
        for (int p = 0; p < PH; p++) begin
          acc_en[p] = 1'($urandom); acc_head[p] = HW'(h0 + p);
          for (int m = 0; m < TMX; m++) begin
            acc_val[p][m] = ACC_W'(int'($urandom % 2001) - 1000);
            if (acc_en[p])
              shadow[b][h0 + p][f][m] = (acc_first ? 0 : shadow[b][h0 + p][f][m]) + int'($signed(acc_val[p][m]));
          end
        end
      end
    end
    @(negedge clk) acc_en = '0;
    for (int b = 0; b < 2; b++)
      for (int h = 0; h < NH; h++)
        for (int f0 = 0; f0 < F_MAX; f0 += P_OUT) begin
          rd_bank = 1'(b); rd_head = HW'(h);
          for (int j = 0; j < P_OUT; j++) rd_f[j] = FW'(f0 + j);
          #1;
          for (int j = 0; j < P_OUT; j++)
            for (int m = 0; m < TMX; m++) begin
              checks++;
              if ($signed(rd_data[j][m]) !== shadow[b][h][f0 + j][m]) begin
                failures++;
                if (failures < 5) $display("FAIL b=%0d h=%0d f=%0d m=%0d got %0d exp %0d", b, h, f0 + j, m,
                                           $signed(rd_data[j][m]), shadow[b][h][f0 + j][m]);
              end
            end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
