// tb_compute_engine: drives the compute engine from behavioural tile
// buffers (arrays read combinationally) and collects its accumulate
// requests into a shadow output tile.  Runs every combination of
// unquantized/quantized and FC/attention, each twice (first = 1 then
// first = 0, so the result must double), and compares with dot products
// computed here.  Uses NH = 5 and PH = 2 so the last head group is partial,
// and checks that each run is busy exactly F*ceil(NH/PH) clocks.
module tb_compute_engine;
  localparam int NH = 5, PH = 2, TN = 8, TM = 4, TMQ = 6, BQ = 8, F_MAX = 7, ACC_W = 32;
  localparam int TNQ = 16, TMX = 6, IN_W = 128, WG_W = 128, HW = 3, FW = 3;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic [8:0] f_tok; logic quant, mha, first, busy, done;
  logic [HW-1:0] in_rd_th, wgt_rd_th; logic [FW-1:0] in_rd_f, acc_f;
  logic [PH-1:0][IN_W-1:0] in_rd_data; logic [PH-1:0][TMX-1:0][WG_W-1:0] wgt_rd_data;
  logic [PH-1:0] acc_en; logic [PH-1:0][HW-1:0] acc_head; logic acc_first;
  logic [PH-1:0][TMX-1:0][ACC_W-1:0] acc_val;
  int checks = 0, failures = 0;
  logic [IN_W-1:0] IN [NH][F_MAX];
  logic [WG_W-1:0] WG [NH][TMX];
  int OUT [NH][F_MAX][TMX];
  int busy_cnt;

  compute_engine #(.NH(NH), .PH(PH), .TN(TN), .TM(TM), .TMQ(TMQ), .BQ(BQ), .F_MAX(F_MAX), .ACC_W(ACC_W)) dut (.*);
  always #5 clk = ~clk;

  // behavioural buffers
  always_comb
    for (int h = 0; h < PH; h++) begin
      in_rd_data[h] = (int'(in_rd_th) + h < NH) ? IN[int'(in_rd_th) + h][in_rd_f] : '0;
      for (int m = 0; m < TMX; m++)
        wgt_rd_data[h][m] = (int'(wgt_rd_th) + h < NH) ? WG[int'(wgt_rd_th) + h][m] : '0;
    end
  always @(posedge clk) begin
    if (busy) busy_cnt++;
    for (int p = 0; p < PH; p++)
      if (acc_en[p])
        for (int m = 0; m < TMX; m++)
          OUT[acc_head[p]][acc_f][m] = (acc_first ? 0 : OUT[acc_head[p]][acc_f][m]) + int'($signed(acc_val[p][m]));
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int dot(int h, int f, int m, bit q);
    int s = 0;
    if (!q) begin
      if (m >= TM) return 0;
      for (int k = 0; k < TN; k++) s += int'($signed(IN[h][f][k*16 +: 16])) * int'($signed(WG[h][m][k*16 +: 16]));
    end else begin
      if (m >= TMQ) return 0;
      for (int k = 0; k < TNQ; k++) s += WG[h][m][k] ? int'($signed(IN[h][f][k*8 +: 8])) : -int'($signed(IN[h][f][k*8 +: 8]));
    end
    return s;
  endfunction

  task automatic go(bit q, bit a, bit fst, int ft);
    quant = q; mha = a; first = fst; f_tok = 9'(ft);
    busy_cnt = 0;
    @(negedge clk) start = 1'b1;
    @(negedge clk) start = 1'b0;
    wait (done);
    @(negedge clk);
    checks++;
    if (busy_cnt != ft * ((NH + PH - 1) / PH)) begin
      failures++; $display("FAIL busy %0d clocks, expected %0d", busy_cnt, ft * ((NH + PH - 1) / PH));
    end
  endtask

  initial begin
    quant = 0; mha = 0; first = 0; f_tok = 9'(F_MAX);
    repeat (2) @(negedge clk); rst_n = 1'b1;
    for (int mode = 0; mode < 4; mode++) begin
      bit q, a;
      q = mode[0]; a = mode[1];
      for (int h = 0; h < NH; h++) begin
        for (int f = 0; f < F_MAX; f++)
          for (int k = 0; k < IN_W / 16; k++) IN[h][f][k*16 +: 16] = 16'(int'($urandom % 1001) - 500);
        for (int m = 0; m < TMX; m++)
          for (int k = 0; k < WG_W / 16; k++) WG[h][m][k*16 +: 16] = 16'(int'($urandom % 1001) - 500);
      end
      for (int h = 0; h < NH; h++) for (int f = 0; f < F_MAX; f++) for (int m = 0; m < TMX; m++) OUT[h][f][m] = 12345;
      go(q, a, 1'b1, F_MAX);
      go(q, a, 1'b0, F_MAX);
      for (int f = 0; f < F_MAX; f++)
        for (int m = 0; m < TMX; m++) begin
          if (a) begin
            for (int h = 0; h < NH; h++) begin
              checks++;
              if (OUT[h][f][m] != 2 * dot(h, f, m, q)) begin
                failures++;
                if (failures < 6) $display("FAIL q=%0d mha h=%0d f=%0d m=%0d got %0d exp %0d", q, h, f, m, OUT[h][f][m], 2 * dot(h, f, m, q));
              end
            end
          end else begin
            int e;
            e = 0;
            for (int h = 0; h < NH; h++) e += dot(h, f, m, q);
            checks++;
            if (OUT[0][f][m] != 2 * e) begin
              failures++;
              if (failures < 6) $display("FAIL q=%0d fc f=%0d m=%0d got %0d exp %0d", q, f, m, OUT[0][f][m], 2 * e);
            end
          end
        end
    end
    // shorter token count
    go(1'b1, 1'b0, 1'b1, 3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
