// tb_tile_loader: runs the tile loader against a behavioural memory whose
// every word encodes its own address, so each buffer write shows which
// word was fetched.  For an unquantized tile, a quantized tile and a
// patch-embedding tile it checks, entry by entry, that every input-tile
// segment and weight-tile segment is written exactly once from the address
// the layout formulas give, that weight rows past M are written as zeros,
// and that the load takes max(J_in, J_wgt) clocks plus the two-clock tail.
// Reduced size: NH = 3, TN = 8, TM = 4, TMQ = 6, F = 7, 2 input ports and
// 4 weight ports.
module tb_tile_loader;
  import vaqf_pkg::*;
  localparam int NH = 3, TN = 8, TM = 4, TMQ = 6, BQ = 8, F_MAX = 7, P_IN = 2, P_WGT = 4;
  localparam int G = 4, GQ = 8, TNQ = 16, TMX = 6, KW = 2, HW = 3, FW = 3, MW = 3, SW = 1;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  layer_cfg_t cfg; logic [15:0] mt, kt; logic busy, done;
  logic [P_IN-1:0] in_rd_en; logic [P_IN-1:0][31:0] in_rd_addr; logic [P_IN-1:0][63:0] in_rd_data;
  logic [P_WGT-1:0] wgt_rd_en; logic [P_WGT-1:0][31:0] wgt_rd_addr; logic [P_WGT-1:0][63:0] wgt_rd_data;
  logic [P_IN-1:0] ib_wr_en; logic [HW-1:0] ib_wr_head, wb_wr_head; logic [SW-1:0] ib_wr_seg, wb_wr_seg;
  logic [P_IN-1:0][FW-1:0] ib_wr_f; logic [P_IN-1:0][63:0] ib_wr_data;
  logic [P_WGT-1:0] wb_wr_en; logic [P_WGT-1:0][MW-1:0] wb_wr_m; logic [P_WGT-1:0][63:0] wb_wr_data;
  logic [0:0] skip_rd_en = '0, out_wr_en = '0; logic [0:0][31:0] skip_rd_addr = '0, out_wr_addr = '0;
  logic [0:0][63:0] skip_rd_data, out_wr_data = '0;
  int checks = 0, failures = 0;
  logic [63:0] IBW [NH][KW][F_MAX]; int IBN [NH][KW][F_MAX];
  logic [63:0] WBW [NH][KW][TMX];   int WBN [NH][KW][TMX];
  int busy_cnt;

  tile_loader #(.NH(NH), .TN(TN), .TM(TM), .TMQ(TMQ), .BQ(BQ), .F_MAX(F_MAX), .P_IN(P_IN), .P_WGT(P_WGT)) dut (.*);
  tb_ddr #(.P_IN(P_IN), .P_WGT(P_WGT), .P_OUT(1), .DEPTH(4096)) ddr (.*);
  always #5 clk = ~clk;

  function automatic logic [63:0] pat(int a);
    return {32'(a), 32'hC0DE_0000 ^ 32'(a)};
  endfunction

  always @(posedge clk) if (rst_n) begin
    if (busy) busy_cnt++;
    for (int j = 0; j < P_IN; j++)
      if (ib_wr_en[j]) begin IBW[ib_wr_head][ib_wr_seg][ib_wr_f[j]] = ib_wr_data[j]; IBN[ib_wr_head][ib_wr_seg][ib_wr_f[j]]++; end
    for (int j = 0; j < P_WGT; j++)
      if (wb_wr_en[j]) begin WBW[wb_wr_head][wb_wr_seg][wb_wr_m[j]] = wb_wr_data[j]; WBN[wb_wr_head][wb_wr_seg][wb_wr_m[j]]++; end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int cdv(int a, int b); return (a + b - 1) / b; endfunction

  task automatic ck(bit ok, string s);
    checks++;
    if (!ok) begin failures++; if (failures < 8) $display("FAIL %s", s); end
  endtask

  task automatic run(layer_cfg_t c, int t_mt, int t_kt, string name);
    int gc = c.quant_in ? GQ : G, tnc = c.quant_in ? TNQ : TN, tmc = c.quant_in ? TMQ : TM;
    int row = cdv(int'(c.n_ch), gc), cph = int'(c.n_ch) / NH;
    int j_in = NH * KW * cdv(int'(c.f_tok), P_IN), j_wgt = NH * KW * cdv(tmc, P_WGT);
    int j = (j_in > j_wgt) ? j_in : j_wgt;
    for (int h = 0; h < NH; h++) for (int k = 0; k < KW; k++) begin
      for (int f = 0; f < F_MAX; f++) IBN[h][k][f] = 0;
      for (int m = 0; m < TMX; m++) WBN[h][k][m] = 0;
    end
    cfg = c; mt = 16'(t_mt); kt = 16'(t_kt); busy_cnt = 0;
    @(negedge clk) start = 1'b1;
    @(negedge clk) start = 1'b0;
    wait (done); @(negedge clk);
    ck(busy_cnt == j + 2, $sformatf("%s busy %0d expected %0d", name, busy_cnt, j + 2));
    for (int h = 0; h < NH; h++)
      for (int k = 0; k < KW; k++) begin
        int cc = h * cph + t_kt * tnc + k * gc;
        for (int f = 0; f < int'(c.f_tok); f++) begin
          int a;
          if (c.conv) begin
            int P = 1 << c.patch_lg, ch = cc / (P * P), py = (cc / P) % P, px = cc % P;
            int fy = f / int'(c.img_wp), fx = f % int'(c.img_wp), wpx = int'(c.img_wp) * P;
            a = int'(c.in_base) + ((ch * int'(c.img_h) + fy * P + py) * wpx + fx * P + px) / G;
          end else a = int'(c.in_base) + f * row + cc / gc;
          ck(IBN[h][k][f] == 1 && IBW[h][k][f] == pat(a),
             $sformatf("%s input h=%0d k=%0d f=%0d n=%0d got %h exp %h", name, h, k, f, IBN[h][k][f], IBW[h][k][f], pat(a)));
        end
        for (int m = 0; m < tmc; m++) begin
          int mg = t_mt * tmc + m;
          logic [63:0] e;
          e = (mg < int'(c.m_ch)) ? pat(int'(c.wgt_base) + mg * row + cc / gc) : '0;
          ck(WBN[h][k][m] == 1 && WBW[h][k][m] == e,
             $sformatf("%s weight h=%0d k=%0d m=%0d got %h exp %h", name, h, k, m, WBW[h][k][m], e));
        end
      end
  endtask

  initial begin
    layer_cfg_t c;
    for (int a = 0; a < 4096; a++) ddr.mem[a] = pat(a);
    cfg = '0; mt = '0; kt = '0;
    repeat (2) @(negedge clk); rst_n = 1'b1;
    c = '0; c.n_ch = 48; c.m_ch = 7; c.f_tok = 7; c.in_base = 100; c.wgt_base = 2000;
    run(c, 1, 1, "unquantized");
    c = '0; c.n_ch = 96; c.m_ch = 10; c.f_tok = 5; c.quant_in = 1; c.in_base = 300; c.wgt_base = 1500;
    run(c, 1, 1, "quantized");
    c = '0; c.n_ch = 48; c.m_ch = 8; c.f_tok = 4; c.conv = 1; c.patch_lg = 2; c.img_wp = 2; c.img_h = 8;
    c.in_base = 700; c.wgt_base = 3000;
    run(c, 0, 0, "conv");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
