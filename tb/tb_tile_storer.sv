// tb_tile_storer: presents a random output tile through a behavioural
// output-bank read port and checks what the store unit writes to a
// behavioural memory: for an FC tile with 8-bit output and a partial last
// word group (M not a multiple of the tile), an attention tile with 16-bit
// output for every head, and an FC tile with skip-connection addition.
// Expected words are built from the packing rules; memory outside the
// tensor must stay untouched, and the store must take J_out clocks plus
// a pipeline tail of one or two clocks.  Reduced size: NH = 3, TM = TMQ = 8, F = 5, 2 ports.
module tb_tile_storer;
  import vaqf_pkg::*;
  localparam int NH = 3, TM = 8, TMQ = 8, BQ = 8, F_MAX = 5, P_OUT = 2, ACC_W = 32;
  localparam int G = 4, GQ = 8, TMX = 8, HW = 3, FW = 3;
  localparam int OUT_B = 1000, SKIP_B = 3000;
  localparam logic [63:0] SENT = 64'h5EED_5EED_5EED_5EED;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  layer_cfg_t cfg; logic [15:0] mt; logic busy, done;
  logic [HW-1:0] ob_rd_head; logic [P_OUT-1:0][FW-1:0] ob_rd_f;
  logic [P_OUT-1:0][TMX-1:0][ACC_W-1:0] ob_rd_data;
  logic [P_OUT-1:0] skip_rd_en, out_wr_en; logic [P_OUT-1:0][31:0] skip_rd_addr, out_wr_addr;
  logic [P_OUT-1:0][63:0] skip_rd_data, out_wr_data;
  logic [0:0] in_rd_en = '0, wgt_rd_en = '0; logic [0:0][31:0] in_rd_addr = '0, wgt_rd_addr = '0;
  logic [0:0][63:0] in_rd_data, wgt_rd_data;
  int checks = 0, failures = 0, busy_cnt;
  int ACC [NH][F_MAX][TMX];

  tile_storer #(.NH(NH), .TM(TM), .TMQ(TMQ), .BQ(BQ), .F_MAX(F_MAX), .P_OUT(P_OUT), .ACC_W(ACC_W)) dut (.*);
  tb_ddr #(.P_IN(1), .P_WGT(1), .P_OUT(P_OUT), .DEPTH(8192)) ddr (.*);
  always #5 clk = ~clk;

  always_comb
    for (int j = 0; j < P_OUT; j++)
      for (int m = 0; m < TMX; m++)
        ob_rd_data[j][m] = (int'(ob_rd_head) < NH && int'(ob_rd_f[j]) < F_MAX) ? ACC_W'(ACC[ob_rd_head][ob_rd_f[j]][m]) : '0;
  always @(posedge clk) if (rst_n && busy) busy_cnt++;

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

  task automatic run(layer_cfg_t c, int t_mt, string name);
    int go = c.quant_out ? GQ : G, bits = c.quant_out ? BQ : 16, tmc = c.quant_in ? TMQ : TM;
    int rowo = cdv(int'(c.m_ch), go), nh = c.mha ? NH : 1;
    int rows = cdv(int'(c.m_ch), G);
    int j_out = nh * (tmc / go) * cdv(int'(c.f_tok), P_OUT);
    for (int h = 0; h < NH; h++) for (int f = 0; f < F_MAX; f++) for (int m = 0; m < TMX; m++)
      ACC[h][f][m] = int'($urandom % 400001) - 200000;
    for (int a = 0; a < 8192; a++) ddr.mem[a] = (a >= SKIP_B) ? {$urandom, $urandom} : SENT;
    cfg = c; mt = 16'(t_mt); busy_cnt = 0;
    @(negedge clk) start = 1'b1;
    @(negedge clk) start = 1'b0;
    wait (done); @(negedge clk);
    ck(busy_cnt >= j_out + 1 && busy_cnt <= j_out + 2,
       $sformatf("%s busy %0d expected %0d..%0d", name, busy_cnt, j_out + 1, j_out + 2));
    for (int h = 0; h < nh; h++)
      for (int f = 0; f < int'(c.f_tok); f++)
        for (int w = 0; w < rowo; w++) begin
          int a = OUT_B + (h * int'(c.f_tok) + f) * rowo + w;
          logic [63:0] e;
          if (w * go >= t_mt * tmc && w * go < (t_mt + 1) * tmc) begin
            e = '0;
            for (int l = 0; l < go; l++) begin
              int m = w * go + l;
              longint v, mx, mn;
              if (m >= int'(c.m_ch)) continue;
              mx = (64'sd1 <<< (bits - 1)) - 1; mn = -(64'sd1 <<< (bits - 1));
              v = longint'(ACC[h][f][m - t_mt * tmc]) >>> c.shift;
              if (c.residual) v += longint'($signed(ddr.mem[SKIP_B + a - OUT_B][l*16 +: 16]));
              if (v > mx) v = mx;
              if (v < mn) v = mn;
              e = e | ((64'(v) & ((64'd1 << bits) - 1)) << (l * bits));
            end
          end else e = SENT;
          ck(ddr.mem[a] === e, $sformatf("%s h=%0d f=%0d w=%0d got %h exp %h", name, h, f, w, ddr.mem[a], e));
        end
    ck(ddr.mem[OUT_B + nh * int'(c.f_tok) * rowo] === SENT, {name, " wrote past the tensor"});
  endtask

  initial begin
    layer_cfg_t c;
    cfg = '0; mt = '0;
    repeat (2) @(negedge clk); rst_n = 1'b1;
    c = '0; c.m_ch = 14; c.f_tok = 5; c.quant_in = 1; c.quant_out = 1; c.shift = 10;
    c.out_base = OUT_B; c.skip_base = SKIP_B;
    run(c, 1, "fc_q8_partial");
    c = '0; c.m_ch = 10; c.f_tok = 5; c.shift = 2; c.out_base = OUT_B; c.skip_base = SKIP_B;
    run(c, 1, "fc_16_partial");
    c = '0; c.m_ch = 16; c.f_tok = 4; c.mha = 1; c.shift = 3; c.out_base = OUT_B; c.skip_base = SKIP_B;
    run(c, 0, "mha_16");
    c = '0; c.m_ch = 16; c.f_tok = 5; c.residual = 1; c.shift = 4; c.out_base = OUT_B; c.skip_base = SKIP_B;
    run(c, 1, "fc_residual");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
