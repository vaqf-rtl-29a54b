// tb_vaqf_w1a6: the 6-bit-activation (W1A6) setting, end to end, at a
// reduced size.  With BQ = 6 a 64-bit word carries GQ = floor(64/6) = 10
// activations in its low 60 bits, and TNQ = floor(TN*GQ/G).  Here NH = 4
// heads (2 in parallel), TN = 8 so TNQ = 20, TM = TMQ = 20 (a multiple of
// both G = 4 and GQ = 10), tiles of up to 13 tokens, 2/2/1 memory ports.
// Layers: a quantized FC layer 160 -> 50 (partial last word group), a
// quantized attention-mode layer (heads kept apart) with 16-bit output, and
// a 16-bit FC layer 64 -> 20.  Inputs and weights are random; every output
// word is compared with a plain matrix product, shifted and saturated, and
// every tile computation must take F * ceil(NH/PH) clocks.
module tb_vaqf_w1a6;
  import vaqf_pkg::*;
  localparam int NH = 4, PH = 2, TN = 8, TM = 20, TMQ = 20, BQ = 6;
  localparam int P_IN = 2, P_WGT = 2, P_OUT = 1;
  localparam int G = 4, GQ = 64 / BQ, TNQ = TN * GQ / G;
  localparam int F = 13, NMAX = 160, MMAX = 64, DEPTH = 1 << 14;
  localparam int IN_B = 0, WGT_B = 2048, OUT_B = 8192;
  localparam logic [63:0] SENT = 64'hA5A5_5A5A_DEAD_BEEF;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  layer_cfg_t cfg;
  logic busy, done;
  logic [P_IN-1:0] in_rd_en;   logic [P_IN-1:0][31:0] in_rd_addr;   logic [P_IN-1:0][63:0] in_rd_data;
  logic [P_WGT-1:0] wgt_rd_en; logic [P_WGT-1:0][31:0] wgt_rd_addr; logic [P_WGT-1:0][63:0] wgt_rd_data;
  logic [P_OUT-1:0] skip_rd_en; logic [P_OUT-1:0][31:0] skip_rd_addr; logic [P_OUT-1:0][63:0] skip_rd_data;
  logic [P_OUT-1:0] out_wr_en; logic [P_OUT-1:0][31:0] out_wr_addr; logic [P_OUT-1:0][63:0] out_wr_data;
  logic [31:0] n_overlap, n_st_overlap, n_ld_stall, n_bank_stall;

  always #5 clk = ~clk;

  vaqf_top #(.NH(NH), .PH(PH), .TN(TN), .TM(TM), .TMQ(TMQ), .BQ(BQ), .F_MAX(F),
            .P_IN(P_IN), .P_WGT(P_WGT), .P_OUT(P_OUT)) dut (.*);
  tb_ddr #(.P_IN(P_IN), .P_WGT(P_WGT), .P_OUT(P_OUT), .DEPTH(DEPTH)) ddr (.*);

  int checks = 0, failures = 0;
  int X [F][NMAX];
  int W [MMAX][NMAX];

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  function automatic int cdv(int a, int b); return (a + b - 1) / b; endfunction

  int ce_len, ce_exp;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_engine.busy) ce_len++;
    if (dut.u_engine.done) begin
      chk(ce_len == ce_exp, $sformatf("engine busy %0d clocks, expected %0d", ce_len, ce_exp));
      ce_len = 0;
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input layer_cfg_t c, input string name);
    int n = int'(c.n_ch), m_ch = int'(c.m_ch), nh = c.mha ? NH : 1, cph = int'(c.n_ch) / NH;
    int gc = c.quant_in ? GQ : G, go = c.quant_out ? GQ : G;
    int bits_i = c.quant_in ? BQ : 16, bits_o = c.quant_out ? BQ : 16;
    int row = cdv(n, gc), rowo = cdv(m_ch, go);
    int tnc = c.quant_in ? TNQ : TN, tmc = c.quant_in ? TMQ : TM;
    int kt = n / (NH * tnc), mt = cdv(m_ch, tmc);
    int j_in = NH * cdv(tnc, gc) * cdv(F, P_IN), j_wgt = NH * cdv(tnc, gc) * cdv(tmc, P_WGT);
    int j_cmpt = F * cdv(NH, PH), j_out = nh * cdv(tmc, go) * cdv(F, P_OUT);
    int j_lc, j_s, j_i, cyc, bad;
    longint mx, mn;
    j_lc = (j_in > j_wgt) ? j_in : j_wgt; if (j_cmpt > j_lc) j_lc = j_cmpt;
    j_s = j_lc * kt + j_cmpt; if (j_out > j_s) j_s = j_out;
    j_i = mt * j_s + j_out;
    ce_exp = j_cmpt; ce_len = 0;
    // data
    for (int f = 0; f < F; f++)
      for (int cc = 0; cc < n; cc++)
        X[f][cc] = c.quant_in ? int'($urandom % (1 << BQ)) - (1 << (BQ - 1)) : int'($urandom % 801) - 400;
    for (int m = 0; m < m_ch; m++)
      for (int cc = 0; cc < n; cc++)
        W[m][cc] = c.quant_in ? ((($urandom & 1) != 0) ? 1 : -1) : int'($urandom % 801) - 400;
    for (int f = 0; f < F; f++)
      for (int w = 0; w < row; w++) begin
        logic [63:0] word;
        word = '0;
        for (int l = 0; l < gc; l++)
          word = word | ((64'(X[f][w*gc + l]) & ((64'd1 << bits_i) - 1)) << (l * bits_i));
        ddr.mem[IN_B + f * row + w] = word;
      end
    for (int m = 0; m < m_ch; m++)
      for (int w = 0; w < row; w++) begin
        logic [63:0] word;
        word = '0;
        for (int l = 0; l < gc; l++)
          if (c.quant_in) word[l] = (W[m][w*gc + l] > 0);
          else word[l*16 +: 16] = 16'(W[m][w*gc + l]);
        ddr.mem[WGT_B + m * row + w] = word;
      end
    for (int a = 0; a < nh * F * rowo + 8; a++) ddr.mem[OUT_B + a] = SENT;
    // run
    cfg = c;
    @(negedge clk) start = 1'b1;
    @(negedge clk) start = 1'b0;
    cyc = 1;
    while (!done && cyc < 150000) begin @(posedge clk); cyc++; end
    chk(done, {name, ": layer did not finish"});
    @(negedge clk);
    chk(cyc <= j_i + 6 * mt * kt + 10, $sformatf("%s: %0d clocks, estimate %0d", name, cyc, j_i));
    $display("%s: %0d clocks (analytic estimate %0d), overlap=%0d st_overlap=%0d ld_stall=%0d bank_stall=%0d",
             name, cyc, j_i, n_overlap, n_st_overlap, n_ld_stall, n_bank_stall);
    // compare
    bad = 0;
    mx = (64'sd1 <<< (bits_o - 1)) - 1; mn = -(64'sd1 <<< (bits_o - 1));
    for (int h = 0; h < nh; h++)
    for (int f = 0; f < F; f++)
      for (int w = 0; w < rowo; w++) begin
        logic [63:0] e;
        e = '0;
        for (int l = 0; l < go; l++) begin
          int m;
          longint acc, v;
          m = w * go + l;
          if (m >= m_ch) continue;
          acc = 0;
          for (int cc = 0; cc < n; cc++)
            if (!c.mha || cc / cph == h) acc += longint'(X[f][cc]) * longint'(W[m][cc]);
          v = acc >>> c.shift;
          if (v > mx) v = mx;
          if (v < mn) v = mn;
          e = e | ((64'(v) & ((64'd1 << bits_o) - 1)) << (l * bits_o));
        end
        checks++;
        if (ddr.mem[OUT_B + (h * F + f) * rowo + w] !== e) begin
          bad++;
          if (bad < 4) $display("  %s h=%0d f=%0d w=%0d got %h exp %h", name, h, f, w, ddr.mem[OUT_B + (h * F + f) * rowo + w], e);
        end
      end
    failures += bad;
    chk(ddr.mem[OUT_B + nh * F * rowo] === SENT, {name, ": write past the tensor"});
    $display("%s: %0d output words, %0d mismatches", name, nh * F * rowo, bad);
  endtask

  initial begin
    layer_cfg_t c;
    cfg = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    repeat (2) @(negedge clk);
    c = '0; c.n_ch = 160; c.m_ch = 50; c.f_tok = 9'(F); c.quant_in = 1; c.quant_out = 1; c.shift = 3;
    c.in_base = IN_B; c.wgt_base = WGT_B; c.out_base = OUT_B;
    run(c, "fc_160x50_w1a6");
    c = '0; c.n_ch = 80; c.m_ch = 20; c.f_tok = 9'(F); c.quant_in = 1; c.mha = 1; c.shift = 0;
    c.in_base = IN_B; c.wgt_base = WGT_B; c.out_base = OUT_B;
    run(c, "mha_80x20_a6");
    c = '0; c.n_ch = 64; c.m_ch = 20; c.f_tok = 9'(F); c.shift = 6;
    c.in_base = IN_B; c.wgt_base = WGT_B; c.out_base = OUT_B;
    run(c, "fc_64x20_w16a16");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
