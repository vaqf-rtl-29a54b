// tb_vaqf_top: end-to-end test of the accelerator at reduced size.
//
// Builds vaqf_top with 4 heads (2 in parallel), TN = 8, TM = TMQ = 8, BQ = 8
// and 13-token tiles, and runs a sequence of layers through a behavioural
// memory: an unquantized FC layer with a partial output tile and quantized
// output, a quantized FC layer with two input-channel tiles, a quantized
// multi-head-attention layer with 16-bit output, an unquantized FC layer with
// skip-connection addition, and the patch-embedding convolution.  Inputs are
// random; expected outputs are computed here from the plain matrix
// definitions (no tiling), then every output word is compared, including
// that words past M stay unwritten.  It also checks the compute-engine time
// per tile group (F*ceil(NH/PH) clocks), the load time per tile group and
// that the layer time stays within the analytic estimate, and it counts how
// often each mechanism occurred (load/compute overlap, store/compute
// overlap, load stall, output-bank stall, saturation, each layer kind).
module tb_vaqf_top;
  import vaqf_pkg::*;
  localparam int NH = 4, PH = 2, TN = 8, TM = 8, TMQ = 8, BQ = 8, F_MAX = 13;
  localparam int P_IN = 2, P_WGT = 2, P_OUT = 1, ACC_W = 32;
  localparam int G = 4, GQ = 64 / BQ, TNQ = TN * GQ / G;
  localparam int NMAX = 128, MMAX = 24, DEPTH = 1 << 16;
  localparam int IN_B = 0, WGT_B = 16384, SKIP_B = 32768, OUT_B = 40960;
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

  vaqf_top #(.NH(NH), .PH(PH), .TN(TN), .TM(TM), .TMQ(TMQ), .BQ(BQ), .F_MAX(F_MAX),
             .P_IN(P_IN), .P_WGT(P_WGT), .P_OUT(P_OUT), .ACC_W(ACC_W)) dut (.*);

  tb_ddr #(.P_IN(P_IN), .P_WGT(P_WGT), .P_OUT(P_OUT), .DEPTH(DEPTH)) ddr (.*);

  int checks = 0, failures = 0;
  int X [F_MAX][NMAX];
  int W [MMAX][NMAX];
  int S [F_MAX][MMAX];
  // mechanism counters
  int m_overlap, m_st_overlap, m_ld_stall, m_bank_stall, m_sat, m_quant, m_unquant;
  int m_mha, m_fc, m_conv, m_resid, m_partial;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // ---------------- data generation ----------------
  function automatic int rnd(int lo, int hi);
    return lo + int'($urandom % (hi - lo + 1));
  endfunction

  task automatic put_act(input layer_cfg_t c);
    int gc = c.quant_in ? GQ : G;
    int bits = c.quant_in ? BQ : 16;
    int row = (int'(c.n_ch) + gc - 1) / gc;
    for (int f = 0; f < int'(c.f_tok); f++)
      for (int w = 0; w < row; w++) begin
        logic [63:0] word = '0;
        for (int l = 0; l < gc; l++) begin
          int cc = w * gc + l;
          logic [15:0] v = (cc < int'(c.n_ch)) ? 16'(X[f][cc]) : '0;
          word = word | (64'(v & ((1 << bits) - 1)) << (l * bits));
        end
        ddr.mem[IN_B + f * row + w] = word;
      end
  endtask

  task automatic put_wgt(input layer_cfg_t c);
    int gc = c.quant_in ? GQ : G;
    int row = (int'(c.n_ch) + gc - 1) / gc;
    for (int m = 0; m < int'(c.m_ch); m++)
      for (int w = 0; w < row; w++) begin
        logic [63:0] word = '0;
        for (int l = 0; l < gc; l++) begin
          int cc = w * gc + l;
          if (c.quant_in) word[l] = (W[m][cc] > 0);
          else word[l*16 +: 16] = 16'(W[m][cc]);
        end
        ddr.mem[WGT_B + m * row + w] = word;
      end
  endtask

  task automatic gen(input layer_cfg_t c);
    for (int f = 0; f < F_MAX; f++)
      for (int cc = 0; cc < NMAX; cc++)
        X[f][cc] = c.quant_in ? rnd(-128, 127) : rnd(-400, 400);
    for (int m = 0; m < MMAX; m++)
      for (int cc = 0; cc < NMAX; cc++)
        W[m][cc] = c.quant_in ? ((($urandom & 1) != 0) ? 1 : -1) : rnd(-400, 400);
    for (int f = 0; f < F_MAX; f++)
      for (int m = 0; m < MMAX; m++) S[f][m] = rnd(-20000, 20000);
  endtask

  // patch embedding: image C x H x W with P x P patches; X[f][c] follows.
  task automatic gen_image(input layer_cfg_t c, input int nch);
    int P = 1 << c.patch_lg;
    int wpx = int'(c.img_wp) * P;
    int hh = int'(c.img_h);
    int img [4][16][16];
    for (int ch = 0; ch < nch; ch++)
      for (int y = 0; y < hh; y++)
        for (int x = 0; x < wpx; x++) img[ch][y][x] = rnd(-300, 300);
    for (int ch = 0; ch < nch; ch++)
      for (int y = 0; y < hh; y++)
        for (int xw = 0; xw < wpx / G; xw++) begin
          logic [63:0] word = '0;
          for (int l = 0; l < G; l++) word[l*16 +: 16] = 16'(img[ch][y][xw*G + l]);
          ddr.mem[IN_B + (ch * hh + y) * (wpx / G) + xw] = word;
        end
    for (int f = 0; f < int'(c.f_tok); f++)
      for (int cc = 0; cc < int'(c.n_ch); cc++) begin
        int ch = cc / (P * P), py = (cc / P) % P, px = cc % P;
        int fy = f / int'(c.img_wp), fx = f % int'(c.img_wp);
        X[f][cc] = img[ch][fy*P + py][fx*P + px];
      end
  endtask

  task automatic put_skip(input layer_cfg_t c);
    int row = (int'(c.m_ch) + G - 1) / G;
    for (int f = 0; f < int'(c.f_tok); f++)
      for (int w = 0; w < row; w++) begin
        logic [63:0] word = '0;
        for (int l = 0; l < G; l++)
          if (w * G + l < int'(c.m_ch)) word[l*16 +: 16] = 16'(S[f][w*G + l]);
        ddr.mem[SKIP_B + f * row + w] = word;
      end
  endtask

  // ---------------- reference and comparison ----------------
  task automatic check_out(input layer_cfg_t c, input string name);
    int go = c.quant_out ? GQ : G;
    int bits = c.quant_out ? BQ : 16;
    int rowo = (int'(c.m_ch) + go - 1) / go;
    int nh = c.mha ? NH : 1;
    int cph = int'(c.n_ch) / NH;
    int bad = 0;
    longint mx = (64'sd1 <<< (bits - 1)) - 1, mn = -(64'sd1 <<< (bits - 1));
    for (int hd = 0; hd < nh; hd++)
      for (int f = 0; f < int'(c.f_tok); f++) begin
        for (int w = 0; w < rowo; w++) begin
          logic [63:0] exp_w = '0;
          for (int l = 0; l < go; l++) begin
            int m = w * go + l;
            if (m < int'(c.m_ch)) begin
              longint acc = 0, v;
              int c0 = c.mha ? hd * cph : 0;
              int c1 = c.mha ? (hd + 1) * cph : int'(c.n_ch);
              for (int cc = c0; cc < c1; cc++) acc += longint'(X[f][cc]) * longint'(W[m][cc]);
              v = acc >>> c.shift;
              if (c.residual) v += S[f][m];
              if (v > mx) begin v = mx; m_sat++; end
              if (v < mn) begin v = mn; m_sat++; end
              exp_w = exp_w | ((64'(v) & ((64'd1 << bits) - 1)) << (l * bits));
            end
          end
          if (ddr.mem[OUT_B + (hd * int'(c.f_tok) + f) * rowo + w] !== exp_w) begin
            bad++;
            if (bad < 4)
              $display("  %s hd=%0d f=%0d w=%0d got %h exp %h", name, hd, f, w,
                       ddr.mem[OUT_B + (hd * int'(c.f_tok) + f) * rowo + w], exp_w);
          end
          checks++;
        end
      end
    // nothing written beyond the tensor
    chk(ddr.mem[OUT_B + nh * int'(c.f_tok) * rowo] === SENT, {name, ": write past the tensor"});
    if (bad != 0) failures += bad;
    $display("%s: %0d output words, %0d mismatches", name, nh * int'(c.f_tok) * rowo, bad);
  endtask

  // ---------------- timing monitors ----------------
  int ce_len, ce_exp, ld_len, ld_exp_lo, ld_exp_hi;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_engine.busy) ce_len++;
    if (dut.u_engine.done) begin
      chk(ce_len == ce_exp, $sformatf("engine busy %0d clocks, expected %0d", ce_len, ce_exp));
      ce_len = 0;
    end
    if (dut.u_loader.busy) ld_len++;
    if (dut.u_loader.done) begin
      chk(ld_len >= ld_exp_lo && ld_len <= ld_exp_hi,
          $sformatf("loader busy %0d clocks, expected %0d..%0d", ld_len, ld_exp_lo, ld_exp_hi));
      ld_len = 0;
    end
  end

  function automatic int cdv(int a, int b); return (a + b - 1) / b; endfunction

  task automatic run(input layer_cfg_t c, input string name);
    int tnc = c.quant_in ? TNQ : TN;
    int tmc = c.quant_in ? TMQ : TM;
    int gc  = c.quant_in ? GQ : G;
    int go  = c.quant_out ? GQ : G;
    int kt  = int'(c.n_ch) / (NH * tnc);
    int mt  = cdv(int'(c.m_ch), tmc);
    int j_in = NH * cdv(tnc, gc) * cdv(int'(c.f_tok), P_IN);
    int j_wgt = NH * cdv(tnc, gc) * cdv(tmc, P_WGT);
    int j_cmpt = int'(c.f_tok) * cdv(NH, PH);
    int j_out = (c.mha ? NH : 1) * cdv(tmc, go) * cdv(int'(c.f_tok), P_OUT);
    int j_lc = (j_in > j_wgt) ? j_in : j_wgt;
    int j_s, j_i, cyc;
    int rowo = cdv(int'(c.m_ch), go);
    if (j_cmpt > j_lc) j_lc = j_cmpt;
    j_s = j_lc * kt + j_cmpt; if (j_out > j_s) j_s = j_out;
    j_i = mt * j_s + j_out;
    ce_exp = j_cmpt;
    ld_exp_lo = (j_in > j_wgt) ? j_in : j_wgt;
    ld_exp_hi = ld_exp_lo + 3;
    ce_len = 0; ld_len = 0;
    for (int a = 0; a < (c.mha ? NH : 1) * int'(c.f_tok) * rowo + 8; a++) ddr.mem[OUT_B + a] = SENT;
    cfg = c;
    @(negedge clk) start = 1'b1;
    @(negedge clk) start = 1'b0;
    cyc = 1;
    while (!done && cyc < 200000) begin @(posedge clk); cyc++; end
    chk(done, {name, ": layer did not finish"});
    @(negedge clk);
    // the schedule may beat the estimate (loads keep running across output
    // tiles) but must not exceed it by more than the per-tile handshakes
    chk(cyc <= j_i + 6 * mt * kt + 10,
        $sformatf("%s: %0d clocks, estimate %0d", name, cyc, j_i));
    $display("%s: %0d clocks (analytic estimate %0d), overlap=%0d st_overlap=%0d ld_stall=%0d bank_stall=%0d",
             name, cyc, j_i, n_overlap, n_st_overlap, n_ld_stall, n_bank_stall);
    m_overlap += int'(n_overlap); m_st_overlap += int'(n_st_overlap);
    m_ld_stall += int'(n_ld_stall); m_bank_stall += int'(n_bank_stall);
    if (c.quant_in) m_quant++; else m_unquant++;
    if (c.mha) m_mha++; else m_fc++;
    if (c.conv) m_conv++;
    if (c.residual) m_resid++;
    if (int'(c.m_ch) % tmc != 0) m_partial++;
    check_out(c, name);
  endtask

  function automatic layer_cfg_t base_cfg();
    layer_cfg_t c = '0;
    c.in_base = IN_B; c.wgt_base = WGT_B; c.out_base = OUT_B; c.skip_base = SKIP_B;
    return c;
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    layer_cfg_t c;
    {m_overlap, m_st_overlap, m_ld_stall, m_bank_stall, m_sat, m_quant, m_unquant} = '0;
    {m_mha, m_fc, m_conv, m_resid, m_partial} = '0;
    cfg = base_cfg();
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    repeat (2) @(negedge clk);

    // 1. unquantized FC, M = 20 (partial last output tile), 8-bit output
    c = base_cfg(); c.n_ch = 64; c.m_ch = 20; c.f_tok = 13; c.quant_out = 1; c.shift = 14;
    gen(c); put_act(c); put_wgt(c); run(c, "fc16_partial");

    // 2. quantized FC, two input-channel tiles, three output tiles
    c = base_cfg(); c.n_ch = 128; c.m_ch = 24; c.f_tok = 11; c.quant_in = 1; c.quant_out = 1; c.shift = 4;
    gen(c); put_act(c); put_wgt(c); run(c, "fc_w1a8");

    // 3. quantized multi-head attention product, 16-bit output (long stores)
    c = base_cfg(); c.n_ch = 64; c.m_ch = 24; c.f_tok = 13; c.quant_in = 1; c.mha = 1; c.shift = 0;
    gen(c); put_act(c); put_wgt(c); run(c, "mha_w1a8");

    // 4. unquantized FC with skip-connection addition, 16-bit output
    c = base_cfg(); c.n_ch = 64; c.m_ch = 16; c.f_tok = 9; c.residual = 1; c.shift = 8;
    gen(c); put_act(c); put_wgt(c); put_skip(c); run(c, "fc16_residual");

    // 5. patch embedding: 2-channel 8x12 image, 4x4 patches -> 6 tokens, N = 32
    c = base_cfg(); c.n_ch = 32; c.m_ch = 16; c.f_tok = 6; c.conv = 1; c.patch_lg = 2;
    c.img_wp = 3; c.img_h = 8; c.shift = 6;
    gen(c); gen_image(c, 2); put_wgt(c); run(c, "patch_embed");

    $display("mechanisms: overlap=%0d st_overlap=%0d ld_stall=%0d bank_stall=%0d sat=%0d quant=%0d unquant=%0d mha=%0d fc=%0d conv=%0d residual=%0d partial=%0d",
             m_overlap, m_st_overlap, m_ld_stall, m_bank_stall, m_sat, m_quant, m_unquant,
             m_mha, m_fc, m_conv, m_resid, m_partial);
    chk(m_overlap > 0, "load/compute overlap never happened");
    chk(m_st_overlap > 0, "store/compute overlap never happened");
    chk(m_ld_stall > 0, "load stall never happened");
    chk(m_bank_stall > 0, "output-bank stall never happened");
    chk(m_sat > 0, "saturation never happened");
    chk(m_quant > 0 && m_unquant > 0, "both layer kinds");
    chk(m_mha > 0 && m_fc > 0, "both head modes");
    chk(m_conv > 0, "patch embedding never ran");
    chk(m_resid > 0, "skip addition never ran");
    chk(m_partial > 0, "partial output tile never ran");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
