// tb_vaqf_full: one complete DeiT-base layer on the accelerator at its
// default size (12 heads, 4 in parallel, TN = 16, TM = TMQ = 24, TNQ = 32,
// 8-bit activations, 197-token tiles, 16/4/4 memory ports).
//
// The layer is the 768 x 768 attention output projection of DeiT-base in
// the W1A8 setting: 197 tokens of 8-bit activations times a binary weight
// matrix, 8-bit outputs.  Inputs and weights are random; the expected
// output is the plain matrix product, shifted and saturated, computed here.
// Every output word is compared, the compute time of each tile group must
// be 197 * ceil(12/4) = 591 clocks, and the layer time must stay within
// the analytic estimate.  A second, unquantized layer (192 -> 48 channels,
// 16-bit) exercises the DSP path at the same size.
module tb_vaqf_full;
  import vaqf_pkg::*;
  localparam int NH = DEF_NH, PH = DEF_PH, TN = DEF_TN, TM = DEF_TM, TMQ = DEF_TMQ, BQ = DEF_BQ;
  localparam int P_IN = DEF_P_IN, P_WGT = DEF_P_WGT, P_OUT = DEF_P_OUT;
  localparam int G = 4, GQ = 64 / BQ, TNQ = TN * GQ / G;
  localparam int F = 197, NMAX = 768, MMAX = 768, DEPTH = 1 << 20;
  localparam int IN_B = 0, WGT_B = 65536, OUT_B = 262144;
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

  vaqf_top dut (.*);
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
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input layer_cfg_t c, input string name);
    int n = int'(c.n_ch), m_ch = int'(c.m_ch);
    int gc = c.quant_in ? GQ : G, go = c.quant_out ? GQ : G;
    int bits_i = c.quant_in ? BQ : 16, bits_o = c.quant_out ? BQ : 16;
    int row = cdv(n, gc), rowo = cdv(m_ch, go);
    int tnc = c.quant_in ? TNQ : TN, tmc = c.quant_in ? TMQ : TM;
    int kt = n / (NH * tnc), mt = cdv(m_ch, tmc);
    int j_in = NH * cdv(tnc, gc) * cdv(F, P_IN), j_wgt = NH * cdv(tnc, gc) * cdv(tmc, P_WGT);
    int j_cmpt = F * cdv(NH, PH), j_out = cdv(tmc, go) * cdv(F, P_OUT);
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
    for (int a = 0; a < F * rowo + 8; a++) ddr.mem[OUT_B + a] = SENT;
    // run
    cfg = c;
    @(negedge clk) start = 1'b1;
    @(negedge clk) start = 1'b0;
    cyc = 1;
    while (!done && cyc < 1500000) begin @(posedge clk); cyc++; end
    chk(done, {name, ": layer did not finish"});
    @(negedge clk);
    chk(cyc <= j_i + 6 * mt * kt + 10, $sformatf("%s: %0d clocks, estimate %0d", name, cyc, j_i));
    $display("%s: %0d clocks (analytic estimate %0d), overlap=%0d st_overlap=%0d ld_stall=%0d bank_stall=%0d",
             name, cyc, j_i, n_overlap, n_st_overlap, n_ld_stall, n_bank_stall);
    // compare
    bad = 0;
    mx = (64'sd1 <<< (bits_o - 1)) - 1; mn = -(64'sd1 <<< (bits_o - 1));
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
          for (int cc = 0; cc < n; cc++) acc += longint'(X[f][cc]) * longint'(W[m][cc]);
          v = acc >>> c.shift;
          if (v > mx) v = mx;
          if (v < mn) v = mn;
          e = e | ((64'(v) & ((64'd1 << bits_o) - 1)) << (l * bits_o));
        end
        checks++;
        if (ddr.mem[OUT_B + f * rowo + w] !== e) begin
          bad++;
          if (bad < 4) $display("  %s f=%0d w=%0d got %h exp %h", name, f, w, ddr.mem[OUT_B + f * rowo + w], e);
        end
      end
    failures += bad;
    chk(ddr.mem[OUT_B + F * rowo] === SENT, {name, ": write past the tensor"});
    $display("%s: %0d output words, %0d mismatches", name, F * rowo, bad);
  endtask

  initial begin
    layer_cfg_t c;
    cfg = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    repeat (2) @(negedge clk);
    c = '0; c.n_ch = 768; c.m_ch = 768; c.f_tok = 9'(F); c.quant_in = 1; c.quant_out = 1; c.shift = 4;
    c.in_base = IN_B; c.wgt_base = WGT_B; c.out_base = OUT_B;
    run(c, "proj_768x768_w1a8");
    c = '0; c.n_ch = 192; c.m_ch = 48; c.f_tok = 9'(F); c.shift = 8;
    c.in_base = IN_B; c.wgt_base = WGT_B; c.out_base = OUT_B;
    run(c, "fc_192x48_w16a16");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
