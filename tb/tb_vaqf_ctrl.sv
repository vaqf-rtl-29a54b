// tb_vaqf_ctrl: checks the layer sequencer with stand-in units that answer
// `start` with `done` after a programmable number of clocks.  For three
// latency mixes (load-bound, compute-bound, store-bound) it checks that the
// loads visit the (mt, kt) tiles in order into alternating slots, that each
// computation uses the slot of the matching load only after that load has
// finished, that `first` marks kt = 0, that output banks alternate per
// output tile, that each store starts only after the last computation of
// its tile, that the counts of loads, computations and stores are
// MT*KT, MT*KT and MT, and that the overlap and stall counters moved where
// the latency mix must make them move.  Reduced size: NH = 4, TN = 8,
// TM = TMQ = 8.
module tb_vaqf_ctrl;
  import vaqf_pkg::*;
  localparam int NH = 4, TN = 8, TM = 8, TMQ = 8, BQ = 8;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  layer_cfg_t cfg;
  logic busy, done;
  logic ld_start, ld_slot, ld_done; logic [15:0] ld_mt, ld_kt;
  logic ce_start, ce_slot, ce_bank, ce_first, ce_done;
  logic st_start, st_bank, st_done; logic [15:0] st_mt;
  logic [31:0] n_overlap, n_st_overlap, n_ld_stall, n_bank_stall;
  int checks = 0, failures = 0;
  int ld_lat, ce_lat, st_lat;

  vaqf_ctrl #(.NH(NH), .TN(TN), .TM(TM), .TMQ(TMQ), .BQ(BQ)) dut (.*);
  always #5 clk = ~clk;

  // stand-in units
  int ld_cnt, ce_cnt, st_cnt;
  bit ld_run, ce_run, st_run;
  always @(posedge clk) begin
    ld_done <= 1'b0; ce_done <= 1'b0; st_done <= 1'b0;
    if (ld_start) begin ld_run = 1; ld_cnt = ld_lat; end
    else if (ld_run && --ld_cnt == 0) begin ld_run = 0; ld_done <= 1'b1; end
    if (ce_start) begin ce_run = 1; ce_cnt = ce_lat; end
    else if (ce_run && --ce_cnt == 0) begin ce_run = 0; ce_done <= 1'b1; end
    if (st_start) begin st_run = 1; st_cnt = st_lat; end
    else if (st_run && --st_cnt == 0) begin st_run = 0; st_done <= 1'b1; end
  end

  // event logs
  int n_ld, n_ce, n_st, n_ld_done, n_ce_done;
  int ld_slot_log [64], ld_mt_log [64], ld_kt_log [64];
  int ce_mt_log [64], ce_kt_log [64];

  task automatic ck(bit ok, string s);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", s); end
  endtask

  int exp_mt, exp_kt, KT, MT, ce_i, st_i;
  always @(posedge clk) if (rst_n && busy) begin
    if (ld_start) begin
      ck(int'(ld_slot) == n_ld % 2, $sformatf("load %0d into slot %0d", n_ld, ld_slot));
      ck(int'(ld_mt) == n_ld / KT && int'(ld_kt) == n_ld % KT,
         $sformatf("load %0d is tile (%0d,%0d)", n_ld, ld_mt, ld_kt));
      ld_mt_log[n_ld] = int'(ld_mt); ld_kt_log[n_ld] = int'(ld_kt); ld_slot_log[n_ld] = int'(ld_slot);
      n_ld++;
    end
    if (ld_done) n_ld_done++;
    if (ce_start) begin
      ck(n_ce < n_ld_done, $sformatf("compute %0d started before its load finished", n_ce));
      ck(int'(ce_slot) == ld_slot_log[n_ce], $sformatf("compute %0d uses slot %0d", n_ce, ce_slot));
      ck(ce_first == (ld_kt_log[n_ce] == 0), $sformatf("compute %0d first=%0d", n_ce, ce_first));
      ck(int'(ce_bank) == ld_mt_log[n_ce] % 2, $sformatf("compute %0d bank %0d", n_ce, ce_bank));
      n_ce++;
    end
    if (ce_done) n_ce_done++;
    if (st_start) begin
      ck(int'(st_mt) == n_st, $sformatf("store %0d of tile %0d", n_st, st_mt));
      ck(int'(st_bank) == n_st % 2, $sformatf("store %0d bank %0d", n_st, st_bank));
      ck(n_ce_done >= (n_st + 1) * KT, $sformatf("store %0d before its tile was computed", n_st));
      n_st++;
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(layer_cfg_t c, int l, int cl, int s, string name, output int ov, output int so,
                     output int ls, output int bs);
    int cyc = 0;
    ld_lat = l; ce_lat = cl; st_lat = s;
    KT = int'(c.n_ch) / (NH * (c.quant_in ? 16 : TN));
    MT = (int'(c.m_ch) + 7) / 8;
    {n_ld, n_ce, n_st, n_ld_done, n_ce_done} = '0;
    cfg = c;
    @(negedge clk) start = 1'b1;
    @(negedge clk) start = 1'b0;
    while (!done && cyc < 100000) begin @(posedge clk); cyc++; end
    @(negedge clk);
    ck(n_ld == MT * KT && n_ce == MT * KT && n_st == MT,
       $sformatf("%s counts ld=%0d ce=%0d st=%0d", name, n_ld, n_ce, n_st));
    $display("%s: %0d clocks, overlap=%0d st_overlap=%0d ld_stall=%0d bank_stall=%0d", name, cyc,
             n_overlap, n_st_overlap, n_ld_stall, n_bank_stall);
    ov = int'(n_overlap); so = int'(n_st_overlap); ls = int'(n_ld_stall); bs = int'(n_bank_stall);
  endtask

  initial begin
    layer_cfg_t c;
    int ov, so, ls, bs;
    cfg = '0;
    {ld_done, ce_done, st_done} = '0;
    {ld_run, ce_run, st_run} = '0;
    repeat (2) @(negedge clk); rst_n = 1'b1;
    // load-bound: the engine waits for loads
    c = '0; c.n_ch = 64; c.m_ch = 24;
    run(c, 30, 10, 5, "load_bound", ov, so, ls, bs);
    ck(ov > 0 && ls > 0, "load-bound run shows overlap and load stalls");
    // compute-bound, quantized parameter set
    c = '0; c.n_ch = 128; c.m_ch = 20; c.quant_in = 1;
    run(c, 8, 30, 12, "compute_bound", ov, so, ls, bs);
    ck(ov > 0 && so > 0, "compute-bound run overlaps loads and stores with computation");
    ck(ls <= 10, "compute-bound run stalls only for the first load");
    // store-bound: output banks run out
    c = '0; c.n_ch = 32; c.m_ch = 32;
    run(c, 5, 5, 60, "store_bound", ov, so, ls, bs);
    ck(bs > 0, "store-bound run waits for a free output bank");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
