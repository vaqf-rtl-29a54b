// vaqf_ctrl: layer sequencer with double-buffered load / compute / store.
//
// A layer O[M][F] = W[M][N] x I[N][F] is cut into MT = ceil(M/TMc) output
// tiles and, for each, KT = N/(NH*TNc) input-channel tiles (TMc, TNc = TM, TN
// for an unquantized layer, TMQ, TNQ for a quantized one: the "Quantized?"
// selection).  Three small schedulers run at once:
//   * load    : walks (mt, kt) and starts the tile loader into input/weight
//               slot `ld_slot` as soon as that slot is empty;
//   * compute : walks the same sequence and starts the compute engine on a
//               full slot; on kt = 0 it also needs a free output bank and
//               tells the engine to overwrite (`ce_first`); after kt = KT-1
//               it hands the bank to the store scheduler;
//   * store   : starts the tile storer on each full output bank.
// With two input/weight slots and two output banks, loading the next tile
// group, computing the current one and storing the previous output tile
// overlap (double buffering), so a layer takes at most about
//   MT * (KT * max(J_load, J_cmpt) + J_cmpt) + J_out clocks.
// The input tile is reloaded for every output tile.
// Counters of the overlap and of the stalls are exported for inspection.
// Handshake: `start` (cfg stable until `done`), `done` pulses when the last
// output tile is written.  The schedule is this design's rendering of the
// paper's double-buffering description; the handshakes are its own.
module vaqf_ctrl
  import vaqf_pkg::*;
#(
  parameter int NH    = DEF_NH,
  parameter int TN    = DEF_TN,
  parameter int TM    = DEF_TM,
  parameter int TMQ   = DEF_TMQ,
  parameter int BQ    = DEF_BQ,
  // derived
  parameter int G     = pack_g(ACT_W),
  parameter int GQ    = pack_g(BQ),
  parameter int TNQ   = TN * GQ / G
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  layer_cfg_t  cfg,
  output logic        busy,
  output logic        done,
  // tile loader
  output logic        ld_start,
  output logic        ld_slot,
  output logic [15:0] ld_mt,
  output logic [15:0] ld_kt,
  input  logic        ld_done,
  // compute engine
  output logic        ce_start,
  output logic        ce_slot,
  output logic        ce_bank,
  output logic        ce_first,
  input  logic        ce_done,
  // tile storer
  output logic        st_start,
  output logic        st_bank,
  output logic [15:0] st_mt,
  input  logic        st_done,
  // statistics
  output logic [31:0] n_overlap,     // clocks with loader and engine both busy
  output logic [31:0] n_st_overlap,  // clocks with storer and engine both busy
  output logic [31:0] n_ld_stall,    // clocks the engine waited for a tile load
  output logic [31:0] n_bank_stall   // clocks the engine waited for a free output bank
);
  int unsigned mtiles, ktiles;
  always_comb begin
    mtiles = cfg.quant_in ? (int'(cfg.m_ch) + TMQ - 1) / TMQ : (int'(cfg.m_ch) + TM - 1) / TM;
    ktiles = cfg.quant_in ? int'(cfg.n_ch) / (NH * TNQ) : int'(cfg.n_ch) / (NH * TN);
  end

  logic [1:0] slot_full, bank_full;
  logic       l_act, l_busy, c_act, c_busy, s_act, s_busy;
  logic [15:0] c_mt, c_kt;
  logic        ld_go, ce_go, st_go, c_wait_ld, c_wait_bank;

  always_comb begin
    ld_go       = l_act && !l_busy && !slot_full[ld_slot];
    c_wait_ld   = c_act && !c_busy && !slot_full[ce_slot];
    c_wait_bank = c_act && !c_busy && slot_full[ce_slot] && c_kt == '0 && bank_full[ce_bank];
    ce_go       = c_act && !c_busy && slot_full[ce_slot] && !(c_kt == '0 && bank_full[ce_bank]);
    st_go       = s_act && !s_busy && bank_full[st_bank];
  end
  // slot / bank flag updates of this clock
  logic [1:0] sf_set, sf_clr, bf_set, bf_clr;
  always_comb begin
    sf_set = '0; sf_clr = '0; bf_set = '0; bf_clr = '0;
    if (ld_done) sf_set[ld_slot] = 1'b1;
    if (ce_done) sf_clr[ce_slot] = 1'b1;
    if (ce_done && int'(c_kt) + 1 >= int'(ktiles)) bf_set[ce_bank] = 1'b1;
    if (st_done) bf_clr[st_bank] = 1'b1;
  end

  assign ld_start = ld_go;
  assign ce_start = ce_go;
  assign ce_first = (c_kt == '0);
  assign st_start = st_go;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0;
      slot_full <= '0; bank_full <= '0;
      l_act <= 1'b0; l_busy <= 1'b0; ld_slot <= 1'b0; ld_mt <= '0; ld_kt <= '0;
      c_act <= 1'b0; c_busy <= 1'b0; ce_slot <= 1'b0; ce_bank <= 1'b0; c_mt <= '0; c_kt <= '0;
      s_act <= 1'b0; s_busy <= 1'b0; st_bank <= 1'b0; st_mt <= '0;
      n_overlap <= '0; n_st_overlap <= '0; n_ld_stall <= '0; n_bank_stall <= '0;
    end else begin
      done <= 1'b0;

      if (start && !busy) begin
        busy <= 1'b1;
        slot_full <= '0; bank_full <= '0;
        l_act <= 1'b1; l_busy <= 1'b0; ld_slot <= 1'b0; ld_mt <= '0; ld_kt <= '0;
        c_act <= 1'b1; c_busy <= 1'b0; ce_slot <= 1'b0; ce_bank <= 1'b0; c_mt <= '0; c_kt <= '0;
        s_act <= 1'b1; s_busy <= 1'b0; st_bank <= 1'b0; st_mt <= '0;
        n_overlap <= '0; n_st_overlap <= '0; n_ld_stall <= '0; n_bank_stall <= '0;
      end else if (busy) begin
        // load scheduler
        if (ld_go) l_busy <= 1'b1;
        if (ld_done) begin
          l_busy <= 1'b0;
          ld_slot <= ~ld_slot;
          if (int'(ld_kt) + 1 >= int'(ktiles)) begin
            ld_kt <= '0;
            if (int'(ld_mt) + 1 >= int'(mtiles)) l_act <= 1'b0;
            else ld_mt <= ld_mt + 1'b1;
          end else ld_kt <= ld_kt + 1'b1;
        end
        // compute scheduler
        if (ce_go) c_busy <= 1'b1;
        if (ce_done) begin
          c_busy <= 1'b0;
          ce_slot <= ~ce_slot;
          if (int'(c_kt) + 1 >= int'(ktiles)) begin
            c_kt <= '0;
            ce_bank <= ~ce_bank;
            if (int'(c_mt) + 1 >= int'(mtiles)) c_act <= 1'b0;
            else c_mt <= c_mt + 1'b1;
          end else c_kt <= c_kt + 1'b1;
        end
        // store scheduler
        if (st_go) s_busy <= 1'b1;
        if (st_done) begin
          s_busy <= 1'b0;
          st_bank <= ~st_bank;
          if (int'(st_mt) + 1 >= int'(mtiles)) begin
            s_act <= 1'b0; busy <= 1'b0; done <= 1'b1;
          end else st_mt <= st_mt + 1'b1;
        end
        slot_full <= (slot_full | sf_set) & ~sf_clr;
        bank_full <= (bank_full | bf_set) & ~bf_clr;
        // statistics
        if (l_busy && c_busy) n_overlap    <= n_overlap + 1;
        if (s_busy && c_busy) n_st_overlap <= n_st_overlap + 1;
        if (c_wait_ld)        n_ld_stall   <= n_ld_stall + 1;
        if (c_wait_bank)      n_bank_stall <= n_bank_stall + 1;
      end
    end
  end

  // a slot is only filled when empty and only drained when full
  property p_fill_empty;
    @(posedge clk) disable iff (!rst_n) ld_done |-> !slot_full[ld_slot];
  endproperty
  a_fill_empty: assert property (p_fill_empty);
  property p_drain_full;
    @(posedge clk) disable iff (!rst_n) ce_done |-> slot_full[ce_slot];
  endproperty
  a_drain_full: assert property (p_drain_full);
  property p_store_full;
    @(posedge clk) disable iff (!rst_n) st_done |-> bank_full[st_bank];
  endproperty
  a_store_full: assert property (p_store_full);
endmodule
