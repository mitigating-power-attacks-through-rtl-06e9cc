// slack_unit: learns which instructions have slack and tells dispatch how long to hold
// them back.
//
// Slack of a consumer with two register producers is |t0 - t1|, the distance between the
// cycles in which the two results were broadcast. The earlier producer is non-critical:
// it could have been issued up to that many cycles later without delaying the consumer.
// The unit keeps three 4-way x 16-set LRU tables: the Non-Critical Table (NCT: PC field,
// 5-bit slack, stable flag), the Critical Table (CT: PC field) and the Destination Table
// (DT: consumer PC field and the byte offset of its non-critical producer).
//
// Dispatch (step 1, combinational): q_pc is looked up in the NCT. On a hit the delay is
// the stored slack while the entry is unstable, and a random value in [0, slack] from a
// Galois LFSR once it is stable: delay = (r * (slack + 1)) >> 5 with r the LFSR's five
// low bits.
//
// Learning (step 2, one report per cycle, tables written at the clock edge). Let L be the
// producer whose result came last (producer 1 on a tie), E the other, d = |t0 - t1|
// saturated to 31, and "injected" mean the producer hit the NCT at its own dispatch.
//   * L injected and d > 0 (the delay overshot): NCT[L].slack = old - d (clamped at 0),
//     unstable. Nothing else changes.
//   * otherwise, an injected producer P (E, or L on a tie) still arrived in time: if the
//     DT says this consumer had the same non-critical producer before, NCT[P] becomes
//     stable with its slack unchanged. DT[consumer] := P.
//   * neither injected, d > 0: L is critical, so it is written into the CT and removed
//     from the NCT. If E is in the CT (a criticality conflict) E is not recorded.
//     Otherwise E is inserted unstable with slack d, or, if present, keeps the smaller
//     of its old slack and d and is stable exactly when the DT shows the same producer.
//     DT[consumer] := E.
//   * neither injected and a tie, or both producers with the same PC: nothing.
// The three tables, their fields, LRU, Eq. 1 for the slack, the "old - new" slack update
// of the unstable phase, stable-after-confirmation, the CT conflict rule and random
// delays bounded by the slack follow the design. How the rules combine when a producer
// was delayed, the tie handling and the random-range mapping are this design's choices.
//
// Interface: q_valid/q_pc -> q_hit/q_delay/q_stable in the same cycle; rep is a
// registered report_t from the top; reseed loads the LFSR with SEED xor now; ev pulses
// one cycle per event.
module slack_unit
  import paradise_pkg::*;
#(
  parameter int         SETS = 16,
  parameter int         WAYS = 4,
  parameter logic [15:0] SEED = 16'hACE1
) (
  input  logic       clk,
  input  logic       rst_n,
  input  ts_t        now,
  input  logic       reseed,
  // dispatch query
  input  logic       q_valid,
  input  pc_t        q_pc,
  output logic       q_hit,
  output slack_t     q_delay,
  output logic       q_stable,
  // issue report
  input  report_t    rep,
  // events
  output su_events_t ev
);
  localparam slack_t SLACK_MAX = '1;

  // ---------------------------------------------------------------- random source
  logic [15:0] lfsr;
  galois_lfsr #(.WIDTH(16), .TAPS(16'hB400), .SEED(SEED)) u_lfsr (
    .clk, .rst_n, .en(1'b1), .reseed, .reseed_value(now), .state(lfsr)
  );

  // ---------------------------------------------------------------- tables
  logic   n_qhit, n_qstable, n_uhit, n_ustable, n_wr, n_wstable, n_del, n_delfound;
  slack_t n_qslack, n_uslack, n_wslack;
  pc_t    n_upc, n_wpc, n_delpc;

  noncrit_table #(.SETS(SETS), .WAYS(WAYS)) u_nct (
    .clk, .rst_n,
    .q_valid, .q_pc, .q_hit(n_qhit), .q_slack(n_qslack), .q_stable(n_qstable),
    .u_pc(n_upc), .u_hit(n_uhit), .u_slack(n_uslack), .u_stable(n_ustable),
    .wr_en(n_wr), .wr_pc(n_wpc), .wr_slack(n_wslack), .wr_stable(n_wstable),
    .del_en(n_del), .del_pc(n_delpc), .del_found(n_delfound)
  );

  logic c_hit, c_ins;
  pc_t  c_lkpc, c_inspc;
  crit_table #(.SETS(SETS), .WAYS(WAYS)) u_ct (
    .clk, .rst_n, .lk_pc(c_lkpc), .lk_hit(c_hit), .ins_en(c_ins), .ins_pc(c_inspc)
  );

  logic d_hit, d_same, d_wr;
  off_t d_off;
  pc_t  d_prodpc;
  dest_table #(.SETS(SETS), .WAYS(WAYS)) u_dt (
    .clk, .rst_n, .lk_pc(rep.pc), .lk_prod_pc(d_prodpc), .lk_hit(d_hit), .lk_off(d_off),
    .lk_same(d_same), .wr_en(d_wr), .wr_pc(rep.pc), .wr_prod_pc(d_prodpc)
  );

  // ---------------------------------------------------------------- dispatch delay
  logic [SLACK_W+SLACK_W:0] scaled;
  assign scaled   = (2*SLACK_W+1)'(lfsr[SLACK_W-1:0]) * (2*SLACK_W+1)'({1'b0, n_qslack} + 1'b1);
  assign q_hit    = n_qhit;
  assign q_stable = n_qhit && n_qstable;
  assign q_delay  = !n_qhit ? '0 : n_qstable ? scaled[2*SLACK_W-1:SLACK_W] : n_qslack;

  // ---------------------------------------------------------------- learning
  ts_t    diff, dmag;
  logic   p1_late, tie, same_pc, go;
  slack_t dsat;
  pc_t    l_pc, e_pc, p_pc;
  logic   l_inj, e_inj;
  logic   c_over, c_cons, c_nat;

  always_comb begin
    diff    = rep.p1_t - rep.p0_t;
    p1_late = !diff[TS_W-1];
    dmag    = p1_late ? diff : ts_t'(-diff);
    dsat    = (dmag > ts_t'(SLACK_MAX)) ? SLACK_MAX : dmag[SLACK_W-1:0];
    tie     = (dmag == '0);
    l_pc    = p1_late ? rep.p1_pc  : rep.p0_pc;
    l_inj   = p1_late ? rep.p1_inj : rep.p0_inj;
    e_pc    = p1_late ? rep.p0_pc  : rep.p1_pc;
    e_inj   = p1_late ? rep.p0_inj : rep.p1_inj;
    same_pc = pc_key(rep.p0_pc) == pc_key(rep.p1_pc);
    go      = rep.valid && !same_pc;
    c_over  = go && l_inj && !tie;
    c_cons  = go && !c_over && (e_inj || (l_inj && tie));
    c_nat   = go && !l_inj && !e_inj && !tie;
    p_pc    = e_inj ? e_pc : l_pc;
  end

  assign n_upc    = c_over ? l_pc : (c_cons ? p_pc : e_pc);
  assign d_prodpc = c_cons ? p_pc : e_pc;
  assign c_lkpc   = e_pc;

  always_comb begin
    n_wr      = 1'b0;
    n_wpc     = n_upc;
    n_wslack  = n_uslack;
    n_wstable = 1'b0;
    n_del     = 1'b0;
    n_delpc   = l_pc;
    c_ins     = 1'b0;
    c_inspc   = l_pc;
    d_wr      = 1'b0;
    ev        = '0;
    ev.inject_unstable = n_qhit && !n_qstable;
    ev.inject_stable   = n_qhit && n_qstable;

    if (c_over) begin
      if (n_uhit) begin
        n_wr         = 1'b1;
        n_wslack     = (n_uslack > dsat) ? n_uslack - dsat : '0;
        n_wstable    = 1'b0;
        ev.overshoot = 1'b1;
      end
    end else if (c_cons) begin
      d_wr         = 1'b1;
      ev.dt_change = d_hit && !d_same;
      if (n_uhit && d_same) begin
        n_wr           = 1'b1;
        n_wslack       = n_uslack;
        n_wstable      = 1'b1;
        ev.mark_stable = !n_ustable;
      end
    end else if (c_nat) begin
      c_ins            = 1'b1;
      n_del            = 1'b1;
      ev.crit_insert   = 1'b1;
      ev.crit_drop_nct = n_delfound;
      if (c_hit) begin
        ev.conflict = 1'b1;
      end else begin
        d_wr         = 1'b1;
        ev.dt_change = d_hit && !d_same;
        n_wr         = 1'b1;
        if (n_uhit) begin
          n_wslack       = (dsat < n_uslack) ? dsat : n_uslack;
          n_wstable      = d_same;
          ev.shrink      = dsat < n_uslack;
          ev.mark_stable = d_same && !n_ustable;
        end else begin
          n_wslack       = dsat;
          n_wstable      = 1'b0;
          ev.new_noncrit = 1'b1;
        end
      end
    end
  end

  // d_off is kept for debug visibility only.
  off_t unused_off;
  assign unused_off = d_off;

endmodule
