// tb_slack_unit: replays the four-round learning example (producer INST0 finishing 8
// cycles after INST1, both feeding INST2) and then the special cases:
//   round 1  slack 8 learnt, INST1 unstable, INST0 critical;
//   round 2  INST1 delayed by 8 arrives 2 cycles late -> slack 8 - 2 = 6, unstable;
//   round 3  INST1 delayed by 6 arrives together with INST0 -> stable;
//   round 4  dispatch delays drawn in [0, 6], spread over that range;
// criticality conflict (a CT member is never recorded as non-critical), keeping the
// smaller slack and turning stable on DT confirmation, removal of a producer that
// becomes critical, saturation of the slack at 31, a consumer whose early producer
// changes (the DT entry is replaced, then confirmed), timestamp wrap-around, and the
// cases that record nothing.
module tb_slack_unit;
  import paradise_pkg::*;
  logic clk = 0, rst_n = 0, reseed = 0, q_valid = 0;
  ts_t now = '0;
  pc_t q_pc = '0;
  logic q_hit, q_stable;
  slack_t q_delay;
  report_t rep = '0;
  su_events_t ev;
  int checks = 0, failures = 0;

  slack_unit #(.SETS(16), .WAYS(4), .SEED(16'hACE1)) dut (.*);
  always #5 clk = ~clk;

  localparam pc_t I0 = 40'h1000, I1 = 40'h1004, I2 = 40'h1008;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  su_events_t seen;   // events of the last report
  task automatic report(pc_t c, pc_t a, int ta, bit ia, pc_t b, int tb, bit ib);
    @(negedge clk);
    rep = '{valid: 1'b1, pc: c, p0_pc: a, p0_t: ts_t'(ta), p0_inj: ia, p1_pc: b, p1_t: ts_t'(tb), p1_inj: ib};
    #1;
    seen = ev;
    @(negedge clk);
    rep = '0;
  endtask

  task automatic query(pc_t p, output logic hit, output int d, output logic st);
    q_valid = 1; q_pc = p;
    #1;
    hit = q_hit; d = int'(q_delay); st = q_stable;
    @(negedge clk);
    q_valid = 0;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic h, st;
    int d, dmin, dmax;
    int hist [32];
    repeat (2) @(negedge clk);
    rst_n = 1;
    // ---------------- round 1: INST0 at 108, INST1 at 100
    report(I2, I0, 108, 0, I1, 100, 0);
    check(seen.crit_insert && seen.new_noncrit && !seen.overshoot, "round 1 events");
    query(I1, h, d, st);
    check(h && d == 8 && !st, $sformatf("round 1: INST1 hit=%0d delay=%0d stable=%0d", h, d, st));
    #1;
    check(ev.inject_unstable == 0, "event only while querying");
    query(I0, h, d, st);
    check(!h, "INST0 (critical) not in NCT");
    // ---------------- round 2: INST1 delayed 8, arrives 2 late
    report(I2, I0, 208, 0, I1, 210, 1);
    check(seen.overshoot && !seen.crit_insert, "round 2 overshoot event");
    query(I1, h, d, st);
    check(h && d == 6 && !st, $sformatf("round 2: slack 8-2 -> %0d stable=%0d", d, st));
    // ---------------- round 3: delay 6, arrives together with INST0
    report(I2, I0, 308, 0, I1, 308, 1);
    check(seen.mark_stable, "round 3 marks stable");
    // ---------------- round 4: random delays in [0, 6]
    dmin = 99; dmax = -1;
    foreach (hist[i]) hist[i] = 0;
    for (int i = 0; i < 300; i++) begin
      query(I1, h, d, st);
      if (!(h && st)) check(0, "stable hit expected");
      if (d < dmin) dmin = d;
      if (d > dmax) dmax = d;
      hist[d]++;
    end
    check(dmin == 0 && dmax == 6, $sformatf("random delay range %0d..%0d", dmin, dmax));
    begin
      int distinct;
      distinct = 0;
      foreach (hist[i]) if (hist[i] > 0) distinct++;
      check(distinct == 7, $sformatf("%0d distinct delays", distinct));
    end
    // INST1 delayed 2, finishes 4 before INST0: still consistent, stays stable at 6
    report(I2, I0, 408, 0, I1, 404, 1);
    check(!seen.overshoot && !seen.crit_insert, "round 4 consistent");
    for (int i = 0; i < 50; i++) begin
      query(I1, h, d, st);
      if (!(h && st && d <= 6)) check(0, "still stable, bound 6");
    end
    // ---------------- conflict: INST0 (in CT) is the early producer of another consumer
    report(40'h1020, I0, 10, 0, 40'h1024, 15, 0);
    check(seen.conflict && seen.crit_insert && !seen.new_noncrit, "conflict detected");
    query(I0, h, d, st);
    check(!h, "conflicting producer not recorded");
    // ---------------- shrink and DT confirmation
    report(40'h1100, 40'h10F0, 0, 0, 40'h10F8, 10, 0);    // 0x10F0 early by 10
    query(40'h10F0, h, d, st);
    check(h && d == 10 && !st, "slack 10 learnt");
    report(40'h1100, 40'h10F0, 50, 0, 40'h10F8, 54, 0);   // early by 4 now
    check(seen.shrink && seen.mark_stable, "smaller slack kept, DT confirms -> stable");
    dmax = -1;
    for (int i = 0; i < 60; i++) begin
      query(40'h10F0, h, d, st);
      if (!(h && st)) check(0, "stable after shrink");
      if (d > dmax) dmax = d;
    end
    check(dmax == 4, $sformatf("bound 4 after shrink, max %0d", dmax));
    report(40'h1100, 40'h10F0, 60, 0, 40'h10F8, 69, 0);   // larger slack: keep 4
    query(40'h10F0, h, d, st);
    check(h && st && d <= 4 && !seen.shrink, "larger slack ignored");
    // ---------------- producer turns critical: removed from NCT
    report(40'h1200, 40'h10F0, 90, 0, 40'h11F0, 80, 0);
    check(seen.crit_insert && seen.crit_drop_nct, "critical producer dropped from NCT");
    query(40'h10F0, h, d, st);
    check(!h, "dropped");
    // ---------------- saturation
    report(40'h1300, 40'h12F0, 0, 0, 40'h12F4, 100, 0);
    query(40'h12F0, h, d, st);
    check(h && d == 31, $sformatf("saturated slack %0d", d));
    // ---------------- another early producer for the same consumer: DT entry replaced
    report(40'h1300, 40'h12E8, 20, 0, 40'h12F4, 23, 0);
    check(seen.dt_change && seen.new_noncrit && !seen.mark_stable, "DT producer changed");
    report(40'h1300, 40'h12E8, 40, 0, 40'h12F4, 42, 0);   // same producer again: confirmed
    check(!seen.dt_change && seen.shrink && seen.mark_stable, "new DT producer confirmed");
    // wrap-around of the timestamp: 0xFFFE vs 0x0003 is 5 apart
    report(40'h1310, 40'h1304, 16'hFFFE, 0, 40'h1308, 3, 0);
    query(40'h1304, h, d, st);
    check(h && d == 5, $sformatf("wrapped timestamps: %0d", d));
    // ---------------- nothing recorded
    report(40'h1400, 40'h13F0, 7, 0, 40'h13F4, 7, 0);     // tie, no injection
    check(seen == '0, "tie records nothing");
    report(40'h1410, 40'h13F8, 0, 0, 40'h13F8, 9, 0);     // same producer PC
    check(seen == '0, "same producer records nothing");
    query(40'h13F0, h, d, st);
    check(!h, "no entry after tie");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
