// tb_paradise_scheduler: end-to-end run of the scheduler at its default parameters
// inside a small behavioural core: in-order rename with a 128-register free list and
// busy table, a 96-entry reorder buffer retiring three per cycle, three single-cycle
// ALUs, a pipelined load unit (8 cycles, 1 in 16 loads misses and takes 20) with random
// back-pressure, and a pipelined 4-cycle FPU, each broadcasting on its own wakeup port.
// Registers are renamed from a 64-entry architectural map onto the 128 physical ones.
//
// The program is a loop run ITER times: the first half iterates over its first 18
// instructions only, so that several iterations are in flight at once, the second half
// over all 88. The body holds the two-producer pattern of the slack example
// (a slow load and a fast add feeding one consumer) plus producers that are critical for
// one consumer and non-critical for another. After the loop the core drains and a short
// directed phase runs two loads and an add four times with chosen load latencies, so
// that the rarer learning steps (a smaller slack, a non-critical producer turning
// critical, a consumer whose early producer changes) happen on every run. The test
// checks that
//   * every dispatched micro-op issues exactly once and retires, and the loop completes;
//   * no micro-op issues before its operands were broadcast, nor before its delay has
//     elapsed; micro-ops that missed the Non-Critical Table carry no delay;
//   * once learning settles, some instruction gets several different random delays
//     (its issue time is desynchronised from the loop);
//   * every mechanism happens at least once: unstable and stable delay injection, the
//     overshoot correction, marking stable, new non-critical entries, critical inserts,
//     criticality conflicts, smaller-slack updates, removal of a producer turned
//     critical, a changed non-critical producer in the DT, dropped issue reports, a
//     dispatch stall on a full queue and a ready slot held back by its delay.
module tb_paradise_scheduler;
  import paradise_pkg::*;

  localparam int ITER = 400;
  localparam int NI   = 88;   // 18 hand-written instructions + 70 filler adds
  localparam int NP   = NI + 4; // plus the three loads and the add of the directed phase
  localparam int ROBN = 96;
  localparam int NSHORT = 18;                                  // body of the first half
  localparam int N_MAIN = (ITER / 2) * NSHORT + (ITER - ITER / 2) * NI;
  localparam int N_DIR  = 12;                                  // directed phase
  localparam int TOTAL  = N_MAIN + N_DIR;

  logic clk = 0, rst_n = 0, reseed = 0;
  logic disp_valid = 0, disp_ready;
  uop_t disp_uop = '0;
  logic [1:0] disp_src_rdy = '0;
  logic wb_valid [N_WB];
  preg_t wb_pdst [N_WB];
  logic iss_valid [N_ISS], iss_ready [N_ISS];
  issued_t iss [N_ISS];
  sched_events_t ev;

  paradise_scheduler dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  // ---------------------------------------------------------------- program
  typedef struct { iq_sel_e iq; int dst; int s0; int s1; } inst_t;
  inst_t prog [NP];
  initial begin
    //             queue   dst  src0 src1        arch regs: r1..r12 int, r13..r15 fp
    prog[0]  = '{IQ_MEM, 1,  10, -1};   // load  r1  <- [r10]         slow producer
    prog[1]  = '{IQ_INT, 2,   3,  4};   // add   r2  <- r3 + r4       fast producer
    prog[2]  = '{IQ_INT, 5,   1,  2};   // xor   r5  <- r1 ^ r2       consumer of both
    prog[3]  = '{IQ_INT, 3,   5,  3};   // add   r3  <- r5 + r3
    prog[4]  = '{IQ_FP, 13,  13, 14};   // fmul  f13 <- f13 * f14
    prog[5]  = '{IQ_INT, 4,   4,  6};   // add   r4  <- r4 + r6
    prog[6]  = '{IQ_INT, 7,   1,  4};   // add   r7  <- r1 + r4
    prog[7]  = '{IQ_FP, 14,  13,  4};   // fadd  f14 <- f13 + r4
    prog[8]  = '{IQ_MEM, 8,  10,  7};   // load  r8  <- [r10 + r7]
    prog[9]  = '{IQ_INT, 9,   2,  8};   // sub   r9  <- r2 - r8       r2 critical here?
    prog[10] = '{IQ_INT, 6,   9,  6};   // add   r6  <- r9 + r6
    prog[11] = '{IQ_INT, 10, 10, 12};   // add   r10 <- r10 + r12
    prog[12] = '{IQ_MEM, 16, 10, -1};   // load  r16 <- [r10]         latency 4..20
    prog[13] = '{IQ_INT, 17, 12, 12};   // add   r17 <- r12 + r12     always early
    prog[14] = '{IQ_INT, 18, 16, 17};   // add   r18 <- r16 + r17
    prog[15] = '{IQ_MEM, 19, 10, -1};   // load  r19 <- [r10]         latency 4..20
    prog[16] = '{IQ_FP,  20, 21, 21};   // fmul  r20 <- r21 * r21     4 cycles
    prog[17] = '{IQ_INT, 22, 19, 20};   // add   r22 <- r19 + r20     either may be late
    // A chain of adds, each reading the two previous results: every one is the
    // critical producer of the next, so the Critical Table sees more PCs than it holds
    // and keeps replacing entries.
    for (int f = 0; f < NI - 18; f++)
      prog[18 + f] = '{IQ_INT, 40 + (f % 8), 40 + ((f + 7) % 8), 40 + ((f + 6) % 8)};
    // directed phase: two loads feeding one add, with latencies set per instance
    prog[NI]     = '{IQ_MEM, 30, 10, -1};  // load  r30 <- [r10]        producer A
    prog[NI + 1] = '{IQ_MEM, 32, 10, -1};  // load  r32 <- [r10]        producer B
    prog[NI + 2] = '{IQ_INT, 33, 30, 32};  // add   r33 <- r30 + r32    consumer
    prog[NI + 3] = '{IQ_MEM, 30, 11, -1};  // load  r30 <- [r11]        producer A'
  end

  // Dispatch stream: instruction index and forced load latency (-1: default rule);
  // index -1 is a barrier that waits until the core has drained.
  typedef struct { int idx; int lat; } item_t;
  item_t stream [$];
  initial begin
    for (int it = 0; it < ITER; it++)
      for (int i = 0; i < ((it < ITER / 2) ? NSHORT : NI); i++) stream.push_back('{i, -1});
    stream.push_back('{-1, -1});
    // Each instance is A, B, add, dispatched one per cycle on an idle core:
    //   1: A 4, B 12: A early by 9 -> new non-critical entry for A, B critical
    //   2: A 8, B 14: A early by 7 -> smaller slack (A was dispatched before 1 reported)
    //   3: A 20, B 4: A late and not delayed -> A turns critical and leaves the NCT
    //   4: A' 4, B 20: another early producer for the same add -> its DT entry changes
    stream.push_back('{NI, 4});     stream.push_back('{NI + 1, 12}); stream.push_back('{NI + 2, -1});
    stream.push_back('{NI, 8});     stream.push_back('{NI + 1, 14}); stream.push_back('{NI + 2, -1});
    stream.push_back('{NI, 20});    stream.push_back('{NI + 1, 4});  stream.push_back('{NI + 2, -1});
    stream.push_back('{NI + 3, 4}); stream.push_back('{NI + 1, 20}); stream.push_back('{NI + 2, -1});
  end
  function automatic pc_t pc_of(int i);
    return pc_t'(40'h8000_1000 + 4 * i);
  endfunction

  // ---------------------------------------------------------------- core model state
  int    map [64];            // arch -> preg
  int    free_q [$];
  bit    busy [128];
  int    wake_cyc [128];      // cycle of the last broadcast of each preg
  typedef struct { int pdst; int old; int idx; int disp; bit done; bit issued; int lat; } rob_t;
  rob_t  rob [$];
  int    inflight [128];      // preg -> rob position tag (dispatch serial)
  int    serial_of [128];
  typedef struct { int cyc; int port; int p; } wbev_t;
  wbev_t wbq [$];

  // statistics
  int cyc = 0, n_disp = 0, n_iss = 0, n_ret = 0;
  int n_ev [14];
  int delay_hist [NP][32];   // per static instruction: delays seen in the second half
  string ev_name [14] = '{"inject_unstable", "inject_stable", "overshoot", "mark_stable",
                          "new_noncrit", "shrink", "crit_insert", "crit_drop_nct", "conflict",
                          "dt_change", "report_drop", "disp_stall", "delayed_wait", "reseed"};

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired at cycle %0d (dispatched %0d issued %0d retired %0d)", cyc, n_disp, n_iss, n_ret);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int si;
    for (int i = 0; i < N_WB; i++) begin wb_valid[i] = 0; wb_pdst[i] = '0; end
    for (int i = 0; i < N_ISS; i++) iss_ready[i] = 1;
    for (int a = 0; a < 64; a++) map[a] = a;
    for (int p = 0; p < 128; p++) begin busy[p] = 0; wake_cyc[p] = -100; end
    for (int p = 64; p < 128; p++) free_q.push_back(p);
    foreach (n_ev[i]) n_ev[i] = 0;
    foreach (delay_hist[i, j]) delay_hist[i][j] = 0;
    si = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    reseed = 1;          // mix the run-time cycle count into the LFSR seed once
    n_ev[13]++;
    @(negedge clk);
    reseed = 0;

    while (n_ret < TOTAL) begin
      @(negedge clk);
      cyc++;
      // ---- wakeups due this cycle
      for (int i = 0; i < N_WB; i++) wb_valid[i] = 0;
      for (int j = wbq.size() - 1; j >= 0; j--)
        if (wbq[j].cyc == cyc) begin
          wb_valid[wbq[j].port] = 1;
          wb_pdst[wbq[j].port]  = preg_t'(wbq[j].p);
          wbq.delete(j);
        end
      // ---- dispatch candidate
      disp_valid = 0;
      if (si < stream.size() && stream[si].idx < 0 && rob.size() == 0 && wbq.size() == 0)
        si++;                                          // barrier passed
      if (si < stream.size() && stream[si].idx >= 0 && rob.size() < ROBN && free_q.size() > 0) begin
        inst_t in;
        in = prog[stream[si].idx];
        disp_valid          = 1;
        disp_uop            = '0;
        disp_uop.pc         = pc_of(stream[si].idx);
        disp_uop.iq         = in.iq;
        disp_uop.dst_valid  = 1;
        disp_uop.pdst       = preg_t'(free_q[0]);
        disp_uop.src0_valid = in.s0 >= 0;
        disp_uop.psrc0      = preg_t'(in.s0 >= 0 ? map[in.s0] : 0);
        disp_uop.src1_valid = in.s1 >= 0;
        disp_uop.psrc1      = preg_t'(in.s1 >= 0 ? map[in.s1] : 0);
        disp_src_rdy        = {!busy[disp_uop.psrc1], !busy[disp_uop.psrc0]};
      end
      iss_ready[3] = (n_disp >= N_MAIN) || ($urandom_range(0, 9) != 0); // load-port back-pressure
      #1;
      // ---- events
      if (ev.su.inject_unstable) n_ev[0]++;
      if (ev.su.inject_stable)   n_ev[1]++;
      if (ev.su.overshoot)       n_ev[2]++;
      if (ev.su.mark_stable)     n_ev[3]++;
      if (ev.su.new_noncrit)     n_ev[4]++;
      if (ev.su.shrink)          n_ev[5]++;
      if (ev.su.crit_insert)     n_ev[6]++;
      if (ev.su.crit_drop_nct)   n_ev[7]++;
      if (ev.su.conflict)        n_ev[8]++;
      if (ev.su.dt_change)       n_ev[9]++;
      if (ev.report_drop)        n_ev[10]++;
      if (ev.disp_stall)         n_ev[11]++;
      if (ev.delayed_wait)       n_ev[12]++;
      // ---- issue
      for (int k = 0; k < N_ISS; k++)
        if (iss_valid[k] && iss_ready[k]) begin
          int p, ready_at, lat, pos;
          uop_t u;
          u = iss[k].uop;
          p = int'(u.pdst);
          n_iss++;
          pos = -1;
          foreach (rob[j]) if (rob[j].pdst == p && !rob[j].issued) pos = j;
          if (pos < 0) begin
            check(0, $sformatf("cycle %0d: issued micro-op p%0d not in flight", cyc, p));
            continue;
          end
          rob[pos].issued = 1;
          check((k < 3 && u.iq == IQ_INT) || (k == 3 && u.iq == IQ_MEM) || (k == 4 && u.iq == IQ_FP), "issued on its queue's port");
          ready_at = rob[pos].disp + 1;
          if (u.src0_valid) begin
            check(!busy[u.psrc0] && wake_cyc[u.psrc0] < cyc, $sformatf("cycle %0d: src0 p%0d not ready", cyc, u.psrc0));
            if (wake_cyc[u.psrc0] + 1 > ready_at) ready_at = wake_cyc[u.psrc0] + 1;
          end
          if (u.src1_valid) begin
            check(!busy[u.psrc1] && wake_cyc[u.psrc1] < cyc, $sformatf("cycle %0d: src1 p%0d not ready", cyc, u.psrc1));
            if (wake_cyc[u.psrc1] + 1 > ready_at) ready_at = wake_cyc[u.psrc1] + 1;
          end
          check(cyc >= ready_at + int'(iss[k].delay), $sformatf("cycle %0d: delay %0d not honoured (ready %0d)", cyc, iss[k].delay, ready_at));
          if (!iss[k].inj) check(iss[k].delay == 0, "delay without NCT hit");
          if (iss[k].inj && rob[pos].idx >= N_MAIN / 2) delay_hist[int'((u.pc - pc_of(0)) >> 2)][iss[k].delay]++;
          // loads: 8 cycles, 1 in 16 misses and takes 20 (the two loads of the second
          // pattern take 4..20 cycles); a result waits for a free
          // broadcast slot on its port
          lat = (k < 3) ? 1 : (k != 3) ? 4 : (rob[pos].lat >= 0) ? rob[pos].lat : (u.pc == pc_of(12) || u.pc == pc_of(15)) ? $urandom_range(4, 20) : (($urandom_range(0, 15) == 0) ? 20 : 8);
          begin
            int t;
            bit clash;
            t = cyc + lat;
            do begin
              clash = 0;
              foreach (wbq[j]) if (wbq[j].port == k && wbq[j].cyc == t) clash = 1;
              if (clash) t++;
            end while (clash);
            wbq.push_back('{t, k, p});
          end
        end
      // ---- model updates of this cycle (after the edge they take effect)
      for (int i = 0; i < N_WB; i++)
        if (wb_valid[i]) begin
          busy[wb_pdst[i]] = 0;
          wake_cyc[wb_pdst[i]] = cyc;
          foreach (rob[j]) if (rob[j].pdst == int'(wb_pdst[i]) && rob[j].issued) rob[j].done = 1;
        end
      if (disp_valid && disp_ready) begin
        inst_t in;
        in = prog[stream[si].idx];
        void'(free_q.pop_front());
        rob.push_back('{int'(disp_uop.pdst), map[in.dst], n_disp, cyc, 0, 0, stream[si].lat});
        map[in.dst] = int'(disp_uop.pdst);
        busy[disp_uop.pdst] = 1;
        n_disp++;
        si++;
      end
      // retire up to three
      for (int r = 0; r < 3; r++)
        if (rob.size() > 0 && rob[0].done) begin
          free_q.push_back(rob[0].old);
          void'(rob.pop_front());
          n_ret++;
        end
    end

    // ---- final checks
    check(n_disp == TOTAL && n_iss == TOTAL && n_ret == TOTAL,
          $sformatf("dispatched %0d issued %0d retired %0d", n_disp, n_iss, n_ret));
    $display("cycles %0d for %0d micro-ops (IPC %0.2f)", cyc, n_ret, real'(n_ret) / real'(cyc));
    for (int i = 0; i < 14; i++) begin
      $display("  %-16s %0d", ev_name[i], n_ev[i]);
      check(n_ev[i] > 0, $sformatf("mechanism %s never happened", ev_name[i]));
    end
    begin
      int best;
      best = 0;
      for (int i = 0; i < NP; i++) begin
        int distinct;
        distinct = 0;
        for (int d = 0; d < 32; d++) if (delay_hist[i][d] > 0) distinct++;
        if (distinct > best) best = distinct;
        if (distinct > 0) begin
          $write("  inst %0d delays (second half):", i);
          for (int d = 0; d < 32; d++) if (delay_hist[i][d] > 0) $write(" %0d:%0d", d, delay_hist[i][d]);
          $display("");
        end
      end
      check(best >= 3, $sformatf("no instruction got 3 or more distinct delays (%0d)", best));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
