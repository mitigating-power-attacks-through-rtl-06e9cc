// aes_core_model: behavioural out-of-order core around one paradise_scheduler, running
// the micro-op stream of byte-oriented AES-128 for NBLK plaintexts. Used by the AES
// workload test at the default table size and by the table-size sweep.
//
// Core model: rename of 64 architectural onto 128 physical registers, a 96-entry
// reorder buffer retiring three per cycle, single-cycle ALUs, a pipelined load port
// (8 cycles, 1 in 16 loads takes 20) and a 4-cycle FPU; a result waits for a free
// broadcast slot on its port. Data values are not computed: only the dataflow of the
// cipher matters to the scheduler. Per plaintext the stream is
//   * 16 plaintext-byte loads, then 16 key-byte loads each XORed into the state;
//   * 9 passes over one static round body (141 micro-ops, as a compiled loop would run
//     them): for each byte an address add and an S-box load (SubBytes with ShiftRows
//     folded into the register choice), MixColumns as XOR / shift micro-ops per column,
//     and AddRoundKey as 16 key loads and XORs; a loop-counter add ends the body;
//   * a final round without MixColumns (64 micro-ops).
// That is 1,381 micro-ops per plaintext. Stores of the ciphertext are left out (they
// have no register result to wake anything).
//
// Checks, counted in the checks / failures outputs: every micro-op issues exactly once,
// only after its operands were broadcast and its delay elapsed, on its queue's port, and
// the whole stream retires; over the second half of the plaintexts delays are injected,
// some of them stable random ones, some static instruction gets four or more different
// delays, and the run stays within MAX_OVER_PCT percent of the dispatch bound (one
// micro-op per cycle, so 1,381 cycles per plaintext), i.e. the delays stay off the
// critical path.
// Outputs: done rises when the stream has retired; cycles, delayed (micro-ops of the
// second half issued with a delay, per mille) and distinct (most different delays seen
// on one instruction) summarise the run. The clock is generated inside.
module aes_core_model
  import paradise_pkg::*;
#(
  parameter int SETS = 16,
  parameter int WAYS = 4,
  parameter int NBLK = 2000,
  parameter int MAX_OVER_PCT = 5       // allowed slowdown against the dispatch bound
) (
  output logic done,
  output int   checks,
  output int   failures,
  output int   cycles,
  output int   delayed,
  output int   distinct
);

  localparam int N_PRO  = 48;                    // plaintext and initial key
  localparam int N_RND  = 141;                   // one full round
  localparam int N_FIN  = 64;                    // final round
  localparam int NP     = N_PRO + N_RND + N_FIN; // static instructions
  localparam int PER    = N_PRO + 9 * N_RND + N_FIN;
  localparam int TOTAL  = NBLK * PER;
  localparam int ROBN   = 96;

  logic clk = 0, rst_n = 0, reseed = 0;
  logic disp_valid = 0, disp_ready;
  uop_t disp_uop = '0;
  logic [1:0] disp_src_rdy = '0;
  logic wb_valid [N_WB];
  preg_t wb_pdst [N_WB];
  logic iss_valid [N_ISS], iss_ready [N_ISS];
  issued_t iss [N_ISS];
  sched_events_t ev;

  paradise_scheduler #(.SETS(SETS), .WAYS(WAYS)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %m: %s", what); end
  endtask

  // ---------------------------------------------------------------- program
  // Architectural registers: state bytes s0..s15 in r1..r16, key temporaries r17..r32,
  // S-box results r33..r48, S-box base r50, key pointer r51, plaintext pointer r52,
  // round counter r53, MixColumns scratch r54..r58.
  typedef struct { iq_sel_e iq; int dst; int s0; int s1; } inst_t;
  inst_t prog [NP];
  function automatic int S(int i); return 1 + i;  endfunction
  function automatic int T(int i); return 17 + i; endfunction
  function automatic int U(int i); return 33 + i; endfunction
  // ShiftRows: byte i of the new state comes from byte sr(i) of the old one
  function automatic int sr(int i); return (i + 4 * (i % 4)) % 16; endfunction
  initial begin
    int n;
    n = 0;
    for (int i = 0; i < 16; i++) prog[n++] = '{IQ_MEM, S(i), 52, -1};       // lbu s_i, pt[i]
    for (int i = 0; i < 16; i++) begin
      prog[n++] = '{IQ_MEM, T(i), 51, -1};                                   // lbu t_i, key[i]
      prog[n++] = '{IQ_INT, S(i), S(i), T(i)};                               // xor s_i, t_i
    end
    // round body
    for (int i = 0; i < 16; i++) begin
      prog[n++] = '{IQ_INT, T(i), 50, S(sr(i))};                             // add t, sbox, s
      prog[n++] = '{IQ_MEM, U(i), T(i), -1};                                 // lbu u_i, 0(t)
    end
    for (int c = 0; c < 4; c++) begin
      prog[n++] = '{IQ_INT, 54, U(4*c), U(4*c+1)};                           // a0 ^ a1
      prog[n++] = '{IQ_INT, 55, U(4*c+2), U(4*c+3)};                         // a2 ^ a3
      prog[n++] = '{IQ_INT, 56, 54, 55};                                     // all four
      for (int j = 0; j < 4; j++) begin
        prog[n++] = '{IQ_INT, 57, U(4*c+j), U(4*c+(j+1)%4)};                 // a_j ^ a_j+1
        prog[n++] = '{IQ_INT, 58, 57, -1};                                   // xtime
        prog[n++] = '{IQ_INT, 57, 58, 56};                                   // ^ column sum
        prog[n++] = '{IQ_INT, S(4*c+j), U(4*c+j), 57};                       // new byte
      end
    end
    for (int i = 0; i < 16; i++) begin
      prog[n++] = '{IQ_MEM, T(i), 51, -1};                                   // round key
      prog[n++] = '{IQ_INT, S(i), S(i), T(i)};
    end
    prog[n++] = '{IQ_INT, 53, 53, -1};                                       // round count
    // final round: SubBytes, ShiftRows, AddRoundKey
    for (int i = 0; i < 16; i++) begin
      prog[n++] = '{IQ_INT, T(i), 50, S(sr(i))};
      prog[n++] = '{IQ_MEM, U(i), T(i), -1};
    end
    for (int i = 0; i < 16; i++) begin
      prog[n++] = '{IQ_MEM, T(i), 51, -1};
      prog[n++] = '{IQ_INT, S(i), U(i), T(i)};
    end
    if (n != NP) $fatal(1, "program has %0d instructions, expected %0d", n, NP);
  end

  // static instruction of dynamic micro-op number k
  function automatic int static_of(int k);
    int pos;
    pos = k % PER;
    if (pos < N_PRO) return pos;
    if (pos < N_PRO + 9 * N_RND) return N_PRO + (pos - N_PRO) % N_RND;
    return N_PRO + N_RND + (pos - N_PRO - 9 * N_RND);
  endfunction
  function automatic pc_t pc_of(int i);
    return pc_t'(40'h8000_4000 + 4 * i);
  endfunction

  // ---------------------------------------------------------------- core model state
  int    map [64];
  int    free_q [$];
  bit    busy [128];
  int    wake_cyc [128];
  typedef struct { int pdst; int old; int idx; int disp; bit done; bit issued; } rob_t;
  rob_t  rob [$];
  typedef struct { int cyc; int port; int p; } wbev_t;
  wbev_t wbq [$];

  int cyc = 0, n_disp = 0, n_iss = 0, n_ret = 0;
  int n_late = 0, n_late_delayed = 0, n_stable_inj = 0, half_start_cyc = 0;
  int delay_hist [NP][32];


  initial begin
    done = 0; checks = 0; failures = 0; cycles = 0; delayed = 0; distinct = 0;
    for (int i = 0; i < N_WB; i++) begin wb_valid[i] = 0; wb_pdst[i] = '0; end
    for (int i = 0; i < N_ISS; i++) iss_ready[i] = 1;
    for (int a = 0; a < 64; a++) map[a] = a;
    for (int p = 0; p < 128; p++) begin busy[p] = 0; wake_cyc[p] = -100; end
    for (int p = 64; p < 128; p++) free_q.push_back(p);
    foreach (delay_hist[i, j]) delay_hist[i][j] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    reseed = 1;
    @(negedge clk);
    reseed = 0;

    while (n_ret < TOTAL) begin
      @(negedge clk);
      cyc++;
      if (n_disp == TOTAL / 2 && half_start_cyc == 0) half_start_cyc = cyc;
      for (int i = 0; i < N_WB; i++) wb_valid[i] = 0;
      for (int j = wbq.size() - 1; j >= 0; j--)
        if (wbq[j].cyc == cyc) begin
          wb_valid[wbq[j].port] = 1;
          wb_pdst[wbq[j].port]  = preg_t'(wbq[j].p);
          wbq.delete(j);
        end
      disp_valid = 0;
      if (n_disp < TOTAL && rob.size() < ROBN && free_q.size() > 0) begin
        inst_t in;
        in = prog[static_of(n_disp)];
        disp_valid          = 1;
        disp_uop            = '0;
        disp_uop.pc         = pc_of(static_of(n_disp));
        disp_uop.iq         = in.iq;
        disp_uop.dst_valid  = 1;
        disp_uop.pdst       = preg_t'(free_q[0]);
        disp_uop.src0_valid = in.s0 >= 0;
        disp_uop.psrc0      = preg_t'(in.s0 >= 0 ? map[in.s0] : 0);
        disp_uop.src1_valid = in.s1 >= 0;
        disp_uop.psrc1      = preg_t'(in.s1 >= 0 ? map[in.s1] : 0);
        disp_src_rdy        = {!busy[disp_uop.psrc1], !busy[disp_uop.psrc0]};
      end
      #1;
      for (int k = 0; k < N_ISS; k++)
        if (iss_valid[k] && iss_ready[k]) begin
          int p, ready_at, lat, pos, t;
          bit clash;
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
          check(cyc >= ready_at + int'(iss[k].delay), $sformatf("cycle %0d: delay %0d not honoured", cyc, iss[k].delay));
          if (!iss[k].inj) check(iss[k].delay == 0, "delay without NCT hit");
          if (rob[pos].idx >= TOTAL / 2) begin
            n_late++;
            if (iss[k].delay != 0) n_late_delayed++;
            if (iss[k].inj) delay_hist[static_of(rob[pos].idx)][iss[k].delay]++;
          end
          lat = (k < 3) ? 1 : (k == 4) ? 4 : (($urandom_range(0, 15) == 0) ? 20 : 8);
          t = cyc + lat;
          do begin
            clash = 0;
            foreach (wbq[j]) if (wbq[j].port == k && wbq[j].cyc == t) clash = 1;
            if (clash) t++;
          end while (clash);
          wbq.push_back('{t, k, p});
        end
      if (ev.su.inject_stable && n_disp >= TOTAL / 2) n_stable_inj++;
      for (int i = 0; i < N_WB; i++)
        if (wb_valid[i]) begin
          busy[wb_pdst[i]] = 0;
          wake_cyc[wb_pdst[i]] = cyc;
          foreach (rob[j]) if (rob[j].pdst == int'(wb_pdst[i]) && rob[j].issued) rob[j].done = 1;
        end
      if (disp_valid && disp_ready) begin
        inst_t in;
        in = prog[static_of(n_disp)];
        void'(free_q.pop_front());
        rob.push_back('{int'(disp_uop.pdst), map[in.dst], n_disp, cyc, 0, 0});
        map[in.dst] = int'(disp_uop.pdst);
        busy[disp_uop.pdst] = 1;
        n_disp++;
      end
      for (int r = 0; r < 3; r++)
        if (rob.size() > 0 && rob[0].done) begin
          free_q.push_back(rob[0].old);
          void'(rob.pop_front());
          n_ret++;
        end
    end

    check(n_disp == TOTAL && n_iss == TOTAL && n_ret == TOTAL,
          $sformatf("dispatched %0d issued %0d retired %0d", n_disp, n_iss, n_ret));
    cycles   = cyc;
    delayed  = 1000 * n_late_delayed / n_late;
    $display("%m: %0d plaintexts, %0d micro-ops in %0d cycles: %0.1f cycles per plaintext (second half %0.1f)",
             NBLK, TOTAL, cyc, real'(cyc) / NBLK, real'(cyc - half_start_cyc) / (NBLK / 2));
    $display("%m: second half: %0d of %0d micro-ops delayed (%0.1f%%), %0d stable random injections",
             n_late_delayed, n_late, 100.0 * n_late_delayed / n_late, n_stable_inj);
    // one micro-op is dispatched per cycle, so PER cycles per plaintext is the bound
    $display("%m: dispatch bound %0d cycles per plaintext: %0.2f%% above it",
             PER, 100.0 * (real'(cyc) / TOTAL - 1.0));
    check(real'(cyc) < (1.0 + MAX_OVER_PCT / 100.0) * TOTAL,
          $sformatf("more than %0d%% above the dispatch bound", MAX_OVER_PCT));
    check(n_late_delayed > 0, "no delays injected once learning settled");
    check(n_stable_inj > 0, "no stable random delays");
    begin
      int best, best_i;
      best = 0; best_i = -1;
      for (int i = 0; i < NP; i++) begin
        int distinct;
        distinct = 0;
        for (int d = 0; d < 32; d++) if (delay_hist[i][d] > 0) distinct++;
        if (distinct > best) begin best = distinct; best_i = i; end
      end
      if (best_i >= 0) begin
        $write("%m: most varied: instruction %0d, delays", best_i);
        for (int d = 0; d < 32; d++) if (delay_hist[best_i][d] > 0) $write(" %0d:%0d", d, delay_hist[best_i][d]);
        $display("");
      end
      distinct = best;
      check(best >= 4, $sformatf("no instruction got 4 or more distinct delays (%0d)", best));
    end
    done = 1;
  end
endmodule
