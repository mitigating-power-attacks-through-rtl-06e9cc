// tb_issue_queue: random traffic into an 8-slot, 2-issue-port queue with two wakeup
// ports and random back-pressure, checked against a cycle model:
//   * a micro-op never issues before max(enqueue+1, last wakeup+1) + its delay;
//   * the queue is work-conserving: whenever k micro-ops are eligible, min(k, 2) ports
//     are valid, so a lone micro-op issues exactly at that cycle;
//   * every micro-op issues exactly once and carries its delay and injected flag;
//   * enq_ready is low exactly when all 8 slots are full.
module tb_issue_queue;
  import paradise_pkg::*;
  localparam int W = 2, NW = 2, E = 8;
  localparam int PEND = -1000;  // wake cycle not yet known
  logic clk = 0, rst_n = 0;
  logic enq_valid = 0, enq_ready, enq_inj = 0;
  uop_t enq_uop = '0;
  logic [1:0] enq_src_rdy = '0;
  slack_t enq_delay = '0;
  logic wb_valid [NW];
  preg_t wb_pdst [NW];
  logic iss_valid [W], iss_ready [W];
  issued_t iss [W];
  logic delay_wait;
  logic [3:0] occupancy;
  int checks = 0, failures = 0;

  issue_queue #(.ENTRIES(E), .ISSUE_W(W), .WB_PORTS(NW)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  typedef struct {
    int enq; int delay; bit inj; preg_t s [2]; bit sv [2]; int wake [2]; bit issued;
  } rec_t;
  rec_t recs [int];         // by id
  bit   pending [16];       // preg has a producer in flight
  int   wake_at [16];       // planned wakeup cycle
  int   in_q;               // model occupancy
  int   n_issued = 0, n_delayed = 0, n_full = 0;

  function automatic int eligible_at(rec_t r);
    int t;
    t = r.enq + 1;
    for (int i = 0; i < 2; i++)
      if (r.sv[i]) begin
        if (r.wake[i] == PEND) return -1;
        if (r.wake[i] + 1 > t) t = r.wake[i] + 1;
      end
    return t + r.delay;
  endfunction

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int next_id = 0;
    for (int i = 0; i < NW; i++) begin wb_valid[i] = 0; wb_pdst[i] = '0; end
    for (int i = 0; i < W; i++) iss_ready[i] = 0;
    for (int p = 0; p < 16; p++) begin pending[p] = 0; wake_at[p] = 0; end
    in_q = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 12000; cyc++) begin
      int n_elig, n_v, nw;
      bit drain;
      @(negedge clk);
      drain = (cyc >= 11000);
      // new producers in flight
      if (!drain && $urandom_range(0, 2) == 0) begin
        int p;
        p = $urandom_range(0, 15);
        if (!pending[p]) begin pending[p] = 1; wake_at[p] = cyc + $urandom_range(1, 12); end
      end
      // wakeups due this cycle (at most NW)
      nw = 0;
      for (int i = 0; i < NW; i++) wb_valid[i] = 0;
      for (int p = 0; p < 16; p++)
        if (pending[p] && (wake_at[p] <= cyc || drain) && nw < NW) begin
          wb_valid[nw] = 1; wb_pdst[nw] = preg_t'(p); nw++;
        end
      // enqueue
      enq_valid = !drain && ($urandom_range(0, 3) != 0);
      enq_uop = '0;
      enq_uop.pc = pc_t'(next_id * 4);
      enq_uop.src0_valid = $urandom_range(0, 3) != 0;
      enq_uop.src1_valid = $urandom_range(0, 3) != 0;
      enq_uop.psrc0 = preg_t'($urandom_range(0, 15));
      enq_uop.psrc1 = preg_t'($urandom_range(0, 15));
      enq_src_rdy = {!pending[enq_uop.psrc1], !pending[enq_uop.psrc0]};
      enq_delay = ($urandom_range(0, 9) == 0) ? slack_t'($urandom_range(0, 31)) : slack_t'($urandom_range(0, 6));
      enq_inj = enq_delay != 0 || $urandom_range(0, 1);
      for (int i = 0; i < W; i++) iss_ready[i] = $urandom_range(0, 4) != 0;
      #1;
      // ---- check outputs against the model (state before this cycle's edge)
      check(enq_ready == (in_q < E), $sformatf("enq_ready %0d with %0d in queue", enq_ready, in_q));
      if (!enq_ready) n_full++;
      n_elig = 0;
      foreach (recs[id]) if (!recs[id].issued) begin
        int t;
        t = eligible_at(recs[id]);
        if (t >= 0 && t <= cyc) n_elig++;
      end
      n_v = 0;
      for (int k = 0; k < W; k++) if (iss_valid[k]) n_v++;
      check(n_v == ((n_elig < W) ? n_elig : W), $sformatf("cyc %0d: %0d eligible, %0d offered", cyc, n_elig, n_v));
      for (int k = 0; k < W; k++)
        if (iss_valid[k]) begin
          int id, t;
          id = int'(iss[k].uop.pc) / 4;
          if (!recs.exists(id) || recs[id].issued) begin
            check(0, $sformatf("unknown or repeated uop %0d", id));
          end else begin
            t = eligible_at(recs[id]);
            check(t >= 0 && t <= cyc, $sformatf("uop %0d offered at %0d, eligible at %0d (enq %0d s %0d/%0d v %0d/%0d wake %0d/%0d)", id, cyc, t, recs[id].enq, recs[id].s[0], recs[id].s[1], recs[id].sv[0], recs[id].sv[1], recs[id].wake[0], recs[id].wake[1]));
            check(iss[k].delay == slack_t'(recs[id].delay) && iss[k].inj == recs[id].inj, "delay/inj carried");
            if (iss_ready[k]) begin
              rec_t u;
              u = recs[id];
              u.issued = 1;
              recs[id] = u;
              in_q--;
              n_issued++;
              if (recs[id].delay > 0) n_delayed++;
            end
          end
        end
      // ---- model: enqueue, then wakeups of this cycle
      if (enq_valid && enq_ready) begin
        rec_t r;
        r.enq = cyc; r.delay = int'(enq_delay); r.inj = enq_inj; r.issued = 0;
        r.s[0] = enq_uop.psrc0; r.s[1] = enq_uop.psrc1;
        r.sv[0] = enq_uop.src0_valid; r.sv[1] = enq_uop.src1_valid;
        for (int i = 0; i < 2; i++) r.wake[i] = (r.sv[i] && pending[r.s[i]]) ? PEND : cyc - 1;
        recs[next_id] = r;
        next_id++;
        in_q++;
      end
      for (int i = 0; i < NW; i++)
        if (wb_valid[i]) begin
          pending[wb_pdst[i]] = 0;
          foreach (recs[id])
            for (int j = 0; j < 2; j++)
              if (!recs[id].issued && recs[id].sv[j] && recs[id].wake[j] == PEND && recs[id].s[j] == wb_pdst[i]) begin
                rec_t t;
                t = recs[id];
                t.wake[j] = cyc;
                recs[id] = t;
              end
        end
    end
    foreach (recs[id]) check(recs[id].issued, $sformatf("uop %0d never issued", id));
    check(n_delayed > 100 && n_full > 10, $sformatf("coverage: delayed %0d full %0d", n_delayed, n_full));
    $display("issued %0d (delayed %0d), queue-full cycles %0d", n_issued, n_delayed, n_full);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
