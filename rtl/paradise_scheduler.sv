// paradise_scheduler: the issue stage of an out-of-order core extended with slack-based
// instruction reordering, the part of the core the reordering scheme adds or changes.
//
// Instructions that are not on the critical path are held back in their issue slot for
// a number of cycles no larger than their measured slack, so that the order and timing
// of their execution (and of their register-file writes, which dominate the power
// trace) varies from one loop iteration to the next while the critical path, and so
// performance, stays the same.
//
// Contents:
//   * three issue queues (INT with 3 issue ports, MEM and FP with one each; 8 slots each),
//     every slot with its own delay controller;
//   * the Slack Unit (DT, CT, NCT and the Galois LFSR) queried by dispatch with the PC
//     (step 1) and taught by issued consumers (step 2);
//   * a producer table with one entry per physical register: the producer's PC and
//     "injected" flag, written at dispatch, and the cycle its result was broadcast,
//     written on wakeup. It lets an issuing consumer name its two producers and their
//     result times;
//   * a report path: of the consumers issued in a cycle that have two register sources,
//     a round-robin pick is registered and handed to the Slack Unit the next cycle; the
//     others are dropped (ev.report_drop).
//
// Interface: one dispatched micro-op per cycle (disp_valid/disp_ready, routed by
// disp_uop.iq; disp_src_rdy comes from the core's busy table); N_WB wakeup ports from
// the execution units; N_ISS issue ports (0-2 INT, 3 MEM, 4 FP) with valid/ready; reseed
// mixes the cycle counter into the LFSR seed; ev pulses per event.
// Timing: the NCT lookup and the queue write happen in the dispatch cycle; a slot can
// issue the cycle after its last wakeup plus its delay; a report reaches the tables one
// cycle after the issue and changes them at the following edge.
// The queue count and sizes, the register count, the table geometry and the dispatch
// query / issue update split follow the design; the producer table, the single report
// per cycle and the dispatch width of one are this design's choices.
// Lint notes: the queues' occupancy outputs are left open and the Slack Unit's stable
// flag is not used here; both are status a host core may want, not needed for issue.
module paradise_scheduler
  import paradise_pkg::*;
#(
  parameter int          IQ_ENTRIES = 8,
  parameter int          PREGS      = 128,
  parameter int          SETS       = 16,
  parameter int          WAYS       = 4,
  parameter logic [15:0] SEED       = 16'hACE1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          reseed,
  // dispatch
  input  logic          disp_valid,
  output logic          disp_ready,
  input  uop_t          disp_uop,
  input  logic [1:0]    disp_src_rdy,
  // wakeup from the execution units
  input  logic          wb_valid [N_WB],
  input  preg_t         wb_pdst  [N_WB],
  // issue to the execution units
  output logic          iss_valid [N_ISS],
  input  logic          iss_ready [N_ISS],
  output issued_t       iss       [N_ISS],
  // events
  output sched_events_t ev
);
  localparam int NQ = 3;

  // ---------------------------------------------------------------- cycle counter
  ts_t now;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) now <= '0;
    else        now <= now + 1'b1;

  // ---------------------------------------------------------------- slack unit
  logic    disp_fire;
  logic    q_hit, q_stable;
  slack_t  q_delay;
  report_t rep_q;

  assign disp_fire = disp_valid && disp_ready;

  slack_unit #(.SETS(SETS), .WAYS(WAYS), .SEED(SEED)) u_su (
    .clk, .rst_n, .now, .reseed,
    .q_valid(disp_fire), .q_pc(disp_uop.pc),
    .q_hit, .q_delay, .q_stable,
    .rep(rep_q), .ev(ev.su)
  );

  // ---------------------------------------------------------------- issue queues
  logic enq_valid [NQ];
  logic enq_ready [NQ];
  logic dwait     [NQ];

  always_comb
    for (int q = 0; q < NQ; q++) enq_valid[q] = disp_valid && (disp_uop.iq == iq_sel_e'(q));

  always_comb begin
    disp_ready = 1'b0;
    for (int q = 0; q < NQ; q++) if (disp_uop.iq == iq_sel_e'(q)) disp_ready = enq_ready[q];
  end

  logic    int_v [3], int_r [3];
  issued_t int_i [3];
  logic    mem_v [1], mem_r [1];
  issued_t mem_i [1];
  logic    fp_v  [1], fp_r  [1];
  issued_t fp_i  [1];

  issue_queue #(.ENTRIES(IQ_ENTRIES), .ISSUE_W(3), .WB_PORTS(N_WB)) u_int_iq (
    .clk, .rst_n, .enq_valid(enq_valid[0]), .enq_ready(enq_ready[0]), .enq_uop(disp_uop),
    .enq_src_rdy(disp_src_rdy), .enq_inj(q_hit), .enq_delay(q_delay),
    .wb_valid, .wb_pdst, .iss_valid(int_v), .iss_ready(int_r), .iss(int_i),
    .delay_wait(dwait[0]), .occupancy()
  );
  issue_queue #(.ENTRIES(IQ_ENTRIES), .ISSUE_W(1), .WB_PORTS(N_WB)) u_mem_iq (
    .clk, .rst_n, .enq_valid(enq_valid[1]), .enq_ready(enq_ready[1]), .enq_uop(disp_uop),
    .enq_src_rdy(disp_src_rdy), .enq_inj(q_hit), .enq_delay(q_delay),
    .wb_valid, .wb_pdst, .iss_valid(mem_v), .iss_ready(mem_r), .iss(mem_i),
    .delay_wait(dwait[1]), .occupancy()
  );
  issue_queue #(.ENTRIES(IQ_ENTRIES), .ISSUE_W(1), .WB_PORTS(N_WB)) u_fp_iq (
    .clk, .rst_n, .enq_valid(enq_valid[2]), .enq_ready(enq_ready[2]), .enq_uop(disp_uop),
    .enq_src_rdy(disp_src_rdy), .enq_inj(q_hit), .enq_delay(q_delay),
    .wb_valid, .wb_pdst, .iss_valid(fp_v), .iss_ready(fp_r), .iss(fp_i),
    .delay_wait(dwait[2]), .occupancy()
  );

  always_comb begin
    for (int k = 0; k < 3; k++) begin
      iss_valid[k] = int_v[k];
      iss[k]       = int_i[k];
      int_r[k]     = iss_ready[k];
    end
    iss_valid[3] = mem_v[0];
    iss[3]       = mem_i[0];
    mem_r[0]     = iss_ready[3];
    iss_valid[4] = fp_v[0];
    iss[4]       = fp_i[0];
    fp_r[0]      = iss_ready[4];
  end

  // ---------------------------------------------------------------- producer table
  pc_t  pt_pc    [PREGS];
  logic pt_inj   [PREGS];
  ts_t  pt_t     [PREGS];
  logic pt_known [PREGS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < PREGS; r++) begin
        pt_pc[r]    <= '0;
        pt_inj[r]   <= 1'b0;
        pt_t[r]     <= '0;
        pt_known[r] <= 1'b0;
      end
    end else begin
      for (int w = 0; w < N_WB; w++)
        if (wb_valid[w]) pt_t[int'(wb_pdst[w]) % PREGS] <= now;
      if (disp_fire && disp_uop.dst_valid) begin
        pt_pc[int'(disp_uop.pdst) % PREGS]    <= disp_uop.pc;
        pt_inj[int'(disp_uop.pdst) % PREGS]   <= q_hit;
        pt_known[int'(disp_uop.pdst) % PREGS] <= 1'b1;
      end
    end
  end

  // ---------------------------------------------------------------- report path
  logic [2:0] rr_q;
  logic       cand [N_ISS];
  always_comb
    for (int k = 0; k < N_ISS; k++)
      cand[k] = iss_valid[k] && iss_ready[k] && iss[k].uop.src0_valid && iss[k].uop.src1_valid
             && pt_known[int'(iss[k].uop.psrc0) % PREGS] && pt_known[int'(iss[k].uop.psrc1) % PREGS];

  logic       pick_v;
  logic [2:0] pick;
  int         n_cand;
  always_comb begin
    pick_v = 1'b0;
    pick   = '0;
    n_cand = 0;
    for (int k = 0; k < N_ISS; k++) if (cand[k]) n_cand++;
    for (int j = 0; j < N_ISS; j++) begin
      int k;
      k = (int'(rr_q) + j) % N_ISS;
      if (cand[k] && !pick_v) begin
        pick_v = 1'b1;
        pick   = 3'(k);
      end
    end
  end

  preg_t rs0, rs1;                       // source registers of the picked micro-op
  assign rs0 = iss[pick].uop.psrc0;
  assign rs1 = iss[pick].uop.psrc1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rep_q <= '0;
      rr_q  <= '0;
    end else begin
      rep_q.valid <= pick_v;
      if (pick_v) begin
        rep_q.pc     <= iss[pick].uop.pc;
        rep_q.p0_pc  <= pt_pc[int'(rs0) % PREGS];
        rep_q.p0_t   <= pt_t[int'(rs0) % PREGS];
        rep_q.p0_inj <= pt_inj[int'(rs0) % PREGS];
        rep_q.p1_pc  <= pt_pc[int'(rs1) % PREGS];
        rep_q.p1_t   <= pt_t[int'(rs1) % PREGS];
        rep_q.p1_inj <= pt_inj[int'(rs1) % PREGS];
        rr_q         <= (pick == 3'(N_ISS-1)) ? '0 : pick + 1'b1;
      end
    end
  end

  assign ev.report_drop  = n_cand > 1;
  assign ev.disp_stall   = disp_valid && !disp_ready;
  assign ev.delayed_wait = dwait[0] || dwait[1] || dwait[2];

endmodule
