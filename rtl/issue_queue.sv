// issue_queue: issue queue whose slots carry an injected issue delay.
//
// Dispatch writes one micro-op per cycle into the lowest free slot, together with the
// delay and the "injected" flag the Slack Unit returned for it. A slot tracks the
// readiness of its (up to) two source operands; result broadcasts on the wakeup ports
// set them. Each slot has a delay_ctrl: once both operands are ready the slot still
// waits its delay before it may issue. Every cycle up to ISSUE_W eligible slots are
// offered on the issue ports, lowest slot first; a slot leaves when its port accepts.
//
// Timing: a wakeup is registered, so a slot whose last operand is broadcast in cycle T
// can issue in cycle T+1+delay. Wakeups in the cycle of enqueue are seen. The issued
// record carries the delay so that the core can account for it.
// That the delay is applied per issue slot after the operands are ready follows the
// design; the slot organisation, the lowest-slot-first select and the handshakes are
// this design's choices (the baseline core's own queue is not described).
module issue_queue
  import paradise_pkg::*;
#(
  parameter int ENTRIES  = 8,
  parameter int ISSUE_W  = 1,
  parameter int WB_PORTS = N_WB
) (
  input  logic    clk,
  input  logic    rst_n,
  // dispatch
  input  logic    enq_valid,
  output logic    enq_ready,
  input  uop_t    enq_uop,
  input  logic [1:0] enq_src_rdy,
  input  logic    enq_inj,
  input  slack_t  enq_delay,
  // wakeup
  input  logic    wb_valid [WB_PORTS],
  input  preg_t   wb_pdst  [WB_PORTS],
  // issue
  output logic    iss_valid [ISSUE_W],
  input  logic    iss_ready [ISSUE_W],
  output issued_t iss       [ISSUE_W],
  // status
  output logic    delay_wait,
  output logic [$clog2(ENTRIES+1)-1:0] occupancy
);
  localparam int SLOT_W = (ENTRIES > 1) ? $clog2(ENTRIES) : 1;

  logic   valid_q [ENTRIES];
  uop_t   uop_q   [ENTRIES];
  logic   rdy0_q  [ENTRIES];
  logic   rdy1_q  [ENTRIES];
  logic   inj_q   [ENTRIES];
  slack_t dly_q   [ENTRIES];

  logic   ops_ready [ENTRIES];
  logic   can_issue [ENTRIES];
  logic   load      [ENTRIES];
  logic   deq       [ENTRIES];

  function automatic logic woken(preg_t p, logic v [WB_PORTS], preg_t t [WB_PORTS]);
    logic r;
    r = 1'b0;
    for (int i = 0; i < WB_PORTS; i++) r |= v[i] && (t[i] == p);
    return r;
  endfunction

  // ---------------------------------------------------------------- enqueue slot
  logic              free_found;
  logic [SLOT_W-1:0] free_slot;
  always_comb begin
    free_found = 1'b0;
    free_slot  = '0;
    for (int e = 0; e < ENTRIES; e++)
      if (!valid_q[e] && !free_found) begin
        free_found = 1'b1;
        free_slot  = SLOT_W'(e);
      end
  end
  assign enq_ready = free_found;

  always_comb
    for (int e = 0; e < ENTRIES; e++)
      load[e] = enq_valid && free_found && (free_slot == SLOT_W'(e));

  // ---------------------------------------------------------------- delay controllers
  for (genvar e = 0; e < ENTRIES; e++) begin : g_slot
    assign ops_ready[e] = valid_q[e] && rdy0_q[e] && rdy1_q[e];
    delay_ctrl #(.DELAY_W(SLACK_W)) u_dly (
      .clk, .rst_n,
      .load(load[e]), .delay_in(enq_delay),
      .ops_ready(ops_ready[e]),
      .can_issue(can_issue[e])
    );
  end

  // ---------------------------------------------------------------- select
  always_comb begin
    logic taken [ENTRIES];
    for (int e = 0; e < ENTRIES; e++) begin
      taken[e] = 1'b0;
      deq[e]   = 1'b0;
    end
    for (int k = 0; k < ISSUE_W; k++) begin
      iss_valid[k] = 1'b0;
      iss[k]       = '0;
      for (int e = 0; e < ENTRIES; e++)
        if (can_issue[e] && !taken[e] && !iss_valid[k]) begin
          taken[e]     = 1'b1;
          iss_valid[k] = 1'b1;
          iss[k]       = '{uop: uop_q[e], inj: inj_q[e], delay: dly_q[e]};
          deq[e]       = iss_ready[k];
        end
    end
  end

  always_comb begin
    delay_wait = 1'b0;
    occupancy  = '0;
    for (int e = 0; e < ENTRIES; e++) begin
      delay_wait |= ops_ready[e] && !can_issue[e];
      occupancy  += valid_q[e];
    end
  end

  // ---------------------------------------------------------------- slot state
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int e = 0; e < ENTRIES; e++) begin
        valid_q[e] <= 1'b0;
        uop_q[e]   <= '0;
        rdy0_q[e]  <= 1'b0;
        rdy1_q[e]  <= 1'b0;
        inj_q[e]   <= 1'b0;
        dly_q[e]   <= '0;
      end
    end else begin
      for (int e = 0; e < ENTRIES; e++) begin
        if (load[e]) begin
          valid_q[e] <= 1'b1;
          uop_q[e]   <= enq_uop;
          rdy0_q[e]  <= !enq_uop.src0_valid || enq_src_rdy[0] || woken(enq_uop.psrc0, wb_valid, wb_pdst);
          rdy1_q[e]  <= !enq_uop.src1_valid || enq_src_rdy[1] || woken(enq_uop.psrc1, wb_valid, wb_pdst);
          inj_q[e]   <= enq_inj;
          dly_q[e]   <= enq_delay;
        end else if (deq[e]) begin
          valid_q[e] <= 1'b0;
        end else if (valid_q[e]) begin
          if (woken(uop_q[e].psrc0, wb_valid, wb_pdst)) rdy0_q[e] <= 1'b1;
          if (woken(uop_q[e].psrc1, wb_valid, wb_pdst)) rdy1_q[e] <= 1'b1;
        end
      end
    end
  end

endmodule
