// paradise_pkg: types and constants shared by the slack-based issue scheduler.
//
// The field widths follow the table layout of the design: a 12-bit PC field in every
// Slack Unit table, an 8-bit producer offset in the Destination Table and a 5-bit slack
// with a 1-bit stable flag in the Non-Critical Table. The PC width (40 bits), the 7-bit
// physical register tag (128 registers) and the 16-bit timestamp are this design's
// choices for a SonicBOOM-class RV64 core.
package paradise_pkg;

  localparam int PC_W    = 40;  // virtual PC width
  localparam int KEY_W   = 12;  // PC field stored in DT/CT/NCT
  localparam int OFF_W   = 8;   // DT non-critical producer offset
  localparam int SLACK_W = 5;   // NCT slack field, also the delay counter width
  localparam int PREG_W  = 7;   // physical register tag (128 registers)
  localparam int TS_W    = 16;  // result timestamp (free-running cycle counter)
  localparam int N_ISS   = 5;   // issue ports: 3 INT, 1 MEM, 1 FP
  localparam int N_WB    = 5;   // wakeup ports, one per execution unit

  typedef logic [PC_W-1:0]    pc_t;
  typedef logic [KEY_W-1:0]   key_t;
  typedef logic [OFF_W-1:0]   off_t;
  typedef logic [SLACK_W-1:0] slack_t;
  typedef logic [PREG_W-1:0]  preg_t;
  typedef logic [TS_W-1:0]    ts_t;

  typedef enum logic [1:0] {IQ_INT = 2'd0, IQ_MEM = 2'd1, IQ_FP = 2'd2} iq_sel_e;

  // Renamed micro-op as it leaves dispatch.
  typedef struct packed {
    pc_t     pc;
    iq_sel_e iq;
    logic    dst_valid;
    preg_t   pdst;
    logic    src0_valid;
    preg_t   psrc0;
    logic    src1_valid;
    preg_t   psrc1;
  } uop_t;

  // Micro-op leaving an issue queue, with the delay it was given at dispatch.
  typedef struct packed {
    uop_t   uop;
    logic   inj;    // the Non-Critical Table hit at dispatch
    slack_t delay;  // cycles it waited after its operands were ready
  } issued_t;

  // What the Slack Unit learns from one issued consumer.
  typedef struct packed {
    logic   valid;
    pc_t    pc;        // consumer
    pc_t    p0_pc;     // producer of source 0
    ts_t    p0_t;      // cycle its result was broadcast
    logic   p0_inj;    // it was given a delay at dispatch
    pc_t    p1_pc;
    ts_t    p1_t;
    logic   p1_inj;
  } report_t;

  // One-cycle event pulses of the Slack Unit.
  typedef struct packed {
    logic inject_unstable; // dispatch hit an unstable NCT entry: delay = slack
    logic inject_stable;   // dispatch hit a stable NCT entry: delay = random
    logic overshoot;       // injected producer became late: slack = old - overshoot
    logic mark_stable;     // entry turned stable
    logic new_noncrit;     // producer newly recorded as non-critical
    logic shrink;          // stored slack replaced by a smaller one
    logic crit_insert;     // late producer recorded as critical
    logic crit_drop_nct;   // a critical producer was removed from the NCT
    logic conflict;        // non-critical producer found in CT: not recorded
    logic dt_change;       // consumer's non-critical producer changed
  } su_events_t;

  // Events of the whole scheduler.
  typedef struct packed {
    su_events_t su;
    logic       report_drop;  // an issue report lost arbitration
    logic       disp_stall;   // dispatch held because the target queue was full
    logic       delayed_wait; // some slot was ready but still counting its delay
  } sched_events_t;

  // Stored PC field: bits [12:1] (bit 0 of a RISC-V PC is always zero).
  function automatic key_t pc_key(pc_t pc);
    return pc[KEY_W:1];
  endfunction

  // DT offset: byte distance from producer to consumer, modulo 256.
  function automatic off_t pc_offset(pc_t consumer, pc_t producer);
    pc_t d;
    d = consumer - producer;
    return d[OFF_W-1:0];
  endfunction

endpackage
