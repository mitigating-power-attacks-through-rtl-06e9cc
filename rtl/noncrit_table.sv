// noncrit_table: Non-Critical Table (NCT) of the Slack Unit.
//
// Holds non-critical instructions (12-bit PC field) with their slack (5 bits) and a
// stable flag (1 bit). Dispatch looks a new instruction up on the q_ port to learn the
// delay to inject; the learning logic uses the u_ port to read an entry it is about to
// change. One issue report may upsert one entry and delete another in the same cycle.
//
// Interface and timing: both lookups are combinational and see the contents before this
// cycle's writes. A dispatch hit makes the entry most recently used; an upsert does too.
// Upserts and deletes take effect at the next clock edge. 4 ways x 16 sets, LRU and the
// field widths follow the design; the second lookup port, the delete port and the stored
// PC bits [12:1] are this design's choices.
module noncrit_table
  import paradise_pkg::*;
#(
  parameter int SETS = 16,
  parameter int WAYS = 4
) (
  input  logic   clk,
  input  logic   rst_n,
  // dispatch lookup
  input  logic   q_valid,
  input  pc_t    q_pc,
  output logic   q_hit,
  output slack_t q_slack,
  output logic   q_stable,
  // learning lookup
  input  pc_t    u_pc,
  output logic   u_hit,
  output slack_t u_slack,
  output logic   u_stable,
  // upsert
  input  logic   wr_en,
  input  pc_t    wr_pc,
  input  slack_t wr_slack,
  input  logic   wr_stable,
  // delete
  input  logic   del_en,
  input  pc_t    del_pc,
  output logic   del_found
);
  localparam int DW = SLACK_W + 1;

  key_t            rd_key   [2];
  logic            rd_touch [2];
  logic            rd_hit   [2];
  logic [DW-1:0]   rd_data  [2];

  assign rd_key[0]   = pc_key(q_pc);
  assign rd_touch[0] = q_valid;
  assign rd_key[1]   = pc_key(u_pc);
  assign rd_touch[1] = 1'b0;

  lru_table #(.KEY_W(KEY_W), .DATA_W(DW), .SETS(SETS), .WAYS(WAYS), .NRD(2)) u_tbl (
    .clk, .rst_n,
    .rd_key, .rd_touch, .rd_hit, .rd_data,
    .wr_en, .wr_key(pc_key(wr_pc)), .wr_data({wr_slack, wr_stable}),
    .del_en, .del_key(pc_key(del_pc)), .del_found
  );

  assign q_hit    = q_valid && rd_hit[0];
  assign q_slack  = rd_data[0][DW-1:1];
  assign q_stable = rd_data[0][0];
  assign u_hit    = rd_hit[1];
  assign u_slack  = rd_data[1][DW-1:1];
  assign u_stable = rd_data[1][0];

endmodule
