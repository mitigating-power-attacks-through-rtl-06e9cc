// crit_table: Critical Table (CT) of the Slack Unit.
//
// A set of instructions (12-bit PC fields) that have been seen as the late, critical
// producer of some consumer. Before the learning logic records a producer as
// non-critical it looks the producer up here; a hit is a criticality conflict (the
// instruction is critical for another consumer) and the producer is then not recorded.
//
// Interface and timing: lk_pc -> lk_hit is combinational; ins_en inserts or refreshes
// ins_pc at the next clock edge, replacing the least recently used way of a full set.
// Entries leave only by replacement. 4 ways x 16 sets and LRU follow the design; storing
// PC bits [12:1] and the set hash are this design's choices.
module crit_table
  import paradise_pkg::*;
#(
  parameter int SETS = 16,
  parameter int WAYS = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  pc_t  lk_pc,
  output logic lk_hit,
  input  logic ins_en,
  input  pc_t  ins_pc
);
  key_t     rd_key   [1];
  logic     rd_touch [1];
  logic     rd_hit   [1];
  logic [0:0] rd_data [1];

  assign rd_key[0]   = pc_key(lk_pc);
  assign rd_touch[0] = 1'b0;

  // No deletes in this table; the presence flag of the delete port is not needed.
  logic unused_del;

  // The CT has no payload; a constant 1 marks "critical".
  lru_table #(.KEY_W(KEY_W), .DATA_W(1), .SETS(SETS), .WAYS(WAYS), .NRD(1)) u_tbl (
    .clk, .rst_n,
    .rd_key, .rd_touch, .rd_hit, .rd_data,
    .wr_en(ins_en), .wr_key(pc_key(ins_pc)), .wr_data(1'b1),
    .del_en(1'b0), .del_key('0), .del_found(unused_del)
  );

  assign lk_hit = rd_hit[0] && rd_data[0];

endmodule
