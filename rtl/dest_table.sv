// dest_table: Destination Table (DT) of the Slack Unit.
//
// For each issued consumer instruction the DT remembers which of its producers was the
// non-critical one, as an 8-bit byte offset (consumer PC - producer PC, modulo 256) next
// to the consumer's 12-bit PC field. When the consumer issues again, lk_same tells the
// learning logic whether its non-critical producer is still the same instruction; that
// is what lets a Non-Critical Table entry become stable.
//
// Interface and timing: the lookup (lk_pc, lk_prod_pc -> lk_hit, lk_off, lk_same) is
// combinational; an upsert (wr_en) takes effect at the next clock edge and makes the
// entry most recently used. 4 ways x 16 sets with LRU replacement, the PC field and the
// 8-bit offset follow the design; the offset direction, the byte unit and the use of PC
// bits [12:1] as the stored field are this design's reading of the table layout.
module dest_table
  import paradise_pkg::*;
#(
  parameter int SETS = 16,
  parameter int WAYS = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  pc_t  lk_pc,
  input  pc_t  lk_prod_pc,
  output logic lk_hit,
  output off_t lk_off,
  output logic lk_same,
  input  logic wr_en,
  input  pc_t  wr_pc,
  input  pc_t  wr_prod_pc
);
  key_t rd_key   [1];
  logic rd_touch [1];
  logic rd_hit   [1];
  off_t rd_data  [1];

  assign rd_key[0]   = pc_key(lk_pc);
  assign rd_touch[0] = 1'b0;

  // No deletes in this table; the presence flag of the delete port is not needed.
  logic unused_del;

  lru_table #(.KEY_W(KEY_W), .DATA_W(OFF_W), .SETS(SETS), .WAYS(WAYS), .NRD(1)) u_tbl (
    .clk, .rst_n,
    .rd_key, .rd_touch, .rd_hit, .rd_data,
    .wr_en, .wr_key(pc_key(wr_pc)), .wr_data(pc_offset(wr_pc, wr_prod_pc)),
    .del_en(1'b0), .del_key('0), .del_found(unused_del)
  );

  assign lk_hit  = rd_hit[0];
  assign lk_off  = rd_data[0];
  assign lk_same = rd_hit[0] && (rd_data[0] == pc_offset(lk_pc, lk_prod_pc));

endmodule
