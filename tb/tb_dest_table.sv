// tb_dest_table: directed checks of the Destination Table: miss before any write, hit
// with the stored producer offset (consumer PC - producer PC, mod 256), lk_same only for
// the same producer, overwrite, and LRU replacement when five consumers share a set;
// then 5,000 cycles of random writes and lookups compared with a recency-list model.
module tb_dest_table;
  import paradise_pkg::*;
  logic clk = 0, rst_n = 0, wr_en = 0;
  pc_t lk_pc = '0, lk_prod_pc = '0, wr_pc = '0, wr_prod_pc = '0;
  logic lk_hit, lk_same;
  off_t lk_off;
  int checks = 0, failures = 0;

  dest_table #(.SETS(16), .WAYS(4)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic write(pc_t c, pc_t p);
    @(negedge clk);
    wr_en = 1; wr_pc = c; wr_prod_pc = p;
    @(negedge clk);
    wr_en = 0;
  endtask

  task automatic look(pc_t c, pc_t p);
    lk_pc = c; lk_prod_pc = p;
    #1;
  endtask

  // PCs whose 12-bit field {a, a, 0} all fall in set 0.
  function automatic pc_t same_set_pc(int a);
    return pc_t'({4'(a), 4'(a), 4'h0, 1'b0}) + 40'h8000_0000;
  endfunction


  // ---------------- random traffic against a recency-list model (writes refresh, lookups
  // do not). 24 keys fall in 3 sets, 8 keys per 4-way set, so replacement is frequent.
  typedef struct { key_t k; logic [7:0] d; } ment_t;
  ment_t model [16][$];
  key_t  pool [24];
  function automatic int mset(key_t k);
    return int'(k[3:0] ^ k[7:4] ^ k[11:8]);
  endfunction
  function automatic int mfind(int s, key_t k);
    foreach (model[s][i]) if (model[s][i].k == k) return i;
    return -1;
  endfunction
  function automatic pc_t pick_pc();
    return pc_t'({pool[$urandom_range(0, 23)], 1'b0});
  endfunction
  function automatic void init_pool();
    for (int i = 0; i < 24; i++) begin
      logic [3:0] hi, mid, lo;
      hi  = 4'(i / 8);
      mid = 4'(i % 8 + 2);
      lo  = 4'(1 + 4 * (i / 8)) ^ hi ^ mid;
      pool[i] = {hi, mid, lo};
    end
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    look(40'h1310, 40'h1250);
    check(!lk_hit && !lk_same, "empty table misses");
    write(40'h1310, 40'h1250);               // offset 0xC0 = 192
    look(40'h1310, 40'h1250);
    check(lk_hit && lk_same && lk_off == 8'd192, $sformatf("offset 192, got %0d", lk_off));
    look(40'h1310, 40'h1300);
    check(lk_hit && !lk_same, "different producer is not the same");
    write(40'h1320, 40'h131C);               // offset 4
    look(40'h1320, 40'h131C);
    check(lk_hit && lk_same && lk_off == 8'd4, "offset 4");
    write(40'h1310, 40'h1308);               // overwrite: offset 8
    look(40'h1310, 40'h1308);
    check(lk_hit && lk_same && lk_off == 8'd8, "overwrite to offset 8");
    look(40'h1330, 40'h1328);
    check(!lk_hit, "unwritten consumer misses");
    // LRU: fill set 0 with four consumers, refresh the first, add a fifth:
    // the second (least recent) must go.
    for (int a = 1; a <= 4; a++) write(same_set_pc(a), same_set_pc(a) - 40'd16);
    write(same_set_pc(1), same_set_pc(1) - 40'd16);
    write(same_set_pc(5), same_set_pc(5) - 40'd16);
    look(same_set_pc(2), same_set_pc(2) - 40'd16);
    check(!lk_hit, "least recent entry evicted");
    for (int a = 1; a <= 5; a++)
      if (a != 2) begin
        look(same_set_pc(a), same_set_pc(a) - 40'd16);
        check(lk_hit && lk_same && lk_off == 8'd16, $sformatf("entry %0d kept", a));
      end
    // random phase, from an empty table
    init_pool();
    @(negedge clk); rst_n = 0;
    @(negedge clk); rst_n = 1;
    for (int cyc = 0; cyc < 5000; cyc++) begin
      int ls, li, ws, wi;
      key_t lk, wk;
      @(negedge clk);
      lk_pc = pick_pc(); lk_prod_pc = lk_pc - pc_t'(4 + 16 * $urandom_range(0, 3));
      wr_en = $urandom_range(0, 1);
      wr_pc = pick_pc(); wr_prod_pc = wr_pc - pc_t'(4 + 16 * $urandom_range(0, 3));
      #1;
      lk = pc_key(lk_pc); wk = pc_key(wr_pc);
      ls = mset(lk); li = mfind(ls, lk);
      check(lk_hit == (li >= 0), $sformatf("random: hit, cycle %0d", cyc));
      if (li >= 0) begin
        check(lk_off == model[ls][li].d, "random: offset");
        check(lk_same == (model[ls][li].d == pc_offset(lk_pc, lk_prod_pc)), "random: same");
      end else begin
        check(!lk_same, "random: no same on a miss");
      end
      if (wr_en) begin
        ws = mset(wk); wi = mfind(ws, wk);
        if (wi >= 0) model[ws].delete(wi);
        else if (model[ws].size() == 4) void'(model[ws].pop_back());
        model[ws].push_front('{wk, pc_offset(wr_pc, wr_prod_pc)});
      end
    end
    wr_en = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
