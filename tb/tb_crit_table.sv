// tb_crit_table: directed checks of the Critical Table: membership after insert, no
// false hits on other PCs, PCs that differ only outside bits [12:1] alias, and LRU
// replacement within one set (a refreshed entry survives, the least recent one leaves);
// then 5,000 cycles of random inserts and lookups compared with a recency-list model.
module tb_crit_table;
  import paradise_pkg::*;
  logic clk = 0, rst_n = 0, ins_en = 0;
  pc_t lk_pc = '0, ins_pc = '0;
  logic lk_hit;
  int checks = 0, failures = 0;

  crit_table #(.SETS(16), .WAYS(4)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic ins(pc_t p);
    @(negedge clk);
    ins_en = 1; ins_pc = p;
    @(negedge clk);
    ins_en = 0;
  endtask

  // Look up a list of PCs; bit i of the result is the hit of pcs[i].
  task automatic has(input pc_t pcs [$], output logic [7:0] r);
    r = '0;
    foreach (pcs[i]) begin
      lk_pc = pcs[i];
      #1;
      r[i] = lk_hit;
    end
  endtask

  function automatic pc_t same_set_pc(int a);
    return pc_t'({4'(a), 4'(a), 4'h3, 1'b0});   // set 3
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
    logic [7:0] r;
    repeat (2) @(negedge clk);
    rst_n = 1;
    has('{40'h1400}, r);
    check(r[0] == 0, "empty");
    ins(40'h1400); ins(40'h1410); ins(40'h1420);
    has('{40'h1400, 40'h1410, 40'h1420}, r);
    check(r[2:0] == 3'b111, "inserted PCs hit");
    has('{40'h1430, 40'h1402}, r);
    check(r[1:0] == 2'b00, "other PCs miss");
    has('{40'h3400}, r);
    check(r[0] == 1, "PC differing above bit 12 aliases");
    for (int a = 1; a <= 4; a++) ins(same_set_pc(a));
    ins(same_set_pc(1));            // refresh
    ins(same_set_pc(6));            // evicts entry 2
    has('{same_set_pc(2), same_set_pc(1), same_set_pc(3), same_set_pc(4), same_set_pc(6)}, r);
    check(r[0] == 0, "LRU entry evicted");
    check(r[4:1] == 4'b1111, "others kept");
    ins(same_set_pc(7));            // evicts entry 3
    has('{same_set_pc(3), same_set_pc(1)}, r);
    check(r[1:0] == 2'b10, "second eviction follows recency");
    // random phase, from an empty table
    init_pool();
    @(negedge clk); rst_n = 0;
    @(negedge clk); rst_n = 1;
    for (int cyc = 0; cyc < 5000; cyc++) begin
      int ls, li, ws, wi;
      key_t lk, wk;
      @(negedge clk);
      lk_pc = pick_pc();
      ins_en = $urandom_range(0, 1);
      ins_pc = pick_pc();
      #1;
      lk = pc_key(lk_pc); wk = pc_key(ins_pc);
      ls = mset(lk); li = mfind(ls, lk);
      check(lk_hit == (li >= 0), $sformatf("random: hit, cycle %0d", cyc));
      if (ins_en) begin
        ws = mset(wk); wi = mfind(ws, wk);
        if (wi >= 0) model[ws].delete(wi);
        else if (model[ws].size() == 4) void'(model[ws].pop_back());
        model[ws].push_front('{wk, 8'd1});
      end
    end
    ins_en = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
