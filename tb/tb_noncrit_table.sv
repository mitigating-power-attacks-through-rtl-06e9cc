// tb_noncrit_table: random upserts, deletes and lookups on both ports of the
// Non-Critical Table, compared each cycle against a recency-list model of a 4-way,
// 16-set LRU table. Keys are drawn from a small pool so that sets overflow and LRU
// replacement is exercised; a directed part checks the victim choice explicitly.
module tb_noncrit_table;
  import paradise_pkg::*;
  logic clk = 0, rst_n = 0;
  logic q_valid = 0, wr_en = 0, wr_stable = 0, del_en = 0;
  pc_t q_pc = '0, u_pc = '0, wr_pc = '0, del_pc = '0;
  slack_t wr_slack = '0;
  logic q_hit, q_stable, u_hit, u_stable, del_found;
  slack_t q_slack, u_slack;
  int checks = 0, failures = 0, evictions = 0;

  noncrit_table #(.SETS(16), .WAYS(4)) dut (.*);
  always #5 clk = ~clk;

  typedef struct { key_t k; slack_t s; logic st; } ent_t;
  ent_t model [16][$];

  function automatic int set_of(key_t k);
    return int'(k[3:0] ^ k[7:4] ^ k[11:8]);
  endfunction
  function automatic int find(int s, key_t k);
    foreach (model[s][i]) if (model[s][i].k == k) return i;
    return -1;
  endfunction

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  // Pool: 24 keys mapping to 3 sets, so each set sees 8 keys for 4 ways.
  key_t pool [24];
  function automatic pc_t pick_pc();
    return pc_t'({pool[$urandom_range(0, 23)], 1'b0});
  endfunction

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 24; i++) begin
      // k = {hi, mid, lo} with lo ^ mid ^ hi in {1, 5, 9}
      logic [3:0] hi, mid, lo;
      hi  = 4'(i / 8);
      mid = 4'(i % 8 + 2);
      lo  = 4'(1 + 4 * (i / 8)) ^ hi ^ mid;
      pool[i] = {hi, mid, lo};
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 20000; cyc++) begin
      int qs, qi, us, ui, ws, wi, ds, di;
      key_t qk, uk, wk, dk;
      @(negedge clk);
      q_valid = $urandom_range(0, 1);
      q_pc = pick_pc(); u_pc = pick_pc(); wr_pc = pick_pc(); del_pc = pick_pc();
      wr_en = ($urandom_range(0, 2) != 0);
      del_en = ($urandom_range(0, 3) == 0);
      wr_slack = 5'($urandom); wr_stable = 1'($urandom);
      #1;
      qk = pc_key(q_pc); uk = pc_key(u_pc); wk = pc_key(wr_pc); dk = pc_key(del_pc);
      qs = set_of(qk); us = set_of(uk); ws = set_of(wk); ds = set_of(dk);
      qi = find(qs, qk); ui = find(us, uk); di = find(ds, dk);
      check(q_hit == (q_valid && qi >= 0), $sformatf("q_hit cyc %0d", cyc));
      if (q_valid && qi >= 0) check(q_slack == model[qs][qi].s && q_stable == model[qs][qi].st, "q data");
      check(u_hit == (ui >= 0), $sformatf("u_hit cyc %0d", cyc));
      if (ui >= 0) check(u_slack == model[us][ui].s && u_stable == model[us][ui].st, "u data");
      check(del_found == (di >= 0), "del_found");
      // model update, same order of effects as the hardware
      wi = find(ws, wk);
      if (wr_en && wi < 0 && model[ws].size() == 4) begin
        void'(model[ws].pop_back());
        evictions++;
      end
      if (del_en && !(wr_en && dk == wk)) begin
        di = find(ds, dk);
        if (di >= 0) model[ds].delete(di);
      end
      if (wr_en) begin
        wi = find(ws, wk);
        if (wi >= 0) model[ws].delete(wi);
        model[ws].push_front('{wk, wr_slack, wr_stable});
      end
      if (q_valid) begin
        qi = find(qs, qk);
        if (qi >= 0) begin
          ent_t e;
          e = model[qs][qi];
          model[qs].delete(qi);
          model[qs].push_front(e);
        end
      end
    end
    check(evictions > 100, $sformatf("evictions exercised: %0d", evictions));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
