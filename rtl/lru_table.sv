// lru_table: set-associative table with true-LRU replacement, the storage behind the
// Destination, Critical and Non-Critical Tables of the Slack Unit.
//
// Each entry holds a valid bit, a KEY_W-bit key (the stored PC field) and DATA_W bits of
// payload. The set index is the XOR fold of the key's IDX_W-bit chunks, so every key bit
// takes part in indexing; the full key is stored and compared. LRU state is, per set,
// the list of its ways from most to least recently used; an invalidated way moves to the
// least recent end, so a refill never disturbs the order of the valid entries.
//
// Interface and timing:
//   * NRD lookup ports, combinational: rd_key -> rd_hit, rd_data (contents before this
//     cycle's writes). A hit on a port with rd_touch set makes that entry most recent
//     (after the write port's own update when both touch one set).
//   * one upsert port (wr_en): overwrite on hit, otherwise fill the first invalid way or
//     replace the least recent way; the written entry becomes most recent.
//   * one delete port (del_en): invalidates a matching entry; ignored when it names the
//     key being written in the same cycle. del_found tells whether del_key is present.
// All updates take effect at the rising clock edge. Reset invalidates every entry.
// Set-associativity and LRU follow the design; the index hash and the exact age encoding
// are this design's choices.
module lru_table #(
  parameter int KEY_W  = 12,
  parameter int DATA_W = 8,
  parameter int SETS   = 16,
  parameter int WAYS   = 4,
  parameter int NRD    = 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [KEY_W-1:0]  rd_key   [NRD],
  input  logic              rd_touch [NRD],
  output logic              rd_hit   [NRD],
  output logic [DATA_W-1:0] rd_data  [NRD],
  input  logic              wr_en,
  input  logic [KEY_W-1:0]  wr_key,
  input  logic [DATA_W-1:0] wr_data,
  input  logic              del_en,
  input  logic [KEY_W-1:0]  del_key,
  output logic              del_found
);
  localparam int IDX_W = (SETS > 1) ? $clog2(SETS) : 1;
  localparam int WAY_W = (WAYS > 1) ? $clog2(WAYS) : 1;

  typedef logic [IDX_W-1:0] idx_t;

  logic              valid_q [SETS][WAYS];
  logic [KEY_W-1:0]  key_q   [SETS][WAYS];
  logic [DATA_W-1:0] data_q  [SETS][WAYS];

  function automatic idx_t set_of(logic [KEY_W-1:0] k);
    idx_t r;
    r = '0;
    for (int b = 0; b < KEY_W; b++) r[b % IDX_W] ^= k[b];
    if (SETS == 1) r = '0;
    return r;
  endfunction

  // ---------------------------------------------------------------- lookups
  always_comb begin
    for (int p = 0; p < NRD; p++) begin
      idx_t s;
      s = set_of(rd_key[p]);
      rd_hit[p]  = 1'b0;
      rd_data[p] = '0;
      for (int w = 0; w < WAYS; w++) begin
        if (valid_q[s][w] && key_q[s][w] == rd_key[p]) begin
          rd_hit[p]  = 1'b1;
          rd_data[p] = data_q[s][w];
        end
      end
    end
  end

  // ---------------------------------------------------------------- recency order
  // order_q[s][0] is the most recently used way of set s, order_q[s][WAYS-1] the least.
  typedef logic [WAY_W-1:0] way_t;
  typedef way_t [WAYS-1:0] order_t;

  order_t order_q [SETS];

  // Move way w to the front (most recent).
  function automatic order_t touch(order_t o, way_t w);
    order_t r;
    int     j;
    r[0] = w;
    j    = 1;
    for (int i = 0; i < WAYS; i++)
      if (o[i] != w && j < WAYS) begin
        r[j] = o[i];
        j++;
      end
    return r;
  endfunction

  // Move way w to the back (least recent), used when it is invalidated.
  function automatic order_t demote(order_t o, way_t w);
    order_t r;
    int     j;
    r[WAYS-1] = w;
    j         = 0;
    for (int i = 0; i < WAYS; i++)
      if (o[i] != w && j < WAYS-1) begin
        r[j] = o[i];
        j++;
      end
    return r;
  endfunction

  // ---------------------------------------------------------------- write way
  idx_t wr_set;
  way_t wr_way;
  logic wr_hit;
  always_comb begin
    logic found_inv;
    wr_set    = set_of(wr_key);
    wr_hit    = 1'b0;
    wr_way    = order_q[wr_set][WAYS-1];
    found_inv = 1'b0;
    for (int w = 0; w < WAYS; w++)
      if (valid_q[wr_set][w] && key_q[wr_set][w] == wr_key) begin
        wr_hit = 1'b1;
        wr_way = way_t'(w);
      end
    if (!wr_hit)
      for (int w = 0; w < WAYS; w++)
        if (!valid_q[wr_set][w] && !found_inv) begin
          found_inv = 1'b1;
          wr_way    = way_t'(w);
        end
  end

  // ---------------------------------------------------------------- read touch
  logic rt_en;
  idx_t rt_set;
  way_t rt_way;
  always_comb begin
    rt_en  = 1'b0;
    rt_set = '0;
    rt_way = '0;
    for (int p = NRD-1; p >= 0; p--) begin
      idx_t s;
      s = set_of(rd_key[p]);
      if (rd_touch[p] && rd_hit[p]) begin
        rt_en  = 1'b1;
        rt_set = s;
        for (int w = 0; w < WAYS; w++)
          if (valid_q[s][w] && key_q[s][w] == rd_key[p]) rt_way = way_t'(w);
      end
    end
  end

  // ---------------------------------------------------------------- delete way
  idx_t del_set;
  logic del_hit;
  way_t del_way;
  logic del_do;
  always_comb begin
    del_set = set_of(del_key);
    del_hit = 1'b0;
    del_way = '0;
    for (int w = 0; w < WAYS; w++)
      if (valid_q[del_set][w] && key_q[del_set][w] == del_key) begin
        del_hit = 1'b1;
        del_way = way_t'(w);
      end
    del_do = del_en && del_hit && !(wr_en && del_key == wr_key);
  end

  assign del_found = del_hit;

  // Next recency order: delete, then write, then read touch, applied in that sequence.
  order_t order_d [SETS];
  always_comb
    for (int s = 0; s < SETS; s++) begin
      order_d[s] = order_q[s];
      if (del_do && del_set == idx_t'(s)) order_d[s] = demote(order_d[s], del_way);
      if (wr_en  && wr_set  == idx_t'(s)) order_d[s] = touch(order_d[s], wr_way);
      if (rt_en  && rt_set  == idx_t'(s)) order_d[s] = touch(order_d[s], rt_way);
    end

  // ---------------------------------------------------------------- state
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < SETS; s++)
        for (int w = 0; w < WAYS; w++) begin
          valid_q[s][w] <= 1'b0;
          key_q[s][w]   <= '0;
          data_q[s][w]  <= '0;
          order_q[s][w] <= way_t'(w);
        end
    end else begin
      if (del_do)
        valid_q[del_set][del_way] <= 1'b0;
      if (wr_en) begin
        valid_q[wr_set][wr_way] <= 1'b1;
        key_q[wr_set][wr_way]   <= wr_key;
        data_q[wr_set][wr_way]  <= wr_data;
      end
      for (int s = 0; s < SETS; s++) order_q[s] <= order_d[s];
    end
  end

endmodule
