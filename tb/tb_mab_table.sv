// tb_mab_table: directed and random test of the Memory Address Buffer.
//
// The MAB (2 tag entries x 8 set-index entries) is driven with search keys and
// the address each key stands for. A small register stage, like the one in
// the D-cache unit, passes the lookup result to a behavioural 2-way LRU cache
// whose answers train the MAB. The cache counts an error whenever a MAB hit
// names a way that does not hold the line.
//
// Directed part, with the expected hit or miss of every lookup worked out by
// hand from the replacement rules: first use and reuse, a tag miss with a set
// hit (row cleared), a set miss with a tag hit (column cleared), both missing,
// an out-of-range displacement (row of the LRU tag entry cleared), the bypass
// of a pair completing in the same cycle, and an eviction that only the
// refill invalidation catches. Random part: back-to-back accesses over a few
// tags and sets with all cflag forms; no cache error may occur and the MAB
// must hit a fair share of the time.
module tb_mab_table;
  import mab_pkg::*;

  logic        clk = 0, rst_n = 0;
  logic        req_valid, req_ready, hit;
  way_t        hit_way;
  mab_key_t    key;
  addr_t       addr;
  cache_ctl_t  ctl;
  cache_resp_t resp;
  int          n_access, n_tag, n_way, n_miss, n_memo, n_err;
  int          checks = 0, failures = 0, cycles = 0;

  always #5 clk = ~clk;

  mab_table #(.N_TAG(2), .N_IDX(8)) dut (
    .clk, .rst_n, .req_valid, .req_ready, .key, .hit, .hit_way, .resp
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ctl <= '0;
    else if (req_valid && req_ready) begin
      ctl.valid       <= 1'b1;
      ctl.addr        <= addr;
      ctl.tag_disable <= hit;
      ctl.way_disable <= hit ? (hit_way == 1'b0 ? 2'b10 : 2'b01) : 2'b00;
    end else if (resp.valid) ctl.valid <= 1'b0;
  end

  cache_model #(.MISS_LAT(2)) u_cache (
    .clk, .rst_n, .ctl, .resp, .n_access, .n_tag, .n_way, .n_miss, .n_memo, .n_err
  );

  // key for line (tag, set) in one of its forms; form 3 = out of range
  function automatic mab_key_t mk(tag_t t, idx_t s, int form = 0);
    mab_key_t k;
    k.idx = s;
    case (form)
      1:       begin k.tag = t - 1'b1; k.cflag = CF_PLUS;  end
      2:       begin k.tag = t + 1'b1; k.cflag = CF_MINUS; end
      3:       begin k.tag = t;        k.cflag = CF_INVAL; end
      default: begin k.tag = t;        k.cflag = CF_SAME;  end
    endcase
    return k;
  endfunction

  function automatic addr_t mkaddr(tag_t t, idx_t s);
    return {t, s, 5'($urandom)};
  endfunction

  task automatic expect_hit(logic exp, string what);
    checks++;
    if (hit !== exp) begin
      failures++;
      $display("FAIL %s: hit=%0d expected %0d", what, hit, exp);
    end
  endtask

  // one access, waiting until the cache has answered
  task automatic access(tag_t t, idx_t s, logic exp, string what, int form = 0);
    @(negedge clk);
    key = mk(t, s, form); addr = mkaddr(t, s); req_valid = 1'b1;
    #1 expect_hit(exp, what);
    @(posedge clk); #1 req_valid = 1'b0;
    while (!(ctl.valid && resp.valid)) @(negedge clk);
    @(posedge clk);
  endtask

  initial begin
    forever begin
      @(posedge clk);
      cycles++;
      if (cycles > 200000) begin
        failures++;
        $display("watchdog expired");
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
      end
    end
  end

  localparam tag_t TA = 18'h00100, TB = 18'h00200, TC = 18'h00300, TD = 18'h00400;
  localparam tag_t TX = 18'h01000, TZ = 18'h02000, TQ = 18'h03000;

  int hits_rand = 0, acc_rand = 0;

  initial begin
    req_valid = 0; key = '0; addr = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // first use and reuse
    access(TA, 9'd0, 1'b0, "A cold");
    access(TA, 9'd0, 1'b1, "A reuse");
    // tag miss, set hit: new row for B
    access(TB, 9'd0, 1'b0, "B cold (tag miss, set hit)");
    access(TA, 9'd0, 1'b1, "A kept after B");
    access(TB, 9'd0, 1'b1, "B reuse");
    // C replaces the LRU tag entry (A): row A is cleared
    access(TC, 9'd0, 1'b0, "C cold replaces A's row");
    access(TB, 9'd0, 1'b1, "B kept after C");
    access(TA, 9'd0, 1'b0, "A lost with its row");
    // A now in the tag entries with B; fill the 8 set-index entries
    for (int s = 1; s < 8; s++) access(TA, idx_t'(s), 1'b0, "A on new set");
    access(TA, 9'd1, 1'b1, "A set 1 reuse");
    access(TB, 9'd0, 1'b1, "B set 0 still valid");
    // set 2 is now the LRU set entry; set 8 replaces it: column 2 is cleared
    access(TB, 9'd8, 1'b0, "B on set 8 (tag hit, set miss)");
    access(TA, 9'd8, 1'b0, "A on set 8: the reused column was cleared");
    access(TA, 9'd2, 1'b0, "A set 2 lost with its column");
    access(TA, 9'd5, 1'b1, "A set 5 kept");
    // A set 2 replaced the LRU set entry, set 3: column 3 is cleared
    access(TA, 9'd3, 1'b0, "A set 3 lost with its column");
    // both miss
    access(TD, 9'd20, 1'b0, "D cold (both miss)");
    access(TD, 9'd20, 1'b1, "D reuse");
    // out-of-range displacement clears the row of the LRU tag entry (A's)
    access(TA, 9'd5, 1'b1, "A set 5 before");
    access(TD, 9'd20, 1'b1, "D before");
    access(TQ, 9'd3, 1'b0, "out of range never hits", 3);
    access(TA, 9'd5, 1'b0, "A row cleared by out-of-range access");
    access(TD, 9'd20, 1'b1, "D row kept");
    // cflag forms: the same line under another key is a different pair
    access(TD, 9'd20, 1'b0, "D seen through tag-1 and carry", 1);
    access(TD, 9'd20, 1'b1, "D through tag-1 and carry reuse", 1);

    // bypass: a pair completes in the cycle of the next lookup of the same pair
    access(TA, 9'd4, 1'b0, "A row still cleared, A becomes MRU");
    access(TQ, 9'd5, 1'b0, "out of range clears row of D", 3);
    @(negedge clk);
    key = mk(TD, 9'd20); addr = mkaddr(TD, 9'd20); req_valid = 1'b1;
    #1 expect_hit(1'b0, "D after its row was cleared");
    @(posedge clk);
    #1 expect_hit(1'b1, "same pair back to back hits through the bypass");
    @(posedge clk); #1 req_valid = 1'b0;
    while (!(ctl.valid && resp.valid)) @(negedge clk);
    @(posedge clk);
    checks++;
    if (u_cache.n_memo == 0) begin failures++; $display("FAIL no memoised access"); end

    // eviction seen only by the refill invalidation: X and Z share set 40,
    // Z is more recent there, X more recent overall; Q then evicts X from
    // set 40 while the MAB drops Z's row
    access(TX, 9'd40, 1'b0, "X cold");
    access(TZ, 9'd40, 1'b0, "Z cold");
    access(TX, 9'd41, 1'b0, "X elsewhere");
    access(TQ, 9'd40, 1'b0, "Q evicts X from set 40");
    access(TX, 9'd40, 1'b0, "X evicted: refill invalidation clears its pair");

    // random back-to-back traffic
    begin
      tag_t pool_t [4] = '{18'h00010, 18'h00011, 18'h00050, 18'h3FFFF};
      tag_t last_t; idx_t last_s;
      last_t = '0; last_s = '0;
      while (acc_rand < 6000) begin
        tag_t t; idx_t s; int form;
        @(negedge clk);
        if (req_valid && !req_ready) continue;
        if ($urandom_range(1, 0) == 0 || acc_rand == 0) begin
          t = pool_t[$urandom_range(3, 0) & (($urandom_range(3, 0) == 0) ? 3 : 1)];
          s = idx_t'($urandom_range(9, 0) * 37);
        end else begin
          t = last_t; s = last_s;
        end
        last_t = t; last_s = s;
        form = ($urandom_range(19, 0) == 0) ? 3 : $urandom_range(2, 0);
        if (form == 2 && t == 18'h3FFFF) form = 0;
        if (form == 1 && t == 18'h00010) form = 0;
        key = mk(t, s, form); addr = mkaddr(t, s);
        req_valid = ($urandom_range(4, 0) != 0);
        #1;
        if (req_valid && req_ready) begin
          acc_rand++;
          if (hit) hits_rand++;
        end
      end
      @(negedge clk) req_valid = 1'b0;
      repeat (5) @(negedge clk);
    end
    checks++;
    if (n_err != 0) begin failures++; $display("FAIL cache saw %0d wrong memoised ways", n_err); end
    checks++;
    if (hits_rand < acc_rand / 5) begin failures++; $display("FAIL random hit rate %0d/%0d", hits_rand, acc_rand); end
    $display("random: %0d accesses, %0d MAB hits, %0d cache misses", acc_rand, hits_rand, n_miss);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
