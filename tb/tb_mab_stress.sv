// tb_mab_stress: consistency stress test of the MAB against a 2-way cache.
//
// Three D-cache units run the same random trace, built to make lines of one
// set evict each other: 6 tags over 6 sets, small positive and negative
// displacements around 16 kB boundaries (all cflag forms), 5 % out-of-range
// displacements, and random idle cycles.
//   u0  2x8 MAB with refill invalidation    : no wrong way allowed
//   u1  1x8 MAB with the original rules only: no wrong way allowed (one tag
//       entry is fewer than the two ways, the case the rules are proven for)
//   u2  2x8 MAB with the original rules only: wrong ways are counted and
//       reported, not failed; they show why refill invalidation exists
// The caches answer hits one cycle late and misses after three cycles.
module tb_mab_stress;
  import mab_pkg::*;

  localparam int NU = 3;
  localparam int U_TAG [NU] = '{2, 1, 2};
  localparam bit U_INV [NU] = '{1'b1, 1'b0, 1'b0};

  logic clk = 0, rst_n = 0;
  int   checks = 0, failures = 0, cycles = 0;
  always #5 clk = ~clk;

  initial begin
    forever begin
      @(posedge clk);
      cycles++;
      if (cycles > 1000000) begin
        failures++;
        $display("watchdog expired");
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
      end
    end
  end

  addr_t tr_base[$], tr_disp[$];
  int    tr_gap[$];

  logic        req_valid [NU];
  logic        req_ready [NU];
  addr_t       base      [NU];
  addr_t       disp      [NU];
  cache_ctl_t  ctl       [NU];
  cache_resp_t resp      [NU];
  int          n_access[NU], n_tag[NU], n_way[NU], n_miss[NU], n_memo[NU], n_err[NU];
  bit          done_run  [NU];
  bit          go = 1'b0;

  for (genvar u = 0; u < NU; u++) begin : g_u
    dcache_mab #(.N_TAG(U_TAG[u]), .N_IDX(8), .REFILL_INVALIDATE(U_INV[u])) u_mab (
      .clk, .rst_n, .req_valid(req_valid[u]), .req_ready(req_ready[u]),
      .base(base[u]), .disp(disp[u]), .ctl(ctl[u]), .resp(resp[u])
    );
    cache_model #(.HIT_LAT(1), .MISS_LAT(3)) u_cache (
      .clk, .rst_n, .ctl(ctl[u]), .resp(resp[u]), .n_access(n_access[u]), .n_tag(n_tag[u]),
      .n_way(n_way[u]), .n_miss(n_miss[u]), .n_memo(n_memo[u]), .n_err(n_err[u])
    );
    initial begin
      req_valid[u] = 1'b0; base[u] = '0; disp[u] = '0; done_run[u] = 1'b0;
      wait (go);
      for (int n = 0; n < tr_base.size(); n++) begin
        repeat (tr_gap[n]) @(negedge clk);
        @(negedge clk);
        base[u] = tr_base[n]; disp[u] = tr_disp[n]; req_valid[u] = 1'b1;
        #1;
        while (!req_ready[u]) begin @(negedge clk); #1; end
        @(posedge clk);
        #1 req_valid[u] = 1'b0;
      end
      repeat (8) @(negedge clk);
      done_run[u] = 1'b1;
    end
  end

  initial begin
    for (int n = 0; n < 20000; n++) begin
      tag_t  t;
      idx_t  s;
      addr_t a, d;
      t = tag_t'(18'h00100 + $urandom_range(5, 0));
      s = idx_t'($urandom_range(5, 0) * 85);
      a = {t, s, 5'($urandom)};
      if ($urandom_range(19, 0) == 0) d = addr_t'(32'h0002_0000 + $urandom_range(255, 0));
      else                            d = addr_t'($signed(32'($urandom_range(511, 0))) - 32'sd256);
      tr_base.push_back(a - d);
      tr_disp.push_back(d);
      tr_gap.push_back(($urandom_range(3, 0) == 0) ? 1 : 0);
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    go = 1'b1;
    for (int u = 0; u < NU; u++) wait (done_run[u]);
    for (int u = 0; u < NU; u++) begin
      $display("unit %0d (%0dx8, refill invalidation %0d): %0d accesses, %0d memoised, %0d cache misses, %0d wrong ways",
               u, U_TAG[u], U_INV[u], n_access[u], n_memo[u], n_miss[u], n_err[u]);
      checks += 2;
      if (n_access[u] != tr_base.size()) begin failures++; $display("FAIL unit %0d lost accesses", u); end
      if (n_memo[u] == 0) begin failures++; $display("FAIL unit %0d never memoised", u); end
    end
    checks += 2;
    if (n_err[0] != 0) begin failures++; $display("FAIL 2x8 with refill invalidation named a wrong way"); end
    if (n_err[1] != 0) begin failures++; $display("FAIL 1x8 with the original rules named a wrong way"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
