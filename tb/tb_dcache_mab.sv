// tb_dcache_mab: the D-cache way memoization unit with a behavioural cache.
//
// A loop-like load/store stream is generated: a few base registers, mostly
// small positive and negative displacements, occasional displacements beyond
// 2^14. Checked: the registered memory address equals base + disp for every
// access; a memoised access never names a wrong way (cache model); tag reads
// fall well below one per access; back-to-back MAB hits are accepted one per
// cycle (a run of 64 accesses to 4 memoised lines takes 64 cycles); and the
// unit never adds a cycle to a cache hit.
module tb_dcache_mab;
  import mab_pkg::*;

  logic        clk = 0, rst_n = 0;
  logic        req_valid, req_ready;
  addr_t       base, disp;
  cache_ctl_t  ctl;
  cache_resp_t resp;
  int          n_access, n_tag, n_way, n_miss, n_memo, n_err;
  int          checks = 0, failures = 0, cycles = 0;

  always #5 clk = ~clk;

  dcache_mab dut (.clk, .rst_n, .req_valid, .req_ready, .base, .disp, .ctl, .resp);

  cache_model #(.MISS_LAT(3)) u_cache (
    .clk, .rst_n, .ctl, .resp, .n_access, .n_tag, .n_way, .n_miss, .n_memo, .n_err
  );

  initial begin
    forever begin
      @(posedge clk);
      cycles++;
      if (cycles > 100000) begin
        failures++;
        $display("watchdog expired");
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
      end
    end
  end

  // expected addresses, in issue order
  addr_t exp_q[$];
  always @(posedge clk) begin
    if (rst_n && req_valid && req_ready) exp_q.push_back(base + disp);
  end
  always @(negedge clk) begin
    if (rst_n && ctl.valid && resp.valid) begin
      checks++;
      if (exp_q.size() == 0 || ctl.addr != exp_q[0]) begin
        failures++;
        $display("FAIL address %h", ctl.addr);
      end
      if (exp_q.size() != 0) void'(exp_q.pop_front());
    end
  end

  addr_t regs[4] = '{32'h1000_0000, 32'h1000_3F80, 32'h2000_8000, 32'h0004_1FF0};
  int    issued = 0;

  // issue one access, waiting for req_ready
  task automatic issue(addr_t b, addr_t d);
    @(negedge clk);
    base = b; disp = d; req_valid = 1'b1;
    #1;
    while (!req_ready) begin @(negedge clk); #1; end
    @(posedge clk);
    issued++;
    #1 req_valid = 1'b0;
  endtask

  initial begin
    int t0, hits_before;
    req_valid = 0; base = '0; disp = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // random loop-like stream
    for (int n = 0; n < 4000; n++) begin
      int    r;
      addr_t d;
      r = $urandom_range(99, 0);
      if (r < 80)      d = addr_t'($urandom_range(15, 0) * 4);                 // small positive
      else if (r < 95) d = addr_t'(-$signed(32'($urandom_range(64, 1) * 4)));  // small negative
      else             d = addr_t'($urandom_range(32'h0010_0000, 32'h4000));   // large
      issue(regs[$urandom_range(3, 0) & ((n % 7 == 0) ? 3 : 1)], d);
      if (n % 500 == 499) regs[0] = regs[0] + 32'h40;  // pointer walks on
    end

    // throughput: warm up 4 lines, then 64 back-to-back accesses
    for (int k = 0; k < 4; k++) begin issue(regs[1], addr_t'(k * 32)); issue(regs[1], addr_t'(k * 32)); end
    repeat (4) @(negedge clk);
    hits_before = n_memo;
    @(negedge clk);
    t0 = cycles;
    for (int k = 0; k < 64; k++) begin
      base = regs[1]; disp = addr_t'((k % 4) * 32 + 4); req_valid = 1'b1;
      #1;
      checks++;
      if (!req_ready) begin failures++; $display("FAIL back-to-back access %0d stalled", k); end
      @(negedge clk);
    end
    req_valid = 1'b0;
    checks++;
    if (cycles - t0 != 64) begin failures++; $display("FAIL 64 accesses took %0d cycles", cycles - t0); end
    repeat (3) @(negedge clk);
    checks++;
    if (n_memo - hits_before != 64) begin
      failures++; $display("FAIL %0d of 64 back-to-back accesses were memoised", n_memo - hits_before);
    end

    repeat (5) @(negedge clk);
    checks++;
    if (n_err != 0) begin failures++; $display("FAIL %0d wrong memoised ways", n_err); end
    checks++;
    if (n_tag * 2 > n_access) begin failures++; $display("FAIL tag reads %0d of %0d accesses", n_tag, n_access); end
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL %0d accesses never completed", exp_q.size()); end
    $display("accesses %0d, tag reads %0d, way reads %0d, cache misses %0d, memoised %0d",
             n_access, n_tag, n_way, n_miss, n_memo);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
