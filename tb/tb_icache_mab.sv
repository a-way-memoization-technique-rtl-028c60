// tb_icache_mab: the I-cache way memoization unit with a behavioural cache.
//
// A fetch stream shaped like a program is generated: a jump through the link
// register to the program start, loops of sequential fetches (stride 8) that
// close with a backward branch, calls by forward branch and returns through
// the link register, and now and then a far jump beyond 2^14. Checked: every
// fetch address equals the one a simple reference PC predicts; a memoised
// fetch never names a wrong way (cache model); all three MAB input kinds hit
// the MAB at least once; and the tag reads stay well below one per fetch.
module tb_icache_mab;
  import mab_pkg::*;

  logic        clk = 0, rst_n = 0;
  logic        req_valid, req_ready;
  flow_e       flow;
  addr_t       disp, link_addr;
  cache_ctl_t  ctl;
  cache_resp_t resp;
  int          n_access, n_tag, n_way, n_miss, n_memo, n_err;
  int          checks = 0, failures = 0, cycles = 0;
  int          hit_by_flow[3];

  always #5 clk = ~clk;

  icache_mab dut (.clk, .rst_n, .req_valid, .req_ready, .flow, .disp, .link_addr, .ctl, .resp);

  cache_model #(.MISS_LAT(4)) u_cache (
    .clk, .rst_n, .ctl, .resp, .n_access, .n_tag, .n_way, .n_miss, .n_memo, .n_err
  );

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

  addr_t pc_ref = '0;
  addr_t exp_q[$];

  always @(negedge clk) begin
    if (rst_n && ctl.valid && resp.valid) begin
      checks++;
      if (exp_q.size() == 0 || ctl.addr != exp_q[0]) begin
        failures++;
        $display("FAIL fetch address %h", ctl.addr);
      end
      if (exp_q.size() != 0) void'(exp_q.pop_front());
    end
  end

  task automatic fetch(flow_e f, addr_t d = '0, addr_t l = '0);
    @(negedge clk);
    flow = f; disp = d; link_addr = l; req_valid = 1'b1;
    #1;
    while (!req_ready) begin @(negedge clk); #1; end
    if (dut.hit) hit_by_flow[int'(f)]++;
    case (f)
      FLOW_SEQ:    pc_ref = pc_ref + 32'd8;
      FLOW_BRANCH: pc_ref = pc_ref + d;
      default:     pc_ref = l;
    endcase
    exp_q.push_back(pc_ref);
    @(posedge clk);
    #1 req_valid = 1'b0;
  endtask

  initial begin
    addr_t ret, start;
    req_valid = 0; flow = FLOW_SEQ; disp = '0; link_addr = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    start = 32'h0040_0100;
    fetch(FLOW_LINK, '0, start);
    for (int outer = 0; outer < 60; outer++) begin
      int body;
      body = 6 + $urandom_range(20, 0);
      // loop: body sequential fetches, backward branch, several iterations
      for (int it = 0; it < 4; it++) begin
        for (int k = 0; k < body; k++) fetch(FLOW_SEQ);
        if (it != 3) fetch(FLOW_BRANCH, addr_t'(-$signed(32'(body * 8))));
      end
      // call a function 0x1000..0x3000 ahead and return through the link register
      ret = pc_ref + 32'd8;
      fetch(FLOW_BRANCH, addr_t'(32'h1000 + (outer % 3) * 32'h1000));
      for (int k = 0; k < 10; k++) fetch(FLOW_SEQ);
      fetch(FLOW_LINK, '0, ret);
      // once in a while a far jump and back
      if (outer % 10 == 9) begin
        ret = pc_ref + 32'd8;
        fetch(FLOW_BRANCH, 32'h0100_0000);
        for (int k = 0; k < 5; k++) fetch(FLOW_SEQ);
        fetch(FLOW_LINK, '0, ret);
      end
      // the caller ends with a jump back to the start every 20 rounds
      if (outer % 20 == 19) fetch(FLOW_LINK, '0, start);
    end
    repeat (10) @(negedge clk);

    checks++;
    if (n_err != 0) begin failures++; $display("FAIL %0d wrong memoised ways", n_err); end
    for (int f = 0; f < 3; f++) begin
      checks++;
      if (hit_by_flow[f] == 0) begin failures++; $display("FAIL no MAB hit for flow %0d", f); end
    end
    checks++;
    if (n_tag * 3 > n_access) begin failures++; $display("FAIL tag reads %0d of %0d fetches", n_tag, n_access); end
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL %0d fetches never completed", exp_q.size()); end
    $display("fetches %0d, tag reads %0d, way reads %0d, misses %0d, hits seq/branch/link %0d/%0d/%0d",
             n_access, n_tag, n_way, n_miss, hit_by_flow[0], hit_by_flow[1], hit_by_flow[2]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
