// tb_wm_top: end-to-end test of both way memoization units at their default
// sizes (2x8 MAB on the data side, 2x16 MAB on the instruction side), each in
// front of a behavioural 2-way cache, running concurrently. The data cache
// answers hits in the cycle of the access, the instruction cache one cycle
// later, so both the back-to-back and the waiting paths of the MAB are used.
//
// The fetch side runs loops, calls and returns; the load/store side a
// loop-like stream over a few base registers with small and occasional large
// displacements, plus a short trace in which a cache eviction is visible only
// to the refill invalidation. Checked: every cache access carries the address
// the reference predicts; no memoised access names a wrong way; tag reads stay
// well below one per access. Every mechanism of the design must occur at
// least once, and the count of each is printed: MAB hits on both sides, the
// four allocation cases (both hit, tag miss, set miss, both miss), an
// out-of-range displacement, the same-cycle bypass, a refill invalidation,
// hits through cflag 01 and 10, hits for sequential, branch and link fetches,
// and the stall while a cache miss is being served.
module tb_wm_top;
  import mab_pkg::*;

  logic        clk = 0, rst_n = 0;
  logic        d_req_valid, d_req_ready, i_req_valid, i_req_ready;
  addr_t       d_base, d_disp, i_disp, i_link_addr;
  flow_e       i_flow;
  cache_ctl_t  d_ctl, i_ctl;
  cache_resp_t d_resp, i_resp;
  int          dn_access, dn_tag, dn_way, dn_miss, dn_memo, dn_err;
  int          in_access, in_tag, in_way, in_miss, in_memo, in_err;
  int          checks = 0, failures = 0, cycles = 0;

  always #5 clk = ~clk;

  wm_top dut (
    .clk, .rst_n,
    .d_req_valid, .d_req_ready, .d_base, .d_disp, .d_ctl, .d_resp,
    .i_req_valid, .i_req_ready, .i_flow, .i_disp, .i_link_addr, .i_ctl, .i_resp
  );

  cache_model #(.MISS_LAT(3)) u_dcache (
    .clk, .rst_n, .ctl(d_ctl), .resp(d_resp), .n_access(dn_access), .n_tag(dn_tag),
    .n_way(dn_way), .n_miss(dn_miss), .n_memo(dn_memo), .n_err(dn_err)
  );
  cache_model #(.HIT_LAT(1), .MISS_LAT(4)) u_icache (
    .clk, .rst_n, .ctl(i_ctl), .resp(i_resp), .n_access(in_access), .n_tag(in_tag),
    .n_way(in_way), .n_miss(in_miss), .n_memo(in_memo), .n_err(in_err)
  );

  initial begin
    forever begin
      @(posedge clk);
      cycles++;
      if (cycles > 400000) begin
        failures++;
        $display("watchdog expired");
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
      end
    end
  end

  // ------------------------------------------------------------ mechanism counters
  typedef enum int {
    M_DHIT, M_IHIT, M_BOTH_HIT, M_TAG_MISS, M_SET_MISS, M_BOTH_MISS, M_OUT_OF_RANGE,
    M_BYPASS, M_REFILL_INV, M_CF_PLUS, M_CF_MINUS, M_SEQ, M_BRANCH, M_LINK, M_STALL, M_NUM
  } mech_e;
  string mname[M_NUM] = '{"D-side MAB hit", "I-side MAB hit", "allocation: tag and set hit",
    "allocation: tag miss, set hit", "allocation: tag hit, set miss", "allocation: both miss",
    "out-of-range displacement", "same-cycle bypass", "refill invalidation",
    "hit through cflag 01", "hit through cflag 10", "hit on sequential fetch",
    "hit on branch fetch", "hit on link-register fetch", "stall during cache miss"};
  int mcnt[M_NUM];

  always @(posedge clk) if (rst_n) begin
    // data side
    if (dut.u_dside.u_mab.adv) begin
      if (dut.u_dside.u_mab.hit) mcnt[M_DHIT]++;
      if (!dut.u_dside.u_mab.key_ok) mcnt[M_OUT_OF_RANGE]++;
      else begin
        case ({dut.u_dside.u_mab.t_hit, dut.u_dside.u_mab.s_hit})
          2'b11: mcnt[M_BOTH_HIT]++;
          2'b01: mcnt[M_TAG_MISS]++;
          2'b10: mcnt[M_SET_MISS]++;
          default: mcnt[M_BOTH_MISS]++;
        endcase
      end
      if (dut.u_dside.u_mab.hit && dut.u_dside.u_mab.same_pair) mcnt[M_BYPASS]++;
      if (dut.u_dside.u_mab.hit && dut.u_dside.u_mab.key.cflag == CF_PLUS)  mcnt[M_CF_PLUS]++;
      if (dut.u_dside.u_mab.hit && dut.u_dside.u_mab.key.cflag == CF_MINUS) mcnt[M_CF_MINUS]++;
    end
    if (d_req_valid && !d_req_ready) mcnt[M_STALL]++;
    if (dut.u_dside.u_mab.done && d_resp.refill && dut.u_dside.u_mab.pend_jv_q)
      for (int i = 0; i < 2; i++)
        if (dut.u_dside.u_mab.vflag_q[i][dut.u_dside.u_mab.pend_j_q] &&
            dut.u_dside.u_mab.way_q[i][dut.u_dside.u_mab.pend_j_q] == d_resp.way &&
            !(dut.u_dside.u_mab.pend_key_q && i == int'(dut.u_dside.u_mab.pend_i_q)))
          mcnt[M_REFILL_INV]++;
    // instruction side
    if (dut.u_iside.u_mab.adv && dut.u_iside.u_mab.hit) begin
      mcnt[M_IHIT]++;
      case (i_flow)
        FLOW_SEQ:    mcnt[M_SEQ]++;
        FLOW_BRANCH: mcnt[M_BRANCH]++;
        default:     mcnt[M_LINK]++;
      endcase
      if (dut.u_iside.u_mab.same_pair) mcnt[M_BYPASS]++;
    end
  end

  // ------------------------------------------------------------ address checks
  addr_t d_exp[$], i_exp[$];
  always @(negedge clk) if (rst_n) begin
    if (d_ctl.valid && d_resp.valid) begin
      checks++;
      if (d_exp.size() == 0 || d_ctl.addr != d_exp[0]) begin failures++; $display("FAIL D address %h", d_ctl.addr); end
      if (d_exp.size() != 0) void'(d_exp.pop_front());
    end
    if (i_ctl.valid && i_resp.valid) begin
      checks++;
      if (i_exp.size() == 0 || i_ctl.addr != i_exp[0]) begin failures++; $display("FAIL I address %h", i_ctl.addr); end
      if (i_exp.size() != 0) void'(i_exp.pop_front());
    end
  end

  // ------------------------------------------------------------ data side stream
  task automatic d_issue(addr_t b, addr_t d, bit hold = 0);
    @(negedge clk);
    d_base = b; d_disp = d; d_req_valid = 1'b1;
    #1;
    while (!d_req_ready) begin @(negedge clk); #1; end
    d_exp.push_back(b + d);
    @(posedge clk);
    #1 if (!hold) d_req_valid = 1'b0;
  endtask

  task automatic d_stream(int n_acc);
    addr_t regs[4] = '{32'h1000_0000, 32'h1000_3FE0, 32'h2000_8010, 32'h0004_1FF0};
    for (int n = 0; n < n_acc; n++) begin
      int    r;
      addr_t d;
      r = $urandom_range(99, 0);
      if (r < 75)      d = addr_t'($urandom_range(15, 0) * 4);
      else if (r < 95) d = addr_t'(-$signed(32'($urandom_range(64, 1) * 4)));
      else             d = addr_t'($urandom_range(32'h0010_0000, 32'h4000));
      d_issue(regs[$urandom_range(3, 0) & ((n % 7 == 0) ? 3 : 1)], d, ($urandom_range(1, 0) == 1));
      if (n % 500 == 499) regs[0] = regs[0] + 32'h40;
    end
    // eviction seen only by the refill invalidation: lines X and Z share a
    // set, Z more recent there, X more recent overall; Q then evicts X
    d_issue(32'h5000_0000, 32'h0000_0A00);  // X, set 0x50
    d_issue(32'h5100_0000, 32'h0000_0A00);  // Z, set 0x50
    d_issue(32'h5000_0000, 32'h0000_0A20);  // X, set 0x51
    d_issue(32'h5200_0000, 32'h0000_0A00);  // Q, set 0x50: X leaves the cache
    d_issue(32'h5000_0000, 32'h0000_0A00);  // X again: must be a MAB miss
    @(negedge clk) d_req_valid = 1'b0;
  endtask

  // ------------------------------------------------------------ fetch side stream
  addr_t pc_ref = '0;
  task automatic fetch(flow_e f, addr_t d = '0, addr_t l = '0);
    @(negedge clk);
    i_flow = f; i_disp = d; i_link_addr = l; i_req_valid = 1'b1;
    #1;
    while (!i_req_ready) begin @(negedge clk); #1; end
    case (f)
      FLOW_SEQ:    pc_ref = pc_ref + 32'd8;
      FLOW_BRANCH: pc_ref = pc_ref + d;
      default:     pc_ref = l;
    endcase
    i_exp.push_back(pc_ref);
    @(posedge clk);
    #1 i_req_valid = 1'b0;
  endtask

  task automatic i_stream(int rounds);
    addr_t ret, start;
    start = 32'h0040_0100;
    fetch(FLOW_LINK, '0, start);
    for (int outer = 0; outer < rounds; outer++) begin
      int body;
      body = 6 + $urandom_range(20, 0);
      for (int it = 0; it < 4; it++) begin
        for (int k = 0; k < body; k++) fetch(FLOW_SEQ);
        if (it != 3) fetch(FLOW_BRANCH, addr_t'(-$signed(32'(body * 8))));
      end
      ret = pc_ref + 32'd8;
      fetch(FLOW_BRANCH, addr_t'(32'h1000 + (outer % 3) * 32'h1000));
      for (int k = 0; k < 10; k++) fetch(FLOW_SEQ);
      fetch(FLOW_LINK, '0, ret);
      if (outer % 20 == 19) fetch(FLOW_LINK, '0, start);
    end
    @(negedge clk) i_req_valid = 1'b0;
  endtask

  initial begin
    d_req_valid = 0; d_base = '0; d_disp = '0;
    i_req_valid = 0; i_flow = FLOW_SEQ; i_disp = '0; i_link_addr = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    fork
      d_stream(3000);
      i_stream(40);
    join
    repeat (10) @(negedge clk);

    checks += 2;
    if (dn_err != 0) begin failures++; $display("FAIL D: %0d wrong memoised ways", dn_err); end
    if (in_err != 0) begin failures++; $display("FAIL I: %0d wrong memoised ways", in_err); end
    checks += 2;
    if (dn_tag * 2 > dn_access) begin failures++; $display("FAIL D tag reads %0d/%0d", dn_tag, dn_access); end
    if (in_tag * 3 > in_access) begin failures++; $display("FAIL I tag reads %0d/%0d", in_tag, in_access); end
    checks += 2;
    if (d_exp.size() != 0 || i_exp.size() != 0) begin failures++; $display("FAIL accesses left over"); end
    for (int m = 0; m < M_NUM; m++) begin
      checks++;
      $display("  %-32s %0d", mname[m], mcnt[m]);
      if (mcnt[m] == 0) begin failures++; $display("FAIL mechanism never exercised: %s", mname[m]); end
    end
    $display("D-cache: %0d accesses, %0d tag reads, %0d way reads, %0d misses",
             dn_access, dn_tag, dn_way, dn_miss);
    $display("I-cache: %0d fetches, %0d tag reads, %0d way reads, %0d misses",
             in_access, in_tag, in_way, in_miss);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
