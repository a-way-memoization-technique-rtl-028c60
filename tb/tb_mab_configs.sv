// tb_mab_configs: the eight MAB sizes of the evaluation (1 or 2 tag entries
// times 4, 8, 16 or 32 set-index entries), each as a D-cache unit in front of
// its own behavioural 2-way cache, replaying the same load/store traces.
//
// Two traces are generated here, shaped like the inner loops of two of the
// evaluated kernels (the real programs are not reproduced):
//   dct  8x8 block transform: for each output, 8 multiply-accumulates that
//        load an input sample (row pointer + 2*k) and a coefficient (table
//        base + 2*(8u+k)), then one store (output pointer + 2*v)
//   fft  radix-2 butterflies over 512 complex points: loads of x[i] and
//        x[i+half] through one pointer, a twiddle load, two stores
// Checked for every size and trace: no memoised access names a wrong way,
// every access completes, every MAB with two tag entries saves tag reads
// (with one tag entry the two arrays of a loop evict each other's tag), and the 2x32 MAB reads no more tags than the 1x4 one. The tag and
// way reads per access are printed for each size.
module tb_mab_configs;
  import mab_pkg::*;

  localparam int NCFG = 8;
  localparam int CFG_TAG [NCFG] = '{1, 1, 1, 1, 2, 2, 2, 2};
  localparam int CFG_IDX [NCFG] = '{4, 8, 16, 32, 4, 8, 16, 32};

  logic clk = 0, rst_n = 0;
  int   checks = 0, failures = 0, cycles = 0;
  always #5 clk = ~clk;

  initial begin
    forever begin
      @(posedge clk);
      cycles++;
      if (cycles > 2000000) begin
        failures++;
        $display("watchdog expired");
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
      end
    end
  end

  // ------------------------------------------------------------ traces
  addr_t tr_base[$], tr_disp[$];

  task automatic gen_dct();
    addr_t in_a = 32'h1000_0000, coef = 32'h1000_8000, out_a = 32'h1001_0040;
    for (int blk = 0; blk < 6; blk++)
      for (int u = 0; u < 8; u++)
        for (int v = 0; v < 8; v++) begin
          for (int k = 0; k < 8; k++) begin
            tr_base.push_back(in_a + addr_t'(blk * 128 + v * 16)); tr_disp.push_back(addr_t'(2 * k));
            tr_base.push_back(coef);                               tr_disp.push_back(addr_t'(2 * (8 * u + k)));
          end
          tr_base.push_back(out_a + addr_t'(blk * 128 + u * 16));  tr_disp.push_back(addr_t'(2 * v));
        end
  endtask

  task automatic gen_fft();
    addr_t x = 32'h2000_3000, tw = 32'h2004_0000;
    for (int half = 256; half >= 1; half = half / 2)
      for (int g = 0; g < 512; g += 2 * half)
        for (int i = 0; i < half; i++) begin
          addr_t p;
          p = x + addr_t'((g + i) * 8);
          tr_base.push_back(p);  tr_disp.push_back('0);
          tr_base.push_back(p);  tr_disp.push_back(addr_t'(half * 8));
          tr_base.push_back(tw); tr_disp.push_back(addr_t'(i * (256 / half) * 8));
          tr_base.push_back(p);  tr_disp.push_back('0);
          tr_base.push_back(p);  tr_disp.push_back(addr_t'(half * 8));
        end
  endtask

  // ------------------------------------------------------------ units under test
  logic        req_valid [NCFG];
  logic        req_ready [NCFG];
  addr_t       base      [NCFG];
  addr_t       disp      [NCFG];
  cache_ctl_t  ctl       [NCFG];
  cache_resp_t resp      [NCFG];
  int          n_access[NCFG], n_tag[NCFG], n_way[NCFG], n_miss[NCFG], n_memo[NCFG], n_err[NCFG];
  bit          done_run  [NCFG];
  int          start_run = 0;

  for (genvar c = 0; c < NCFG; c++) begin : g_cfg
    dcache_mab #(.N_TAG(CFG_TAG[c]), .N_IDX(CFG_IDX[c])) u_mab (
      .clk, .rst_n, .req_valid(req_valid[c]), .req_ready(req_ready[c]),
      .base(base[c]), .disp(disp[c]), .ctl(ctl[c]), .resp(resp[c])
    );
    cache_model #(.MISS_LAT(3)) u_cache (
      .clk, .rst_n, .ctl(ctl[c]), .resp(resp[c]), .n_access(n_access[c]), .n_tag(n_tag[c]),
      .n_way(n_way[c]), .n_miss(n_miss[c]), .n_memo(n_memo[c]), .n_err(n_err[c])
    );

    initial begin
      req_valid[c] = 1'b0; base[c] = '0; disp[c] = '0;
      for (int r = 1; r <= 2; r++) begin
        wait (start_run == r);
        for (int n = 0; n < tr_base.size(); n++) begin
          @(negedge clk);
          base[c] = tr_base[n]; disp[c] = tr_disp[n]; req_valid[c] = 1'b1;
          #1;
          while (!req_ready[c]) begin @(negedge clk); #1; end
          @(posedge clk);
        end
        #1 req_valid[c] = 1'b0;
        repeat (8) @(negedge clk);
        done_run[c] = 1'b1;
      end
    end
  end

  // ------------------------------------------------------------ runs
  initial begin
    string name;
    for (int run = 0; run < 2; run++) begin
      rst_n = 0;
      tr_base.delete(); tr_disp.delete();
      for (int c = 0; c < NCFG; c++) done_run[c] = 1'b0;
      if (run == 0) begin gen_dct(); name = "dct"; end
      else          begin gen_fft(); name = "fft"; end
      repeat (3) @(negedge clk);
      rst_n = 1;
      start_run = run + 1;
      for (int c = 0; c < NCFG; c++) wait (done_run[c]);
      for (int c = 0; c < NCFG; c++) begin
        checks += 2 + CFG_TAG[c] / 2;
        if (n_err[c] != 0) begin failures++; $display("FAIL %s %0dx%0d: %0d wrong ways", name, CFG_TAG[c], CFG_IDX[c], n_err[c]); end
        if (n_access[c] != tr_base.size()) begin failures++; $display("FAIL %s %0dx%0d: %0d of %0d accesses", name, CFG_TAG[c], CFG_IDX[c], n_access[c], tr_base.size()); end
        if (CFG_TAG[c] == 2 && n_tag[c] >= n_access[c]) begin failures++; $display("FAIL %s %0dx%0d: no tag read saved", name, CFG_TAG[c], CFG_IDX[c]); end
        $display("%s %0dx%-2d MAB: %0d accesses, tag reads/access %0d.%03d, ways/access %0d.%03d, cache misses %0d",
                 name, CFG_TAG[c], CFG_IDX[c], n_access[c],
                 n_tag[c] / n_access[c], (n_tag[c] * 1000 / n_access[c]) % 1000,
                 n_way[c] / n_access[c], (n_way[c] * 1000 / n_access[c]) % 1000, n_miss[c]);
      end
      checks++;
      if (n_tag[7] > n_tag[0]) begin failures++; $display("FAIL %s: 2x32 reads more tags than 1x4", name); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
