// tb_mab_lru: compares the LRU order of mab_lru with a reference list.
//
// The reference keeps the entries in a queue, most recently used first; a
// touch moves an entry to the front and the victim is the last element. After
// reset the victim must be entry N-1. Random touches with and without the
// touch enable are checked every cycle for N = 8 (MAB set-index entries) and
// N = 2 (tag entries).
module tb_mab_lru;
  logic clk = 0, rst_n = 0;
  int   checks = 0, failures = 0, cycles = 0;

  always #5 clk = ~clk;

  logic       t8, t2;
  logic [2:0] i8, v8;
  logic [0:0] i2, v2;

  mab_lru #(.N(8)) dut8 (.clk, .rst_n, .touch(t8), .touch_idx(i8), .victim(v8));
  mab_lru #(.N(2)) dut2 (.clk, .rst_n, .touch(t2), .touch_idx(i2), .victim(v2));

  int q8[$], q2[$];

  task automatic ref_touch(ref int q[$], input int e);
    foreach (q[k]) if (q[k] == e) begin q.delete(k); break; end
    q.push_front(e);
  endtask

  initial begin
    forever begin
      @(posedge clk);
      cycles++;
      if (cycles > 5000) begin
        failures++;
        $display("watchdog expired");
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
      end
    end
  end

  initial begin
    t8 = 0; t2 = 0; i8 = 0; i2 = 0;
    // reset order: entry 0 most recent, entry N-1 least recent
    for (int e = 0; e < 8; e++) q8.push_back(e);
    for (int e = 0; e < 2; e++) q2.push_back(e);
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      checks += 2;
      if (int'(v8) != q8[7]) begin failures++; $display("FAIL N=8 victim %0d expected %0d", v8, q8[7]); end
      if (int'(v2) != q2[1]) begin failures++; $display("FAIL N=2 victim %0d expected %0d", v2, q2[1]); end
      t8 = ($urandom_range(3, 0) != 0);
      t2 = ($urandom_range(1, 0) != 0);
      // favour recently used entries so that the order is not trivial
      i8 = (n % 4 == 0) ? 3'(q8[$urandom_range(7, 5)]) : 3'($urandom);
      i2 = 1'($urandom);
      if (t8) ref_touch(q8, int'(i8));
      if (t2) ref_touch(q2, int'(i2));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
