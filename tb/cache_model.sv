// cache_model: behavioural stand-in for an unmodified 2-way set-associative
// cache (512 sets, 32-byte lines), tags only, no data.
//
// It takes the registered access from a way memoization unit (ctl) and answers
// on resp. A normal access (tag_disable = 0) reads both tags: a hit answers
// after HIT_LAT cycles (0: in the same cycle) with the hit way, a miss
// answers after MISS_LAT cycles with
// the set's LRU way, marked as a refill, and installs the line there. An
// access with tag_disable = 1 must have exactly one way enabled; the model
// answers after HIT_LAT cycles with that way and counts an error if the line is
// not there, which is the consistency check of the MAB. Replacement is LRU per
// set; every access, memoised or not, makes its line most recently used.
// Counters: accesses, tag reads, ways read, misses, memoised accesses, errors.
module cache_model
  import mab_pkg::*;
#(
  parameter int unsigned HIT_LAT  = 0,
  parameter int unsigned MISS_LAT = 2,
  parameter int unsigned N_SETS   = 512
) (
  input  logic        clk,
  input  logic        rst_n,
  input  cache_ctl_t  ctl,
  output cache_resp_t resp,
  output int          n_access,
  output int          n_tag,
  output int          n_way,
  output int          n_miss,
  output int          n_memo,
  output int          n_err
);

  tag_t tags  [N_SETS][N_WAYS];
  logic vld   [N_SETS][N_WAYS];
  way_t lru   [N_SETS];          // way to replace next
  int   wait_cnt;

  idx_t set;
  tag_t tag;
  logic hit;
  way_t hway, ewy;

  always_comb begin
    set  = ctl.addr[LOW_W-1:OFF_W];
    tag  = ctl.addr[ADDR_W-1:LOW_W];
    hit  = 1'b0;
    hway = '0;
    for (int w = 0; w < N_WAYS; w++)
      if (vld[set][w] && tags[set][w] == tag) begin hit = 1'b1; hway = way_t'(w); end
    ewy = ctl.way_disable[0] ? way_t'(1) : way_t'(0);
    resp = '0;
    if (ctl.valid) begin
      if (ctl.tag_disable) begin
        resp.valid = (wait_cnt >= int'(HIT_LAT));
        resp.way   = ewy;
      end else if (hit) begin
        resp.valid = (wait_cnt >= int'(HIT_LAT));
        resp.way   = hway;
      end else if (wait_cnt >= int'(MISS_LAT)) begin
        resp.valid  = 1'b1;
        resp.way    = lru[set];
        resp.refill = 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < N_SETS; s++) begin
        lru[s] <= '0;
        for (int w = 0; w < N_WAYS; w++) begin vld[s][w] <= 1'b0; tags[s][w] <= '0; end
      end
      wait_cnt <= 0;
      n_access <= 0; n_tag <= 0; n_way <= 0; n_miss <= 0; n_memo <= 0; n_err <= 0;
    end else if (ctl.valid) begin
      if (!resp.valid) begin
        wait_cnt <= wait_cnt + 1;
      end else begin
        wait_cnt <= 0;
        n_access <= n_access + 1;
        if (ctl.tag_disable) begin
          n_memo <= n_memo + 1;
          n_way  <= n_way + 1;
          if (ctl.way_disable == '0 || ctl.way_disable == '1 || !hit || hway != ewy) begin
            n_err <= n_err + 1;
            $display("cache_model: memoised access to %h in way %0d, line %s", ctl.addr, ewy,
                     hit ? "is in the other way" : "is not cached");
          end
        end else begin
          n_tag <= n_tag + 1;
          n_way <= n_way + N_WAYS;
          if (ctl.way_disable != '0) n_err <= n_err + 1;
          if (resp.refill) begin
            n_miss <= n_miss + 1;
            tags[set][resp.way] <= tag;
            vld[set][resp.way]  <= 1'b1;
          end
        end
        lru[set] <= ~resp.way;
      end
    end
  end

endmodule
