// mab_table: the Memory Address Buffer (MAB).
//
// The MAB remembers in which cache way recently used lines live, so that an
// access that hits in it can skip the tag arrays and read a single data way.
// It holds N_TAG entries of {tag, cflag} and N_IDX entries of set index; every
// pair (tag entry i, set-index entry j) stands for one line and owns a valid
// flag vflag[i][j] and a way number way[i][j]. A 2x8 MAB therefore covers 16
// lines while storing only two 20-bit and eight 9-bit keys.
//
// Lookup (combinational, in the address generation cycle): the key from
// mab_keygen is compared with all tag entries and all set-index entries; it is
// a hit when both match and the pair's vflag is set. A key with cflag 11 never
// hits.
//
// Update, following the paper's four cases, at the clock edge where the access
// leaves the lookup stage (req_valid && req_ready):
//   tag hit i,  set hit j   : only the LRU orders change
//   tag miss,   set hit j   : LRU tag entry i is replaced, vflag[i][*] <= 0
//   tag hit i,  set miss    : LRU set entry j is replaced, vflag[*][j] <= 0
//   both miss               : both replaced, vflag[i][*] and vflag[*][j] <= 0
//   cflag 11                : vflag[LRU tag entry][*] <= 0, nothing allocated
// vflag[i][j] <= 1 and way[i][j] <= resp.way are written when the cache
// reports the access done (resp.valid), one or more cycles later. Only one
// access is outstanding: req_ready is high when none is, or when it finishes
// in this cycle.
//
// This design's own additions, where the paper is silent or short:
//  * REFILL_INVALIDATE: the paper argues the MAB stays consistent with the
//    cache as long as there are fewer tag entries than ways, yet uses 2 tag
//    entries with a 2-way cache. Then a line can be evicted by a set-local LRU
//    decision while its pair stays valid. With this parameter set, a refill
//    reported by the cache clears every vflag of the matching set-index entry
//    that points to the refilled way, which restores consistency.
//  * A lookup that matches the pair being completed in the same cycle hits
//    with the reported way (bypass), and a lookup of a pair just killed by a
//    refill in the same cycle misses.
//  * Entry valid bits and vflags are cleared by reset.
module mab_table
  import mab_pkg::*;
#(
  parameter int unsigned N_TAG             = 2,
  parameter int unsigned N_IDX             = 8,
  parameter bit          REFILL_INVALIDATE = 1'b1
) (
  input  logic        clk,
  input  logic        rst_n,
  // lookup stage
  input  logic        req_valid,
  output logic        req_ready,
  input  mab_key_t    key,
  output logic        hit,
  output way_t        hit_way,
  // completion of the access in the cache stage
  input  cache_resp_t resp
);

  localparam int unsigned TW = (N_TAG > 1) ? $clog2(N_TAG) : 1;
  localparam int unsigned IW = (N_IDX > 1) ? $clog2(N_IDX) : 1;
  typedef logic [TW-1:0] ti_t;
  typedef logic [IW-1:0] ii_t;

  // ---------------------------------------------------------------- state
  tag_t   tag_q   [N_TAG];
  cflag_e cflag_q [N_TAG];
  logic   tag_v_q [N_TAG];
  idx_t   idx_q   [N_IDX];
  logic   idx_v_q [N_IDX];
  logic   vflag_q [N_TAG][N_IDX];
  way_t   way_q   [N_TAG][N_IDX];

  // the access in the cache stage
  logic   pend_q;      // outstanding access
  logic   pend_key_q;  // it was allocated a pair (cflag != 11)
  logic   pend_jv_q;   // its set index has an entry
  ti_t    pend_i_q;
  ii_t    pend_j_q;

  ti_t tag_victim;
  ii_t idx_victim;

  // ---------------------------------------------------------------- lookup
  logic key_ok, t_hit, s_hit;
  ti_t  t_i;
  ii_t  s_j;
  logic done, same_pair, killed, adv;

  always_comb begin
    key_ok = (key.cflag != CF_INVAL);
    t_hit  = 1'b0;
    t_i    = '0;
    for (int unsigned i = 0; i < N_TAG; i++)
      if (!t_hit && tag_v_q[i] && tag_q[i] == key.tag && cflag_q[i] == key.cflag) begin
        t_hit = 1'b1;
        t_i   = TW'(i);
      end
    s_hit = 1'b0;
    s_j   = '0;
    for (int unsigned j = 0; j < N_IDX; j++)
      if (!s_hit && idx_v_q[j] && idx_q[j] == key.idx) begin
        s_hit = 1'b1;
        s_j   = IW'(j);
      end

    done      = pend_q && resp.valid;
    same_pair = done && pend_key_q && t_hit && s_hit && t_i == pend_i_q && s_j == pend_j_q;
    killed    = REFILL_INVALIDATE && done && resp.refill && pend_jv_q && s_hit &&
                s_j == pend_j_q && way_q[t_i][s_j] == resp.way;

    hit     = key_ok && t_hit && s_hit && (same_pair || (vflag_q[t_i][s_j] && !killed));
    hit_way = same_pair ? resp.way : way_q[t_i][s_j];

    req_ready = !pend_q || resp.valid;
    adv       = req_valid && req_ready;
  end

  // ---------------------------------------------------------------- allocation
  ti_t a_i;
  ii_t a_j;
  always_comb begin
    a_i = t_hit ? t_i : tag_victim;
    a_j = s_hit ? s_j : idx_victim;
  end

  mab_lru #(.N(N_TAG)) u_tag_lru (
    .clk, .rst_n,
    .touch     (adv && key_ok),
    .touch_idx (a_i),
    .victim    (tag_victim)
  );

  mab_lru #(.N(N_IDX)) u_idx_lru (
    .clk, .rst_n,
    .touch     (adv && key_ok),
    .touch_idx (a_j),
    .victim    (idx_victim)
  );

  // ---------------------------------------------------------------- update
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned i = 0; i < N_TAG; i++) begin
        tag_q[i]   <= '0;
        cflag_q[i] <= CF_SAME;
        tag_v_q[i] <= 1'b0;
      end
      for (int unsigned j = 0; j < N_IDX; j++) begin
        idx_q[j]   <= '0;
        idx_v_q[j] <= 1'b0;
      end
      for (int unsigned i = 0; i < N_TAG; i++)
        for (int unsigned j = 0; j < N_IDX; j++) begin
          vflag_q[i][j] <= 1'b0;
          way_q[i][j]   <= '0;
        end
      pend_q     <= 1'b0;
      pend_key_q <= 1'b0;
      pend_jv_q  <= 1'b0;
      pend_i_q   <= '0;
      pend_j_q   <= '0;
    end else begin
      // 1) completion of the access in the cache stage
      if (done) begin
        if (REFILL_INVALIDATE && resp.refill && pend_jv_q)
          for (int unsigned i = 0; i < N_TAG; i++)
            if (way_q[i][pend_j_q] == resp.way) vflag_q[i][pend_j_q] <= 1'b0;
        if (pend_key_q) begin
          vflag_q[pend_i_q][pend_j_q] <= 1'b1;
          way_q[pend_i_q][pend_j_q]   <= resp.way;
        end
      end
      // 2) allocation for the access leaving the lookup stage (wins over 1)
      if (adv) begin
        if (key_ok) begin
          if (!t_hit) begin
            tag_q[a_i]   <= key.tag;
            cflag_q[a_i] <= key.cflag;
            tag_v_q[a_i] <= 1'b1;
            for (int unsigned j = 0; j < N_IDX; j++) vflag_q[a_i][j] <= 1'b0;
          end
          if (!s_hit) begin
            idx_q[a_j]   <= key.idx;
            idx_v_q[a_j] <= 1'b1;
            for (int unsigned i = 0; i < N_TAG; i++) vflag_q[i][a_j] <= 1'b0;
          end
        end else begin
          for (int unsigned j = 0; j < N_IDX; j++) vflag_q[tag_victim][j] <= 1'b0;
        end
      end
      // 3) bookkeeping of the outstanding access
      if (adv) begin
        pend_q     <= 1'b1;
        pend_key_q <= key_ok;
        pend_jv_q  <= key_ok || s_hit;
        pend_i_q   <= a_i;
        pend_j_q   <= a_j;
      end else if (done) begin
        pend_q <= 1'b0;
      end
    end
  end

  // an out-of-range key never hits
  a_inval_miss : assert property (@(posedge clk) disable iff (!rst_n) !key_ok |-> !hit);
  // a completion is only reported for an outstanding access
  a_resp_pending : assert property (@(posedge clk) disable iff (!rst_n) resp.valid |-> pend_q);

endmodule
