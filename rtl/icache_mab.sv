// icache_mab: way memoization for an instruction cache.
//
// The unit owns the program counter register. Each cycle the fetch logic says
// where the next fetch comes from (flow):
//   FLOW_SEQ     PC + STRIDE          MAB input: PC and the stride
//   FLOW_BRANCH  PC + branch offset   MAB input: PC and the offset
//   FLOW_LINK    link register        MAB input: the link register's tag and
//                                     set-index fields, cflag 00
// The next PC itself comes from an incrementer, the 32-bit branch adder or the
// link register, as in an ordinary fetch unit; the MAB key is formed next to
// them by the 14-bit key adder, so the lookup is off the PC's critical path.
// At the edge where the fetch is issued (req_valid && req_ready) the PC and
// the tag/way disable signals are registered and held until the cache answers
// (resp.valid with the way holding the line), exactly as in dcache_mab. The
// source selection, the stride of 8 and the link-register path follow the
// paper's I-cache figure; the cflag of a link target, the reset PC and the
// handshake are this design's choices. The unit fetches the next PC, so the
// first fetch after reset is normally a jump (FLOW_LINK or FLOW_BRANCH).
module icache_mab
  import mab_pkg::*;
#(
  parameter int unsigned N_TAG             = 2,
  parameter int unsigned N_IDX             = 16,
  parameter int unsigned STRIDE            = 8,
  parameter addr_t       RESET_PC          = '0,
  parameter bit          REFILL_INVALIDATE = 1'b1
) (
  input  logic        clk,
  input  logic        rst_n,
  // next-fetch selection
  input  logic        req_valid,
  output logic        req_ready,
  input  flow_e       flow,
  input  addr_t       disp,       // branch offset
  input  addr_t       link_addr,  // link register
  // cache access stage (ctl.addr is the program counter)
  output cache_ctl_t  ctl,
  input  cache_resp_t resp
);

  addr_t    pc, pc_next, pc_inc, br_target;
  addr_t    kdisp;
  mab_key_t key, add_key;
  logic     hit, adv;
  way_t     hit_way;

  assign pc        = ctl.addr;
  assign pc_inc    = pc + addr_t'(STRIDE);  // "++"
  assign br_target = pc + disp;             // 32-bit branch adder

  // operand of the 14-bit key adder: stride for sequential flow, else offset
  assign kdisp = (flow == FLOW_SEQ) ? addr_t'(STRIDE) : disp;

  mab_keygen u_keygen (.base(pc), .disp(kdisp), .key(add_key));

  always_comb begin
    unique case (flow)
      FLOW_LINK: begin
        key.tag   = link_addr[ADDR_W-1:LOW_W];
        key.cflag = CF_SAME;
        key.idx   = link_addr[LOW_W-1:OFF_W];
        pc_next   = link_addr;
      end
      FLOW_BRANCH: begin
        key     = add_key;
        pc_next = br_target;
      end
      default: begin
        key     = add_key;
        pc_next = pc_inc;
      end
    endcase
  end

  mab_table #(
    .N_TAG(N_TAG), .N_IDX(N_IDX), .REFILL_INVALIDATE(REFILL_INVALIDATE)
  ) u_mab (
    .clk, .rst_n,
    .req_valid, .req_ready,
    .key, .hit, .hit_way,
    .resp
  );

  assign adv = req_valid && req_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ctl             <= '0;
      ctl.addr        <= RESET_PC;
    end else if (adv) begin
      ctl.valid       <= 1'b1;
      ctl.addr        <= pc_next;
      ctl.tag_disable <= hit;
      for (int unsigned w = 0; w < N_WAYS; w++)
        ctl.way_disable[w] <= hit && (way_t'(w) != hit_way);
    end else if (resp.valid) begin
      ctl.valid <= 1'b0;
    end
  end

  // the cache sees a stable request until it answers
  a_ctl_stable : assert property (@(posedge clk) disable iff (!rst_n)
    ctl.valid && !resp.valid |=> $stable(ctl));
  // a memoised access enables exactly one way
  a_one_way : assert property (@(posedge clk) disable iff (!rst_n)
    ctl.valid && ctl.tag_disable |-> $onehot(~ctl.way_disable));

endmodule
