// dcache_mab: way memoization for a data cache.
//
// In the address generation cycle the load/store unit presents a base address
// and a displacement. Two paths run side by side: the ordinary 32-bit adder
// forms the memory address, while mab_keygen (a 14-bit adder and the cflag
// logic) and mab_table decide whether the line's way is already known. At the
// edge where the access moves to the cache stage the unit registers
//   ctl.addr         memory address
//   ctl.tag_disable  1 on a MAB hit: the tag arrays are not read
//   ctl.way_disable  on a hit every way except the memoised one is disabled,
//                    on a miss all ways are enabled (a normal access)
// and holds them until the cache answers with resp.valid, giving the way that
// holds the line and whether it was refilled. The MAB learns that way then.
// A new access is accepted (req_ready) when the cache stage is empty or
// finishing, so back-to-back hits run at one access per cycle and the unit
// adds no cycle to any access. The register set and the disable signals come
// from the paper's D-cache figure; the request/response handshake is this
// design's own.
module dcache_mab
  import mab_pkg::*;
#(
  parameter int unsigned N_TAG             = 2,
  parameter int unsigned N_IDX             = 8,
  parameter bit          REFILL_INVALIDATE = 1'b1
) (
  input  logic        clk,
  input  logic        rst_n,
  // address generation stage
  input  logic        req_valid,
  output logic        req_ready,
  input  addr_t       base,
  input  addr_t       disp,
  // cache access stage
  output cache_ctl_t  ctl,
  input  cache_resp_t resp
);

  mab_key_t key;
  logic     hit, adv;
  way_t     hit_way;
  addr_t    addr;

  assign addr = base + disp;  // the processor's own address adder

  mab_keygen u_keygen (.base, .disp, .key);

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
      ctl <= '0;
    end else if (adv) begin
      ctl.valid       <= 1'b1;
      ctl.addr        <= addr;
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
