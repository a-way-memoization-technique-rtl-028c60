// wm_top: way memoization for the instruction and data caches of a processor.
//
// Two independent units sit between the processor's address generation and
// its two unmodified set-associative caches (32 kB, 2 ways, 512 sets, 32-byte
// lines each):
//   u_dside  dcache_mab with a 2x8 MAB  (2 tag entries, 8 set-index entries)
//   u_iside  icache_mab with a 2x16 MAB (2 tag entries, 16 set-index entries)
// the sizes the paper settles on for its data and instruction caches. Each
// unit takes one address per cycle, registers the address and the tag/way
// disable signals for its cache, and learns the way of every line from the
// cache's response. The processor and the caches are outside this module; the
// d_* ports face the load/store unit and data cache, the i_* ports the fetch
// unit and instruction cache.
module wm_top
  import mab_pkg::*;
#(
  parameter int unsigned D_N_TAG = 2,
  parameter int unsigned D_N_IDX = 8,
  parameter int unsigned I_N_TAG = 2,
  parameter int unsigned I_N_IDX = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  // load/store address generation
  input  logic        d_req_valid,
  output logic        d_req_ready,
  input  addr_t       d_base,
  input  addr_t       d_disp,
  // data cache
  output cache_ctl_t  d_ctl,
  input  cache_resp_t d_resp,
  // instruction fetch
  input  logic        i_req_valid,
  output logic        i_req_ready,
  input  flow_e       i_flow,
  input  addr_t       i_disp,
  input  addr_t       i_link_addr,
  // instruction cache
  output cache_ctl_t  i_ctl,
  input  cache_resp_t i_resp
);

  dcache_mab #(.N_TAG(D_N_TAG), .N_IDX(D_N_IDX)) u_dside (
    .clk, .rst_n,
    .req_valid (d_req_valid),
    .req_ready (d_req_ready),
    .base      (d_base),
    .disp      (d_disp),
    .ctl       (d_ctl),
    .resp      (d_resp)
  );

  icache_mab #(.N_TAG(I_N_TAG), .N_IDX(I_N_IDX)) u_iside (
    .clk, .rst_n,
    .req_valid (i_req_valid),
    .req_ready (i_req_ready),
    .flow      (i_flow),
    .disp      (i_disp),
    .link_addr (i_link_addr),
    .ctl       (i_ctl),
    .resp      (i_resp)
  );

endmodule
