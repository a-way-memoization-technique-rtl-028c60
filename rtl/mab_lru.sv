// mab_lru: least-recently-used order of N entries.
//
// Each entry holds a rank, 0 = most recently used, N-1 = least recently used;
// the ranks are always a permutation of 0..N-1 (set so at reset). When an entry
// is touched, every entry ranked more recent than it ages by one and the
// touched entry becomes rank 0. 'victim' is the entry of rank N-1, available
// combinationally; a touch takes effect at the next clock edge. The MAB keeps
// one of these for its tag entries and one for its set-index entries; the
// policy is the paper's, the rank-counter implementation this design's own.
module mab_lru #(
  parameter int unsigned N = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 touch,
  input  logic [(N > 1 ? $clog2(N) : 1)-1:0] touch_idx,
  output logic [(N > 1 ? $clog2(N) : 1)-1:0] victim
);

  localparam int unsigned W = (N > 1) ? $clog2(N) : 1;
  typedef logic [W-1:0] rank_t;

  rank_t rank_q [N];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned e = 0; e < N; e++) rank_q[e] <= rank_t'(e);
    end else if (touch) begin
      for (int unsigned e = 0; e < N; e++) begin
        if (W'(e) == touch_idx)                 rank_q[e] <= '0;
        else if (rank_q[e] < rank_q[touch_idx]) rank_q[e] <= rank_q[e] + rank_t'(1);
      end
    end
  end

  always_comb begin
    victim = '0;
    for (int unsigned e = 0; e < N; e++)
      if (rank_q[e] == rank_t'(N - 1)) victim = W'(e);
  end

endmodule
