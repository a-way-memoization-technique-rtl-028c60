// mab_keygen: forms the MAB search key from a base address and a displacement
// without waiting for the 32-bit address adder.
//
// The low 14 bits of base and displacement are added in a 14-bit adder; bits
// 13:5 of the sum are the exact set index, and its carry out, together with
// whether the displacement's upper 18 bits are all zeros or all ones, gives
// the 2-bit cflag (encoding in mab_pkg, taken from the paper's table). The key
// tag is the base address' own upper 18 bits, so the key identifies the real
// tag as base tag + {0, +1, -1}. Displacements outside [-2^14, 2^14) give
// cflag 11, which never hits. Purely combinational; the paper puts this adder
// plus the set-index comparator on the MAB's critical path.
module mab_keygen
  import mab_pkg::*;
(
  input  addr_t    base,
  input  addr_t    disp,
  output mab_key_t key
);

  logic [LOW_W:0]        low_sum;  // carry + 14-bit sum
  logic [TAG_W-1:0]      disp_hi;
  logic                  hi_zero, hi_ones, carry;

  always_comb begin
    low_sum = {1'b0, base[LOW_W-1:0]} + {1'b0, disp[LOW_W-1:0]};
    carry   = low_sum[LOW_W];
    disp_hi = disp[ADDR_W-1:LOW_W];
    hi_zero = (disp_hi == '0);
    hi_ones = (disp_hi == '1);

    if (hi_zero)      key.cflag = carry ? CF_PLUS : CF_SAME;
    else if (hi_ones) key.cflag = carry ? CF_SAME : CF_MINUS;
    else              key.cflag = CF_INVAL;

    key.tag = base[ADDR_W-1:LOW_W];
    key.idx = low_sum[LOW_W-1:OFF_W];
  end

endmodule
