// tb_mab_keygen: checks the MAB key generator against the full 32-bit sum.
//
// For random and corner base/displacement pairs the expected address is
// base + disp. When the displacement lies in [-2^14, 2^14) the key must name
// that address: key tag + {0, +1, -1} (by cflag) equals its upper 18 bits and
// key set index equals bits 13:5. Otherwise cflag must be 11. Each of the five
// cells of the cflag table is also hit by a directed vector.
module tb_mab_keygen;
  import mab_pkg::*;

  addr_t    base, disp;
  mab_key_t key;
  int       checks = 0, failures = 0;
  int       cell_cnt [5];

  mab_keygen dut (.base, .disp, .key);

  function automatic tag_t decode(mab_key_t k);
    case (k.cflag)
      CF_PLUS:  return k.tag + 1'b1;
      CF_MINUS: return k.tag - 1'b1;
      default:  return k.tag;
    endcase
  endfunction

  task automatic check_one(addr_t b, addr_t d);
    addr_t a;
    logic  in_range;
    base = b; disp = d;
    #1;
    a        = b + d;
    in_range = ($signed(d) >= -32'sd16384) && ($signed(d) < 32'sd16384);
    checks++;
    if (in_range) begin
      if (key.cflag == CF_INVAL || decode(key) != a[31:14] || key.idx != a[13:5]) begin
        failures++;
        $display("FAIL base=%h disp=%h key=%h/%b/%h addr=%h", b, d, key.tag, key.cflag, key.idx, a);
      end
    end else if (key.cflag != CF_INVAL) begin
      failures++;
      $display("FAIL base=%h disp=%h out of range but cflag=%b", b, d, key.cflag);
    end
    // which table cell was exercised
    if (!in_range)                                      cell_cnt[4]++;
    else if (d[31] == 1'b0 && a[14] == b[14])           cell_cnt[0]++;
    else if (d[31] == 1'b0)                             cell_cnt[1]++;
    else if (a[31:14] != b[31:14])                      cell_cnt[2]++;
    else                                                cell_cnt[3]++;
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // directed: one vector per table cell, expected cflag written out
    check_one(32'h0001_0000, 32'h0000_0020);  // +small, no carry   -> 00
    checks++; if (key.cflag != CF_SAME)  failures++;
    check_one(32'h0001_3FE0, 32'h0000_0040);  // +small, carry      -> 01
    checks++; if (key.cflag != CF_PLUS)  failures++;
    check_one(32'h0001_0010, 32'hFFFF_FFE0);  // -small, no carry   -> 10
    checks++; if (key.cflag != CF_MINUS) failures++;
    check_one(32'h0001_0040, 32'hFFFF_FFE0);  // -small, carry      -> 00
    checks++; if (key.cflag != CF_SAME)  failures++;
    check_one(32'h0001_0040, 32'h0001_0000);  // large              -> 11
    checks++; if (key.cflag != CF_INVAL) failures++;
    // edges of the range
    check_one(32'h1234_5678, 32'h0000_3FFF);
    check_one(32'h1234_5678, 32'h0000_4000);
    check_one(32'h1234_5678, 32'hFFFF_C000);
    check_one(32'h1234_5678, 32'hFFFF_BFFF);
    check_one(32'hFFFF_FFFF, 32'h0000_0001);
    check_one(32'h0000_0000, 32'hFFFF_FFFF);
    // random: small, medium and any displacement
    for (int n = 0; n < 3000; n++) begin
      addr_t d;
      case (n % 3)
        0: d = addr_t'($signed({{20{$urandom_range(1,0) == 1}}, 12'($urandom)}));
        1: d = addr_t'($signed({{17{$urandom_range(1,0) == 1}}, 15'($urandom)}));
        default: d = $urandom;
      endcase
      check_one($urandom, d);
    end
    for (int c = 0; c < 5; c++) begin
      checks++;
      if (cell_cnt[c] == 0) begin failures++; $display("FAIL table cell %0d never exercised", c); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
