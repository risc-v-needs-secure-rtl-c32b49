// spmp_ref_pkg: reference model of an SPMP permission check for the
// testbenches. It works on byte ranges (lower bound, size) computed with
// plain 64-bit arithmetic, independently of the mask logic of the RTL.
package spmp_ref_pkg;

  // Does entry (cfg, word address a, previous word address p) cover byte paddr?
  function automatic bit ref_match(input bit [7:0] cfg, input longint unsigned a,
                                   input longint unsigned p, input longint unsigned paddr);
    longint unsigned base, size;
    int t;
    case (cfg[4:3])
      2'd1: return (paddr >= p * 4) && (paddr < a * 4);
      2'd2: return (paddr >= a * 4) && (paddr < a * 4 + 4);
      2'd3: begin
        t = 0;
        while (t < 32 && a[t]) t++;
        size = 64'd1 << (t + 3);
        base = (a * 4) & ~(size - 1);
        return (paddr >= base) && (paddr < base + size);
      end
      default: return 1'b0;
    endcase
  endfunction

  // First enabled matching entry decides; cfg bit 7 is the user-rule bit,
  // bits 0/1/2 grant read/write/execute. acc: 0 read, 1 write, 2 execute.
  function automatic bit ref_check(input bit [7:0] cfg[32], input longint unsigned addr[32],
                                   input bit [31:0] en, input int n,
                                   input longint unsigned paddr, input int acc, input bit user);
    for (int i = 0; i < n; i++) begin
      if (en[i] && ref_match(cfg[i], addr[i], (i == 0) ? 0 : addr[i-1], paddr))
        return cfg[i][acc] && (cfg[i][7] == user);
    end
    return !user;
  endfunction

  // Random entry configuration with a bias towards a small address window so
  // that accesses hit entries often.
  function automatic bit [7:0] rand_cfg();
    bit [7:0] c;
    c = 8'($urandom);
    return c;
  endfunction

  function automatic longint unsigned rand_waddr();
    int k;
    k = $urandom_range(0, 9);
    if (k == 0) return longint'($urandom);                    // anywhere
    if (k < 4)  return longint'($urandom_range(0, 255));      // small window
    // NAPOT-style value: small base with 0..5 trailing ones
    return longint'(($urandom_range(0, 31) << 6) | ((1 << $urandom_range(0, 5)) - 1));
  endfunction

  function automatic longint unsigned rand_paddr();
    if ($urandom_range(0, 9) == 0) return {30'd0, 34'($urandom) << 2} | longint'($urandom_range(0, 3));
    return longint'($urandom_range(0, 4095));
  endfunction

endpackage
