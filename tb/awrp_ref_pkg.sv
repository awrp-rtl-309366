// awrp_ref_pkg: reference model of one AWRP-managed set, for testbenches.
//
// The model is written from the policy's rules, separately from the RTL:
// every block keeps a valid bit, its address, a frequency count F, the clock
// R of its last reference and a stored weight W. A hit increments F
// (saturating at 2^fw-1) and sets R to the clock. A miss weighs every block,
// W = floor(F * 2^frac / ((N - R) mod 2^nw)), skipping blocks whose age is 0,
// with empty blocks weighing 0, and replaces the first block of smallest
// weight with F = 1, R = N, W = 0.
//
// awrp_trace_addr() draws block addresses with the mix of locality a data
// trace shows: a small hot set, a medium working set, and one-off scans.
package awrp_ref_pkg;

  class awrp_set_model;
    int unsigned ways;
    int unsigned fw;
    int unsigned nw;
    int unsigned frac;
    bit          valid [];
    longint      tag   [];
    longint      f     [];
    longint      r     [];
    longint      w     [];

    function new(int unsigned ways_i, int unsigned fw_i, int unsigned nw_i,
                 int unsigned frac_i);
      ways  = ways_i;
      fw    = fw_i;
      nw    = nw_i;
      frac  = frac_i;
      valid = new[ways];
      tag   = new[ways];
      f     = new[ways];
      r     = new[ways];
      w     = new[ways];
      foreach (valid[i]) begin
        valid[i] = 0;
        tag[i]   = 0;
        f[i]     = 0;
        r[i]     = 0;
        w[i]     = 0;
      end
    endfunction

    // One reference at clock value n. Returns the outcome through the
    // output arguments.
    function void access(longint addr, longint n, output bit hit,
                         output int way, output bit evict,
                         output longint evict_tag);
      longint fmax = (longint'(1) << fw) - 1;
      longint mask = (longint'(1) << nw) - 1;
      longint best;
      int     best_way;
      bit     found;
      hit       = 0;
      way       = 0;
      evict     = 0;
      evict_tag = 0;
      for (int i = 0; i < int'(ways); i++) begin
        if (valid[i] && tag[i] == addr && !hit) begin
          hit = 1;
          way = i;
        end
      end
      if (hit) begin
        if (f[way] < fmax) f[way] = f[way] + 1;
        r[way] = n;
        return;
      end
      found    = 0;
      best     = 0;
      best_way = 0;
      for (int i = 0; i < int'(ways); i++) begin
        longint age = (n - r[i]) & mask;
        longint wi;
        bit     cand;
        if (!valid[i]) begin
          wi   = 0;
          cand = 1;
        end else if (age != 0) begin
          wi   = (f[i] << frac) / age;
          cand = 1;
        end else begin
          wi   = 0;
          cand = 0;
        end
        if (cand) begin
          w[i] = wi;
          if (!found || wi < best) begin
            found    = 1;
            best     = wi;
            best_way = i;
          end
        end
      end
      way       = best_way;
      evict     = valid[way];
      evict_tag = tag[way];
      valid[way] = 1;
      tag[way]   = addr;
      f[way]     = 1;
      r[way]     = n;
      w[way]     = 0;
    endfunction
  endclass

  // Block address drawn from a mix of localities: 45 % from 8 hot blocks,
  // 35 % from a working set of ws blocks, 20 % from a sequential scan that
  // never repeats.
  function automatic longint awrp_trace_addr(int unsigned ws, ref longint scan_ptr);
    int unsigned p;
    p = $urandom_range(99);
    if (p < 45) return longint'($urandom_range(7)) + 64'h1000;
    if (p < 80) return longint'($urandom_range(ws - 1)) + 64'h2000;
    scan_ptr = scan_ptr + 1;
    return scan_ptr;
  endfunction

endpackage
