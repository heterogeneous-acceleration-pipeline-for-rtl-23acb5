// hotline_ref_pkg: reference models used by the testbenches, written from the
// design's specification rather than from its RTL:
//  * ref_key / ref_hash: the EAL key (index << 8 | table) and the 4-round
//    Feistel hash on two 20-bit halves, F(r, i) = ((r * 0x5BD1F) ^ (r >> 3)) +
//    (0x9E3779B97F4A7C15 >> 7i), all mod 2^20;
//  * eal_model: a set-associative SRRIP tracker with 2-bit counters, insertion
//    at 2, promotion to 0 on a hit, aging to 3 on a full set, that also keeps the
//    full key of every entry (the hardware keeps only a 14-bit identifier) so
//    that a testbench knows which embedding row sits at which hot position.
package hotline_ref_pkg;

  function automatic logic [39:0] ref_key(input logic [7:0] tbl, input logic [31:0] idx);
    return {idx, tbl};
  endfunction

  function automatic logic [19:0] ref_f(input logic [19:0] r, input int i);
    logic [63:0] rc;
    logic [19:0] k, m;
    logic [39:0] prod;
    rc   = 64'h9E37_79B9_7F4A_7C15;
    k    = 20'(rc >> (7 * i));
    prod = 40'(r) * 40'h5_BD1F;
    m    = prod[19:0];
    return (m ^ (r >> 3)) + k;
  endfunction

  function automatic logic [39:0] ref_hash(input logic [39:0] key, input int rounds = 4);
    logic [19:0] l, r, t;
    l = key[39:20];
    r = key[19:0];
    for (int i = 0; i < rounds; i++) begin
      t = l ^ ref_f(r, i);
      l = r;
      r = t;
    end
    return {l, r};
  endfunction

  function automatic logic [39:0] ref_unhash(input logic [39:0] h, input int rounds = 4);
    logic [19:0] l, r, t;
    l = h[39:20];
    r = h[19:0];
    for (int i = rounds - 1; i >= 0; i--) begin
      t = r ^ ref_f(l, i);
      r = l;
      l = t;
    end
    return {l, r};
  endfunction

  class eal_model;
    int unsigned banks, sets, ways;
    bit          valid[];
    int unsigned ac[];
    logic [13:0] id[];
    logic [39:0] full[];

    function new(int unsigned banks, int unsigned sets, int unsigned ways);
      this.banks = banks; this.sets = sets; this.ways = ways;
      valid = new[banks * sets * ways];
      ac    = new[banks * sets * ways];
      id    = new[banks * sets * ways];
      full  = new[banks * sets * ways];
      foreach (valid[i]) begin valid[i] = 0; ac[i] = 0; id[i] = 0; full[i] = 0; end
    endfunction

    function automatic int unsigned pos(int unsigned b, int unsigned s, int unsigned w);
      return (b * sets + s) * ways + w;
    endfunction

    // one access: returns hit (before update) and the way it hit or filled
    function automatic void access(input int unsigned b, input int unsigned s,
                                   input logic [13:0] ident, input logic [39:0] key,
                                   input bit learn, output bit hit, output int unsigned way);
      int unsigned mx;
      hit = 0; way = 0;
      for (int unsigned w = 0; w < ways; w++)
        if (!hit && valid[pos(b, s, w)] && id[pos(b, s, w)] == ident) begin
          hit = 1; way = w;
        end
      if (hit) begin
        if (learn) ac[pos(b, s, way)] = 0;
        return;
      end
      for (int unsigned w = 0; w < ways; w++)
        if (!valid[pos(b, s, w)]) begin
          way = w;
          if (learn) begin
            valid[pos(b, s, w)] = 1; ac[pos(b, s, w)] = 2;
            id[pos(b, s, w)] = ident; full[pos(b, s, w)] = key;
          end
          return;
        end
      // full set: age until some way reaches 3, evict the lowest such way
      while (1) begin
        for (int unsigned w = 0; w < ways; w++)
          if (ac[pos(b, s, w)] == 3) begin
            way = w;
            if (learn) begin
              ac[pos(b, s, w)] = 2; id[pos(b, s, w)] = ident; full[pos(b, s, w)] = key;
            end
            return;
          end
        mx = 0;
        for (int unsigned w = 0; w < ways; w++) if (ac[pos(b, s, w)] > mx) mx = ac[pos(b, s, w)];
        // aging is only stored when learning; compute the victim the same way otherwise
        if (!learn) begin
          for (int unsigned w = 0; w < ways; w++)
            if (ac[pos(b, s, w)] == mx) begin way = w; return; end
        end
        for (int unsigned w = 0; w < ways; w++) ac[pos(b, s, w)] = ac[pos(b, s, w)] + 1;
      end
    endfunction
  endclass

endpackage
