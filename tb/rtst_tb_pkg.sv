// rtst_tb_pkg: reference model used by the RTST testbenches.
//
// rtst_model holds a set of prefix entries (value, prefix length, flow id,
// valid) for one tree and
//   * builds the complete RTST node image level by level with the
//     one-third / two-thirds split: of n sorted entries, entries floor(n/3)
//     and floor(2n/3) form the node, the three sub-lists left of, between and
//     right of them form the left, middle and right sub-trees, and the
//     children of the node at address A of level i sit at 3A, 3A+1, 3A+2 of
//     level i+1; a single entry gives a node holding that entry twice;
//   * answers lookups by a linear scan over all valid entries (no tree), so
//     expected results never depend on the tree layout;
//   * performs deletion (clear valid bit), modification (new flow id) and
//     simple insertion (reuse an invalid entry, fill a one-entry leaf, or add
//     a leaf under a node) on the image, recording the nodes it changed so
//     that a testbench can push them into the hardware with write bubbles.
package rtst_tb_pkg;

  class rtst_model #(int unsigned KEY_W = 32, int unsigned PLEN_W = 6,
                     int unsigned FLOW_W = 10, int unsigned LEVELS = 6);
    localparam int unsigned E_W = 1 + FLOW_W + PLEN_W + KEY_W;
    typedef logic [KEY_W-1:0] key_t;
    typedef logic [E_W-1:0]   entry_t;
    typedef logic [2*E_W-1:0] node_t;

    // flat list of entries (for the reference lookup)
    key_t        val[$];
    int unsigned plen[$];
    int unsigned flow[$];
    bit          valid[$];
    // tree image and per-entry level
    node_t       img[LEVELS][];
    int          lvl_of[int unsigned];   // flow id -> level holding it
    // dirty nodes since the last take_writes()
    int          dirty_lvl[$];
    int          dirty_adr[$];
    bit          overflow;

    function new();
      for (int l = 0; l < int'(LEVELS); l++) begin
        int unsigned d = 1;
        for (int i = 0; i < l; i++) d *= 3;
        img[l] = new[d];
        foreach (img[l][a]) img[l][a] = '0;
      end
      overflow = 0;
    endfunction

    static function key_t mask(int unsigned pl);
      key_t ones = '1;
      return ~(ones >> pl);
    endfunction
    static function key_t lo(key_t v, int unsigned pl);
      return v & mask(pl);
    endfunction
    static function key_t hi(key_t v, int unsigned pl);
      return v | ~mask(pl);
    endfunction
    static function bit contains(key_t v, int unsigned pl, key_t k);
      return (k >= lo(v, pl)) && (k <= hi(v, pl));
    endfunction
    static function entry_t mk(bit v, int unsigned f, int unsigned pl, key_t x);
      return {v, FLOW_W'(f), PLEN_W'(pl), x};
    endfunction

    // does the prefix overlap any entry already in the set (valid or not)
    function bit overlaps(key_t v, int unsigned pl);
      foreach (val[i])
        if (!(hi(v, pl) < lo(val[i], plen[i]) || lo(v, pl) > hi(val[i], plen[i]))) return 1;
      return 0;
    endfunction

    function void add(key_t v, int unsigned pl, int unsigned f);
      val.push_back(lo(v, pl)); plen.push_back(pl); flow.push_back(f); valid.push_back(1);
    endfunction

    // reference lookup: linear scan
    function bit lookup(key_t k, output int unsigned f);
      f = 0;
      foreach (val[i])
        if (valid[i] && contains(val[i], plen[i], k)) begin
          f = flow[i];
          return 1;
        end
      return 0;
    endfunction

    function int find_flow(int unsigned f);
      foreach (flow[i]) if (flow[i] == f) return i;
      return -1;
    endfunction

    // ---- complete RTST construction ----
    local int order[$];
    local function void rec(int lo_i, int hi_i, int level, int addr);
      int n, ll, lr;
      n = hi_i - lo_i;
      if (n <= 0) return;
      if (level >= int'(LEVELS)) begin overflow = 1; return; end
      ll = lo_i + n / 3;
      lr = lo_i + (2 * n) / 3;
      img[level][addr] = {ent(order[lr]), ent(order[ll])};
      lvl_of[flow[order[ll]]] = level;
      lvl_of[flow[order[lr]]] = level;
      mark(level, addr);
      rec(lo_i, ll, level + 1, 3 * addr);
      rec(ll + 1, lr, level + 1, 3 * addr + 1);
      rec(lr + 1, hi_i, level + 1, 3 * addr + 2);
    endfunction

    function entry_t ent(int i);
      return mk(valid[i], flow[i], plen[i], val[i]);
    endfunction

    function void mark(int level, int addr);
      foreach (dirty_lvl[i]) if (dirty_lvl[i] == level && dirty_adr[i] == addr) return;
      dirty_lvl.push_back(level); dirty_adr.push_back(addr);
    endfunction

    function void build();
      order.delete();
      foreach (val[i]) order.push_back(i);
      // insertion sort by range start
      for (int i = 1; i < order.size(); i++) begin
        int j = i;
        while (j > 0 && val[order[j-1]] > val[order[j]]) begin
          int t = order[j]; order[j] = order[j-1]; order[j-1] = t; j--;
        end
      end
      rec(0, order.size(), 0, 0);
    endfunction

    // ---- updates on the image ----
    // rewrite every node entry that carries flow f and e's prefix with e
    local function void patch(int unsigned f, entry_t e);
      for (int l = 0; l < int'(LEVELS); l++)
        foreach (img[l][a]) begin
          entry_t el = img[l][a][E_W-1:0], er = img[l][a][2*E_W-1:E_W];
          bit ch = 0;
          if (el != '0 && el[KEY_W+PLEN_W +: FLOW_W] == FLOW_W'(f) && el[KEY_W+PLEN_W-1:0] == e[KEY_W+PLEN_W-1:0]) begin el = e; ch = 1; end
          if (er != '0 && er[KEY_W+PLEN_W +: FLOW_W] == FLOW_W'(f) && er[KEY_W+PLEN_W-1:0] == e[KEY_W+PLEN_W-1:0]) begin er = e; ch = 1; end
          if (ch) begin img[l][a] = {er, el}; mark(l, a); end
        end
    endfunction

    function void remove(int unsigned f);
      int i = find_flow(f);
      valid[i] = 0;
      patch(f, ent(i));
    endfunction

    function void modify(int unsigned f, int unsigned nf);
      int i = find_flow(f);
      flow[i] = nf;
      lvl_of[nf] = lvl_of[f];
      patch(f, ent(i));
    endfunction

    // insert a new entry; returns 0 if it needs a node split
    function bit insert(key_t v, int unsigned pl, int unsigned f, output int kind);
      int addr = 0;
      entry_t e = mk(1, f, pl, lo(v, pl));
      key_t k = lo(v, pl);
      kind = -1;
      for (int l = 0; l < int'(LEVELS); l++) begin
        node_t nd = img[l][addr];
        entry_t el = nd[E_W-1:0], er = nd[2*E_W-1:E_W];
        key_t vl = el[KEY_W-1:0], vr = er[KEY_W-1:0];
        int unsigned pll = el[KEY_W +: PLEN_W], plr = er[KEY_W +: PLEN_W];
        if (nd == '0) begin                       // empty node: new leaf
          img[l][addr] = {e, e}; kind = 2;
        end else if (contains(vl, pll, k) && !el[E_W-1] && lo(v, pl) >= lo(vl, pll) && hi(v, pl) <= hi(vl, pll)) begin
          img[l][addr] = (el == er) ? {e, e} : {er, e}; kind = 0;   // reuse invalid entry
        end else if (contains(vr, plr, k) && !er[E_W-1] && lo(v, pl) >= lo(vr, plr) && hi(v, pl) <= hi(vr, plr)) begin
          img[l][addr] = {e, el}; kind = 0;
        end else if (el == er && l == int'(LEVELS) - 1) begin   // one-entry leaf at the bottom
          if (hi(v, pl) < lo(vl, pll)) img[l][addr] = {el, e};
          else if (lo(v, pl) > hi(vl, pll)) img[l][addr] = {e, el};
          else return 0;
          kind = 1;
        end else if (contains(vl, pll, k) || contains(vr, plr, k)) begin
          return 0;
        end else begin
          if (k < lo(vl, pll)) addr = 3 * addr;
          else if (k < lo(vr, plr)) addr = 3 * addr + 1;
          else addr = 3 * addr + 2;
          continue;
        end
        mark(l, addr);
        lvl_of[f] = l;
        add(v, pl, f);
        return 1;
      end
      return 0;
    endfunction

    function void take_writes(output int lv[$], output int ad[$]);
      lv = dirty_lvl; ad = dirty_adr;
      dirty_lvl.delete(); dirty_adr.delete();
    endfunction
  endclass

endpackage
