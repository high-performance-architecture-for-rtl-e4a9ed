// tb_rtst_table_sizes: the flow-lookup engine, at its default size, holding
// flow tables of 1024, 512, 256 and 128 flows in turn (15-field, 356-bit
// headers).
//
// For each table size N the testbench generates N flows with distinct
// identifiers (identifier = priority, lower wins), spreads them over the K
// groups so that inside a group all source prefixes and all destination keys
// are disjoint (N/16 of them shadow a flow of another group, so that some
// packets match in two groups), builds the complete trees of every group with
// the reference model and loads them with write bubbles. Every node of every
// level is rewritten, empty ones as zero, so nothing of the previous, larger
// table survives. It then sends one packet per flow and 200 random packets,
// two per clock, and checks each result against a linear scan of the table
// and its latency of LEVELS+2 clocks.
//
// A table of n flows per group fills h levels, where h is the smallest number
// with 3**h - 1 >= n, so a smaller table is found higher up in the trees. The
// testbench records the deepest stage in which any search of any group ended
// and checks that it is at most h (level h holds the empty nodes just below
// the leaves): 4 levels for 128 and 256 flows, 5 for 512 and 6 for 1024. The
// pipeline itself always has LEVELS stages, so the latency stays the same.
module tb_rtst_table_sizes;
  import rtst_tb_pkg::*;

  localparam int unsigned K = rtst_pkg::DEF_K_GROUPS, LEVELS = rtst_pkg::DEF_LEVELS;
  localparam int unsigned HDR_W = rtst_pkg::DEF_HDR_W, SA_W = rtst_pkg::DEF_SA_W;
  localparam int unsigned FLOW_W = rtst_pkg::DEF_FLOW_W, DST_W = HDR_W - SA_W;
  localparam int unsigned SA_PLEN_W = 6, DST_PLEN_W = 9;
  localparam int unsigned DST_NODE_W = 2 * (1 + FLOW_W + DST_PLEN_W + DST_W);
  localparam int unsigned AW = 10, SW = 3, GW = 2;
  localparam int unsigned EXACT_W = DST_W - SA_W;
  typedef rtst_tb_pkg::rtst_model #(SA_W, SA_PLEN_W, FLOW_W, LEVELS) sst_t;
  typedef rtst_tb_pkg::rtst_model #(DST_W, DST_PLEN_W, FLOW_W, LEVELS) dst_t;
  typedef logic [SA_W-1:0] sa_t;
  typedef logic [DST_W-1:0] dk_t;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // a falling edge applies the asynchronous reset
  logic [1:0] pkt_valid, res_valid, res_hit, res_multi;
  logic [1:0][HDR_W-1:0] pkt_hdr;
  logic pkt_ready, cfg_we, cfg_tree, cfg_entry, cfg_wen, bubble_req, upd_done;
  logic [GW-1:0] cfg_group;
  logic [SW-1:0] cfg_stage;
  logic [AW-1:0] cfg_addr;
  logic [DST_NODE_W-1:0] cfg_data;
  logic [1:0][FLOW_W-1:0] res_flow;
  logic [1:0][GW-1:0] res_group;

  rtst_flow_lookup dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  sst_t ms[K];
  dst_t md[K];
  int grp_of[int unsigned];     // flow id -> group

  typedef struct { longint t; bit hit; int unsigned flow; int grp; bit multi; } exp_t;
  exp_t sb[2][$];

  int n_hit = 0, n_miss = 0, n_multi = 0;
  int deepest = -1;             // deepest stage a search ended in, current table

  task automatic chk(input bit c, input string s);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL @%0d: %s", cyc, s); end
  endtask

  // result monitor
  always @(negedge clk) if (rst_n)
    for (int l = 0; l < 2; l++) if (res_valid[l]) begin
      exp_t e;
      if (sb[l].size() == 0) begin chk(0, "unexpected result"); continue; end
      e = sb[l].pop_front();
      chk(cyc - e.t == LEVELS + 2, $sformatf("latency %0d", cyc - e.t));
      chk(res_hit[l] == e.hit, $sformatf("line %0d hit %b expected %b", l, res_hit[l], e.hit));
      if (e.hit) begin
        chk(res_flow[l] == FLOW_W'(e.flow), $sformatf("line %0d flow %0d expected %0d", l, res_flow[l], e.flow));
        chk(int'(res_group[l]) == e.grp, $sformatf("group %0d expected %0d", res_group[l], e.grp));
        chk(res_multi[l] == e.multi, "multi-group flag");
        n_hit++;
        if (e.multi) n_multi++;
      end else n_miss++;
    end

  // deepest stage in which a search ended, over all groups and both trees
  for (genvar q = 0; q < int'(K); q++) begin : g_depth
    always @(negedge clk) if (rst_n)
      for (int s = 0; s < int'(LEVELS); s++)
        if (dut.g_grp[q].u_grp.sst_match_at[s] != 0 || dut.g_grp[q].u_grp.dst_match_at[s] != 0)
          if (s > deepest) deepest = s;
  end

  // reference: all flows of all groups; lowest identifier wins
  function automatic bit ref_match(input sa_t sa, input dk_t dk, output int unsigned f,
                                   output int g, output bit multi);
    int n = 0;
    f = 0; g = 0;
    for (int q = 0; q < int'(K); q++) begin
      bit found = 0;
      foreach (ms[q].val[i])
        if (!found && ms[q].valid[i] && sst_t::contains(ms[q].val[i], ms[q].plen[i], sa)) begin
          int j = md[q].find_flow(ms[q].flow[i]);
          if (j >= 0 && md[q].valid[j] && dst_t::contains(md[q].val[j], md[q].plen[j], dk)) begin
            found = 1;
            if (n == 0 || ms[q].flow[i] < f) begin f = ms[q].flow[i]; g = q; end
            n++;
          end
        end
    end
    multi = n > 1;
    return n > 0;
  endfunction

  task automatic send(input bit v0, input sa_t s0, input dk_t d0, input bit v1, input sa_t s1, input dk_t d1);
    exp_t e;
    pkt_valid = {v1, v0}; pkt_hdr[0] = {s0, d0}; pkt_hdr[1] = {s1, d1};
    for (int l = 0; l < 2; l++) if (pkt_valid[l]) begin
      e.t = cyc;
      e.hit = ref_match(pkt_hdr[l][HDR_W-1 -: SA_W], pkt_hdr[l][DST_W-1:0], e.flow, e.grp, e.multi);
      sb[l].push_back(e);
    end
    @(negedge clk);
    pkt_valid = 0;
  endtask

  // push all marked nodes of all trees, two per (group, tree, stage) per bubble
  task automatic flush(output int n_bub);
    int lv[$], ad[$], gq[$], tq[$];
    n_bub = 0;
    for (int q = 0; q < int'(K); q++) begin
      int l1[$], a1[$];
      ms[q].take_writes(l1, a1);
      foreach (l1[i]) begin lv.push_back(l1[i]); ad.push_back(a1[i]); gq.push_back(q); tq.push_back(0); end
      md[q].take_writes(l1, a1);
      foreach (l1[i]) begin lv.push_back(l1[i]); ad.push_back(a1[i]); gq.push_back(q); tq.push_back(1); end
    end
    while (lv.size() > 0) begin
      automatic int used[K][2][LEVELS];
      automatic int i = 0;
      foreach (used[a, b, c]) used[a][b][c] = 0;
      while (i < lv.size()) begin
        if (used[gq[i]][tq[i]][lv[i]] < 2) begin
          cfg_we = 1; cfg_group = GW'(gq[i]); cfg_tree = tq[i][0]; cfg_stage = SW'(lv[i]);
          cfg_entry = used[gq[i]][tq[i]][lv[i]][0]; cfg_addr = AW'(ad[i]); cfg_wen = 1;
          cfg_data = tq[i] ? md[gq[i]].img[lv[i]][ad[i]] : DST_NODE_W'(ms[gq[i]].img[lv[i]][ad[i]]);
          used[gq[i]][tq[i]][lv[i]]++;
          lv.delete(i); ad.delete(i); gq.delete(i); tq.delete(i);
          @(negedge clk);
          cfg_we = 0;
        end else i++;
      end
      bubble_req = 1;
      @(negedge clk);
      bubble_req = 0;
      n_bub++;
      while (!upd_done) @(negedge clk);
    end
  endtask

  function automatic dk_t rand_dk();
    dk_t r;
    for (int w = 0; w < 11; w++) r[w * 32 +: 32] = $urandom;
    return r;
  endfunction

  // a packet of flow f
  task automatic send_flow(input int unsigned f0, input int unsigned f1);
    sa_t s[2];
    dk_t d[2];
    int unsigned ff[2] = '{f0, f1};
    for (int l = 0; l < 2; l++) begin
      int q = grp_of[ff[l]];
      int i = ms[q].find_flow(ff[l]), j = md[q].find_flow(ff[l]);
      s[l] = ms[q].val[i] | (~sst_t::mask(ms[q].plen[i]) & SA_W'($urandom));
      d[l] = md[q].val[j] | (~dst_t::mask(md[q].plen[j]) & dk_t'({$urandom, $urandom}));
    end
    send(1, s[0], d[0], 1, s[1], d[1]);
  endtask

  // smallest h with 3**h - 1 >= n
  function automatic int height(int n);
    int h = 0, c = 0;
    while (c < n) begin h++; c = 3 * c + 2; end
    return h;
  endfunction

  // generate, load and test one table of nflow flows
  task automatic run_table(input int unsigned nflow);
    int unsigned ids[$];
    int unsigned base[$];
    int unsigned nshadow = nflow / 16;
    int h = 0, n_bub, hit0 = n_hit;
    for (int q = 0; q < int'(K); q++) begin ms[q] = new(); md[q] = new(); end
    grp_of.delete();
    for (int unsigned i = 0; i < nflow; i++) ids.push_back(i);
    ids.shuffle();
    while (base.size() < nflow - nshadow) begin
      automatic int q = base.size() % K;
      automatic int unsigned ps = $urandom_range(12, 32);
      automatic sa_t s = SA_W'($urandom) & sst_t::mask(ps);
      automatic int unsigned pd = EXACT_W + $urandom_range(8, 32);
      automatic dk_t d = rand_dk() & dst_t::mask(pd);
      automatic int unsigned f;
      if (ms[q].overlaps(s, ps) || md[q].overlaps(d, pd)) continue;
      f = ids.pop_front();
      ms[q].add(s, ps, f); md[q].add(d, pd, f); grp_of[f] = q;
      base.push_back(f);
    end
    for (int n = 0; n < int'(nshadow); ) begin
      automatic int unsigned x = base[$urandom_range(0, base.size() - 1)];
      automatic int qx = grp_of[x];
      automatic int q = (qx + 1) % K;
      automatic int ix = ms[qx].find_flow(x), jx = md[qx].find_flow(x);
      automatic int unsigned ps = (ms[qx].plen[ix] > 14) ? ms[qx].plen[ix] - 2 : ms[qx].plen[ix];
      automatic sa_t s = ms[qx].val[ix] & sst_t::mask(ps);
      automatic int unsigned f;
      if (ms[q].overlaps(s, ps) || md[q].overlaps(md[qx].val[jx], md[qx].plen[jx])) continue;
      f = ids.pop_front();
      ms[q].add(s, ps, f); md[q].add(md[qx].val[jx], md[qx].plen[jx], f); grp_of[f] = q;
      n++;
    end
    for (int q = 0; q < int'(K); q++) begin
      ms[q].build(); md[q].build();
      chk(!ms[q].overflow && !md[q].overflow, "trees fit in LEVELS stages");
      if (height(ms[q].val.size()) > h) h = height(ms[q].val.size());
      // rewrite every node, so that the previous table is gone
      for (int l = 0; l < int'(LEVELS); l++)
        foreach (ms[q].img[l][a]) begin ms[q].mark(l, a); md[q].mark(l, a); end
    end
    flush(n_bub);
    repeat (2) @(negedge clk);
    deepest = -1;
    for (int unsigned f = 0; f < nflow; f += 2) send_flow(f, f + 1);
    for (int i = 0; i < 100; i++) send(1, SA_W'($urandom), rand_dk(), 1, SA_W'($urandom), rand_dk());
    repeat (LEVELS + 4) @(negedge clk);
    chk(sb[0].size() == 0 && sb[1].size() == 0, "all results returned");
    chk(n_hit - hit0 >= int'(nflow), "every flow found");
    chk(deepest >= 0 && deepest <= h, $sformatf("deepest stage %0d, tree height %0d", deepest, h));
    $display("N=%0d: %0d bubbles to load, tree height %0d levels, deepest stage reached %0d, latency %0d clocks",
             nflow, n_bub, h, deepest, LEVELS + 2);
  endtask

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    pkt_valid = 0; pkt_hdr = '0; bubble_req = 0; cfg_we = 0; cfg_group = 0; cfg_tree = 0;
    cfg_stage = 0; cfg_entry = 0; cfg_addr = 0; cfg_data = 0; cfg_wen = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    run_table(1024);
    run_table(512);
    run_table(256);
    run_table(128);
    $display("hits=%0d misses=%0d multi=%0d", n_hit, n_miss, n_multi);
    chk(n_miss > 0, "miss seen");
    chk(n_multi > 0, "multi-group match seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
