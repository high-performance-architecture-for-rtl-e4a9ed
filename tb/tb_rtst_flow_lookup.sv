// tb_rtst_flow_lookup: end-to-end test of the flow-lookup engine at its
// default size: K = 4 groups, 6-level trees, 356-bit headers, 1K flows.
//
// Flow table: 1024 flows with distinct identifiers (identifier = priority,
// lower wins). Each flow has a source-address prefix (/12../32) and a 324-bit
// rest: 292 exact-match bits and a destination-address prefix (/8../32). Flows
// are spread over the groups so that inside a group all source prefixes and
// all rests are disjoint. 64 of them are shadows of another flow in a
// different group (shorter source prefix, same rest), so that some packets
// match in two groups and the match selector has to choose.
//
// The reference model builds every group's two trees; the testbench loads
// them through write bubbles and then checks, against a linear scan of the
// whole table, the result of: one packet per flow, shadowed packets,
// cross packets (source of one flow, rest of another) and random packets,
// two per clock. Every result must arrive LEVELS+2 cycles after its packet.
// It then modifies, deletes and inserts flows with write bubbles while
// packets keep arriving, and checks each packet against the table as it was
// when the packet entered. The mechanisms are counted and each must occur:
// hits, misses, multi-group matches, searches finished before the last
// stage, searches finished in the last stage, bubbles (with their stalled
// input cycles), modifications, deletions, insertions into a deleted slot and
// insertions as a new leaf node, and clocks with two packets accepted.
module tb_rtst_flow_lookup;
  import rtst_tb_pkg::*;

  localparam int unsigned K = rtst_pkg::DEF_K_GROUPS, LEVELS = rtst_pkg::DEF_LEVELS;
  localparam int unsigned HDR_W = rtst_pkg::DEF_HDR_W, SA_W = rtst_pkg::DEF_SA_W;
  localparam int unsigned FLOW_W = rtst_pkg::DEF_FLOW_W, DST_W = HDR_W - SA_W;
  localparam int unsigned SA_PLEN_W = 6, DST_PLEN_W = 9;
  localparam int unsigned DST_NODE_W = 2 * (1 + FLOW_W + DST_PLEN_W + DST_W);
  localparam int unsigned AW = 10, SW = 3, GW = 2;
  localparam int unsigned NFLOW = 1024, NSHADOW = 64;
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

  // mechanism counters
  int n_hit = 0, n_miss = 0, n_multi = 0, n_early = 0, n_last = 0, n_bubble = 0, n_stall = 0;
  int n_mod = 0, n_del = 0, n_ins_reuse = 0, n_ins_leaf = 0, n_dual = 0;

  task automatic chk(input bit c, input string s);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL @%0d %s", cyc, s); end
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

  // where searches end (source tree of group 0) and stalled input cycles
  always @(negedge clk) if (rst_n) begin
    for (int s = 0; s < int'(LEVELS); s++) begin
      if (s < int'(LEVELS) - 1) n_early += $countones(dut.g_grp[0].u_grp.sst_match_at[s]);
      else n_last += $countones(dut.g_grp[0].u_grp.sst_match_at[s]);
    end
    if (!pkt_ready) n_stall++;
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
    if (v0 && v1) n_dual++;
    @(negedge clk);
    pkt_valid = 0;
  endtask

  // push all changed nodes of all trees, two per (group, tree, stage) per bubble
  task automatic flush();
    int lv[$], ad[$], gq[$], tq[$];
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
      #1 chk(!pkt_ready, "input stalled during bubble insertion");
      @(negedge clk);
      bubble_req = 0;
      n_bubble++;
      while (!upd_done) @(negedge clk);
    end
  endtask

  function automatic sa_t sa_in(int q, int i);
    return ms[q].val[i] | (~sst_t::mask(ms[q].plen[i]) & SA_W'($urandom));
  endfunction
  function automatic dk_t dk_in(int q, int unsigned f);
    int j = md[q].find_flow(f);
    dk_t r = dk_t'({$urandom, $urandom});
    return md[q].val[j] | (~dst_t::mask(md[q].plen[j]) & r);
  endfunction
  function automatic dk_t rand_dk();
    dk_t r;
    for (int w = 0; w < 11; w++) r[w * 32 +: 32] = $urandom;
    return r;
  endfunction

  // a packet of flow f (flow must exist and be valid)
  task automatic send_flow(input int unsigned f0, input int unsigned f1);
    int q0 = grp_of[f0], q1 = grp_of[f1];
    send(1, sa_in(q0, ms[q0].find_flow(f0)), dk_in(q0, f0), 1, sa_in(q1, ms[q1].find_flow(f1)), dk_in(q1, f1));
  endtask

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int unsigned ids[$];
    int unsigned base[$];
    int kind;
    for (int q = 0; q < int'(K); q++) begin ms[q] = new(); md[q] = new(); end
    pkt_valid = 0; pkt_hdr = '0; bubble_req = 0; cfg_we = 0; cfg_group = 0; cfg_tree = 0;
    cfg_stage = 0; cfg_entry = 0; cfg_addr = 0; cfg_data = 0; cfg_wen = 0;
    for (int unsigned i = 0; i < NFLOW; i++) ids.push_back(i);
    ids.shuffle();
    // base flows, round robin over the groups
    while (base.size() < NFLOW - NSHADOW) begin
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
    // shadows: shorter source prefix, same rest, next group
    for (int n = 0; n < int'(NSHADOW); ) begin
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
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    flush();
    $display("loaded %0d flows with %0d bubbles at cycle %0d", NFLOW, n_bubble, cyc);
    repeat (2) @(negedge clk);
    // one packet per flow, two per clock
    for (int unsigned f = 0; f < NFLOW; f += 2) send_flow(f, f + 1);
    // cross packets and random packets
    for (int i = 0; i < 300; i++) begin
      automatic int unsigned a = $urandom_range(0, NFLOW - 1), b = $urandom_range(0, NFLOW - 1);
      automatic int qa = grp_of[a], qb = grp_of[b];
      send(1, sa_in(qa, ms[qa].find_flow(a)), dk_in(qb, b), 1, SA_W'($urandom), rand_dk());
    end
    // modification: give a flow the identifier of another flow, which is
    // deleted first to free it (identifiers are the priorities, all in use)
    for (int r = 0; r < 8; r++) begin
      automatic int unsigned f = $urandom_range(0, NFLOW - 1);
      automatic int unsigned nf = f ^ 10'h200;
      automatic int q, qn;
      if (!grp_of.exists(f) || !grp_of.exists(nf)) continue;
      q = grp_of[f]; qn = grp_of[nf];
      if (!ms[q].valid[ms[q].find_flow(f)] || !ms[qn].valid[ms[qn].find_flow(nf)]) continue;
      ms[qn].remove(nf); md[qn].remove(nf);
      flush();
      n_del++;
      grp_of.delete(nf);
      ms[qn].flow[ms[qn].find_flow(nf)] = NFLOW + 1;  // retire the deleted entry's id in the model
      md[qn].flow[md[qn].find_flow(nf)] = NFLOW + 1;
      send(1, sa_in(q, ms[q].find_flow(f)), dk_in(q, f), 0, 0, 0);     // before the bubble: old id
      ms[q].modify(f, nf); md[q].modify(f, nf);
      grp_of[nf] = q; grp_of.delete(f);
      flush();
      n_mod++;
      send(1, sa_in(q, ms[q].find_flow(nf)), dk_in(q, nf), 0, 0, 0);   // after: new id
    end
    // deletion
    for (int r = 0; r < 12; r++) begin
      automatic int unsigned f = base[$urandom_range(0, base.size() - 1)];
      automatic int q;
      if (!grp_of.exists(f)) continue;
      q = grp_of[f];
      if (!ms[q].valid[ms[q].find_flow(f)]) continue;
      ms[q].remove(f); md[q].remove(f);
      flush();
      n_del++;
      send(1, sa_in(q, ms[q].find_flow(f)), dk_in(q, f), 1, SA_W'($urandom), rand_dk());
      // the identifier becomes free for later insertions
      ms[q].flow[ms[q].find_flow(f)] = NFLOW + 1;
      md[q].flow[md[q].find_flow(f)] = NFLOW + 1;
      grp_of.delete(f);
    end
    // insertion into a deleted slot: same source prefix and rest prefix, new flow
    for (int q = 0; q < int'(K); q++)
      for (int i = 0; i < ms[q].val.size(); i++) begin
        automatic int unsigned f = ms[q].flow[i];
        automatic int j = md[q].find_flow(f);
        automatic int unsigned nf;
        if (ms[q].valid[i] || f != NFLOW + 1 || n_ins_reuse >= 6) continue;
        j = -1;
        foreach (md[q].val[x]) if (!md[q].valid[x] && md[q].flow[x] == NFLOW + 1 && j < 0) j = x;
        if (j < 0) continue;
        nf = 0; while (grp_of.exists(nf)) nf++;
        if (nf >= NFLOW) continue;
        if (!ms[q].insert(ms[q].val[i], ms[q].plen[i], nf, kind)) continue;
        if (kind == 0) n_ins_reuse++;
        void'(md[q].insert(md[q].val[j], md[q].plen[j], nf, kind));
        ms[q].flow[i] = NFLOW + 2; md[q].flow[j] = NFLOW + 2;   // the old entry is gone
        grp_of[nf] = q;
        flush();
        send(1, sa_in(q, ms[q].find_flow(nf)), dk_in(q, nf), 0, 0, 0);
      end
    // insertion of brand-new flows as new leaves
    for (int r = 0, done = 0; r < 2000 && done < 8; r++) begin
      automatic int q = $urandom_range(0, K - 1);
      automatic int unsigned ps = $urandom_range(16, 32);
      automatic sa_t s = SA_W'($urandom) & sst_t::mask(ps);
      automatic int unsigned pd = EXACT_W + $urandom_range(8, 32);
      automatic dk_t d = rand_dk() & dst_t::mask(pd);
      automatic int unsigned nf;
      automatic int k1, k2;
      automatic sst_t ts;
      automatic dst_t td;
      if (ms[q].overlaps(s, ps) || md[q].overlaps(d, pd)) continue;
      nf = 0; while (grp_of.exists(nf)) nf++;
      if (nf >= NFLOW) break;
      // try on copies first so that a refused insertion leaves the trees as they are
      ts = new ms[q]; td = new md[q];
      foreach (ts.img[l]) ts.img[l] = new[ms[q].img[l].size()] (ms[q].img[l]);
      foreach (td.img[l]) td.img[l] = new[md[q].img[l].size()] (md[q].img[l]);
      if (!ts.insert(s, ps, nf, k1) || !td.insert(d, pd, nf, k2)) continue;
      send(1, {s | (~sst_t::mask(ps) & SA_W'($urandom))}, d, 0, 0, 0);  // before: miss
      void'(ms[q].insert(s, ps, nf, k1)); void'(md[q].insert(d, pd, nf, k2));
      if (k1 == 2 || k2 == 2) n_ins_leaf++;
      grp_of[nf] = q;
      flush();
      done++;
      send(1, {s | (~sst_t::mask(ps) & SA_W'($urandom))}, d, 1, SA_W'($urandom), rand_dk());
    end
    // final sweep over all flows still present
    begin
      int unsigned live[$];
      foreach (grp_of[f]) live.push_back(f);
      for (int i = 0; i + 1 < live.size(); i += 2) send_flow(live[i], live[i + 1]);
    end
    repeat (LEVELS + 4) @(negedge clk);
    chk(sb[0].size() == 0 && sb[1].size() == 0, "all results returned");
    $display("hits=%0d misses=%0d multi=%0d early=%0d last=%0d bubbles=%0d stall=%0d mod=%0d del=%0d ins_reuse=%0d ins_leaf=%0d dual=%0d",
             n_hit, n_miss, n_multi, n_early, n_last, n_bubble, n_stall, n_mod, n_del, n_ins_reuse, n_ins_leaf, n_dual);
    chk(n_hit > 0, "hit seen");
    chk(n_miss > 0, "miss seen");
    chk(n_multi > 0, "multi-group match seen");
    chk(n_early > 0, "search finished before the last stage");
    chk(n_last > 0, "search finished in the last stage");
    chk(n_bubble > 0 && n_stall > 0, "write bubbles and input stalls");
    chk(n_mod > 0, "modification");
    chk(n_del > 0, "deletion");
    chk(n_ins_reuse > 0, "insertion into a deleted slot");
    chk(n_ins_leaf > 0, "insertion as a new leaf");
    chk(n_dual > 0, "two packets per clock");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
