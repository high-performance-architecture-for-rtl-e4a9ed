// tb_rtst_pipeline: self-checking test of one dual-line RTST pipeline.
//
// A reference model builds a complete tree from random disjoint prefixes;
// the testbench loads the node image through the write bubble tables and
// bubbles, then streams two keys per clock and checks every result against a
// linear scan of the entries: hit, flow id, latency of LEVELS cycles, the
// level at which each hit finishes, and that stages after a hit issue no
// memory read. It then deletes, modifies and inserts entries with bubbles
// while lookups keep flowing, and checks that keys ahead of a bubble see the
// old table and keys behind it the new one.
module tb_rtst_pipeline;
  import rtst_tb_pkg::*;

  localparam int unsigned LEVELS = 4, KEY_W = 16, PLEN_W = 5, FLOW_W = 8;
  localparam int unsigned E_W = 1 + FLOW_W + PLEN_W + KEY_W, NODE_W = 2 * E_W;
  localparam int unsigned AW = 8, SW = 2;
  typedef rtst_tb_pkg::rtst_model #(KEY_W, PLEN_W, FLOW_W, LEVELS) model_t;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // a falling edge applies the asynchronous reset
  logic [1:0] in_valid, out_valid, out_hit;
  logic [1:0][KEY_W-1:0] in_key;
  logic in_bubble, out_bubble, cfg_we, cfg_entry, cfg_wen;
  logic [SW-1:0] cfg_stage;
  logic [AW-1:0] cfg_addr;
  logic [NODE_W-1:0] cfg_data;
  logic [1:0][FLOW_W-1:0] out_flow;
  logic [LEVELS-1:0][1:0] mem_rd, match_at;

  rtst_pipeline #(.LEVELS(LEVELS), .KEY_W(KEY_W), .PLEN_W(PLEN_W), .FLOW_W(FLOW_W)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  model_t m;

  // scoreboard: per line, expected results in order
  typedef struct { longint t; bit hit; int unsigned flow; int level; int seen; } exp_t;
  exp_t sb[2][$];
  longint reads = 0, exp_reads = 0;
  bit count_reads = 0;
  int n_hits = 0, n_miss = 0, n_bubbles = 0, n_both = 0;
  int hits_at[LEVELS];

  task automatic chk(input bit c, input string s);
    checks++;
    if (!c) begin failures++; if (failures < 15) $display("FAIL @%0d %s", cyc, s); end
  endtask

  // monitor
  always @(negedge clk) if (rst_n) begin
    if (count_reads) for (int s = 0; s < int'(LEVELS); s++) reads += $countones(mem_rd[s]);
    for (int l = 0; l < 2; l++) if (out_valid[l]) begin
      exp_t e;
      if (sb[l].size() == 0) begin chk(0, "unexpected output"); continue; end
      e = sb[l].pop_front();
      chk(cyc - e.t == LEVELS, $sformatf("latency %0d", cyc - e.t));
      chk(out_hit[l] == e.hit, $sformatf("line %0d hit %b expected %b", l, out_hit[l], e.hit));
      if (e.hit) begin
        chk(out_flow[l] == FLOW_W'(e.flow), $sformatf("flow %0d expected %0d", out_flow[l], e.flow));
        hits_at[e.level]++;
        chk(e.seen == e.level, $sformatf("hit in stage %0d expected %0d", e.seen, e.level));
      end
      if (e.hit) n_hits++; else n_miss++;
    end
  end

  // the stage in which each line's search finished (match_at), per packet in flight
  always @(negedge clk) if (rst_n)
    for (int l = 0; l < 2; l++)
      foreach (sb[l][i]) begin
        automatic longint s = cyc - sb[l][i].t - 1;
        if (s >= 0 && s < LEVELS && match_at[s][l]) sb[l][i].seen = int'(s);
      end

  task automatic send(input bit v0, input logic [KEY_W-1:0] k0, input bit v1, input logic [KEY_W-1:0] k1);
    exp_t e;
    int unsigned f;
    in_valid = {v1, v0}; in_key = {k1, k0}; in_bubble = 0;
    for (int l = 0; l < 2; l++) if (in_valid[l]) begin
      e.t = cyc; e.hit = m.lookup(in_key[l], f); e.flow = f;
      e.level = e.hit ? m.lvl_of[f] : -1;
      e.seen = -1;
      sb[l].push_back(e);
      if (e.hit) exp_reads += e.level + 1;
    end
    if (v0 && v1) n_both++;
    @(negedge clk);
    in_valid = 0;
  endtask

  // push the model's changed nodes into the tables, two per stage per bubble
  task automatic flush();
    int lv[$], ad[$];
    m.take_writes(lv, ad);
    while (lv.size() > 0) begin
      automatic int used[LEVELS];
      automatic int i = 0;
      foreach (used[s]) used[s] = 0;
      while (i < lv.size()) begin
        if (used[lv[i]] < 2) begin
          cfg_we = 1; cfg_stage = SW'(lv[i]); cfg_entry = used[lv[i]][0];
          cfg_addr = AW'(ad[i]); cfg_data = m.img[lv[i]][ad[i]]; cfg_wen = 1;
          used[lv[i]]++;
          lv.delete(i); ad.delete(i);
          @(negedge clk);
          cfg_we = 0;
        end else i++;
      end
      in_bubble = 1; in_valid = 0;
      @(negedge clk);
      in_bubble = 0;
      n_bubbles++;
      // the tables may be reloaded once the bubble has left the last stage
      while (!out_bubble) @(negedge clk);
    end
  endtask

  function automatic logic [KEY_W-1:0] key_of(int i);
    logic [KEY_W-1:0] k = m.val[i] | (~model_t::mask(m.plen[i]) & KEY_W'($urandom));
    return k;
  endfunction

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int kind, nf;
    logic [KEY_W-1:0] k;
    m = new();
    in_valid = 0; in_key = 0; in_bubble = 0; cfg_we = 0; cfg_entry = 0; cfg_wen = 0;
    cfg_stage = 0; cfg_addr = 0; cfg_data = 0;
    foreach (hits_at[s]) hits_at[s] = 0;
    // 70 random disjoint prefixes (lengths 8..16)
    while (m.val.size() < 70) begin
      automatic int unsigned pl = $urandom_range(8, 16);
      automatic logic [KEY_W-1:0] v = KEY_W'($urandom) & model_t::mask(pl);
      if (!m.overlaps(v, pl)) m.add(v, pl, m.val.size());
    end
    m.build();
    chk(!m.overflow, "tree fits");
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    flush();
    repeat (LEVELS + 1) @(negedge clk);
    // every entry, two per clock, hits only: count memory reads
    count_reads = 1;
    for (int i = 0; i < m.val.size(); i += 2)
      send(1, key_of(i), i + 1 < m.val.size(), key_of((i + 1) % m.val.size()));
    repeat (LEVELS + 2) @(negedge clk);
    count_reads = 0;
    chk(reads == exp_reads, $sformatf("memory reads %0d expected %0d (reads stop after a hit)", reads, exp_reads));
    // random keys, mostly misses
    for (int i = 0; i < 400; i++) send($urandom_range(0, 3) != 0, KEY_W'($urandom), $urandom_range(0, 3) != 0, KEY_W'($urandom));
    repeat (LEVELS + 1) @(negedge clk);
    // deletion of 10 flows while traffic of those keys is running
    for (int r = 0; r < 10; r++) begin
      automatic int i = $urandom_range(0, m.val.size() - 1);
      k = key_of(i);
      send(1, k, 1, k);
      m.remove(m.flow[i]);
      // key before the bubble was predicted hit, after it miss
      flush();
      send(1, k, 1, key_of($urandom_range(0, m.val.size() - 1)));
    end
    // modification: new flow ids
    for (int r = 0; r < 10; r++) begin
      automatic int i = $urandom_range(0, m.val.size() - 1);
      if (!m.valid[i]) continue;
      m.modify(m.flow[i], 100 + r);
      flush();
      send(1, key_of(i), 0, 0);
    end
    // insertion of new prefixes
    nf = 0;
    for (int r = 0; r < 400 && nf < 25; r++) begin
      automatic int unsigned pl = $urandom_range(8, 16);
      automatic logic [KEY_W-1:0] v = KEY_W'($urandom) & model_t::mask(pl);
      if (m.overlaps(v, pl)) begin
        // a deleted prefix may be reused by a flow inside its range
        automatic int j = -1;
        foreach (m.val[q]) if (!m.valid[q] && model_t::contains(m.val[q], m.plen[q], v)) j = q;
        if (j < 0 || pl < m.plen[j]) continue;
      end
      if (m.insert(v, pl, 150 + nf, kind)) begin
        nf++;
        flush();
        send(1, v | (~model_t::mask(pl) & KEY_W'($urandom)), 1, KEY_W'($urandom));
      end
    end
    chk(nf > 5, "insertions done");
    for (int i = 0; i < m.val.size(); i += 2)
      send(1, key_of(i), 1, key_of((i + 1) % m.val.size()));
    repeat (LEVELS + 2) @(negedge clk);
    chk(sb[0].size() == 0 && sb[1].size() == 0, "all results returned");
    chk(n_both > 50, "two keys per clock");
    $display("hits=%0d misses=%0d bubbles=%0d inserts=%0d hits per level: %0d %0d %0d %0d",
             n_hits, n_miss, n_bubbles, nf, hits_at[0], hits_at[1], hits_at[2], hits_at[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
