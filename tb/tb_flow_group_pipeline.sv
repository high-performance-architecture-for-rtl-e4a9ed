// tb_flow_group_pipeline: self-checking test of one group pipeline (SST+DST).
//
// 60 flows, each a source prefix and a destination key (16 exact bits above a
// destination-address prefix), are built into the two trees by the reference
// model and loaded with write bubbles. Packets are made from a flow's
// source and destination ranges (must hit that flow), from the source of one
// flow and the destination of another (must miss: the two searches end at
// different flows), and at random; expected results come from a linear scan
// over the flows. Latency must be LEVELS+1 cycles. A deletion through both
// trees must turn the flow's packets into misses.
module tb_flow_group_pipeline;
  import rtst_tb_pkg::*;

  localparam int unsigned LEVELS = 4, SA_W = 32, DST_W = 48, FLOW_W = 8;
  localparam int unsigned SA_PLEN_W = 6, DST_PLEN_W = 6;
  localparam int unsigned DST_NODE_W = 2 * (1 + FLOW_W + DST_PLEN_W + DST_W);
  localparam int unsigned AW = 8, SW = 2;
  localparam int unsigned NFLOW = 60;
  typedef rtst_tb_pkg::rtst_model #(SA_W, SA_PLEN_W, FLOW_W, LEVELS) sst_t;
  typedef rtst_tb_pkg::rtst_model #(DST_W, DST_PLEN_W, FLOW_W, LEVELS) dst_t;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // a falling edge applies the asynchronous reset
  logic [1:0] in_valid, out_valid, out_hit;
  logic [1:0][SA_W-1:0] in_sa;
  logic [1:0][DST_W-1:0] in_dst;
  logic in_bubble, out_bubble, cfg_we, cfg_tree, cfg_entry, cfg_wen;
  logic [SW-1:0] cfg_stage;
  logic [AW-1:0] cfg_addr;
  logic [DST_NODE_W-1:0] cfg_data;
  logic [1:0][FLOW_W-1:0] out_flow;

  flow_group_pipeline #(.LEVELS(LEVELS), .SA_W(SA_W), .DST_W(DST_W), .FLOW_W(FLOW_W)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  sst_t ms;
  dst_t md;

  typedef struct { longint t; bit hit; int unsigned flow; } exp_t;
  exp_t sb[2][$];
  int n_hit = 0, n_miss = 0, n_cross = 0;

  task automatic chk(input bit c, input string s);
    checks++;
    if (!c) begin failures++; if (failures < 15) $display("FAIL @%0d %s", cyc, s); end
  endtask

  always @(negedge clk) if (rst_n)
    for (int l = 0; l < 2; l++) if (out_valid[l]) begin
      exp_t e;
      if (sb[l].size() == 0) begin chk(0, "unexpected output"); continue; end
      e = sb[l].pop_front();
      chk(cyc - e.t == LEVELS + 1, $sformatf("latency %0d", cyc - e.t));
      chk(out_hit[l] == e.hit, $sformatf("line %0d hit %b expected %b", l, out_hit[l], e.hit));
      if (e.hit) chk(out_flow[l] == FLOW_W'(e.flow), $sformatf("flow %0d expected %0d", out_flow[l], e.flow));
      if (e.hit) n_hit++; else n_miss++;
    end

  // expected result: a flow whose source and destination both contain the packet
  function automatic bit ref_match(input logic [SA_W-1:0] sa, input logic [DST_W-1:0] da,
                                   output int unsigned f);
    f = 0;
    foreach (ms.val[i])
      if (ms.valid[i] && sst_t::contains(ms.val[i], ms.plen[i], sa)) begin
        int j = md.find_flow(ms.flow[i]);
        if (md.valid[j] && dst_t::contains(md.val[j], md.plen[j], da)) begin f = ms.flow[i]; return 1; end
      end
    return 0;
  endfunction

  task automatic send(input bit v0, input logic [SA_W-1:0] s0, input logic [DST_W-1:0] d0,
                      input bit v1, input logic [SA_W-1:0] s1, input logic [DST_W-1:0] d1);
    exp_t e;
    int unsigned f;
    in_valid = {v1, v0}; in_sa = {s1, s0}; in_dst = {d1, d0};
    for (int l = 0; l < 2; l++) if (in_valid[l]) begin
      e.t = cyc; e.hit = ref_match(in_sa[l], in_dst[l], f); e.flow = f;
      sb[l].push_back(e);
    end
    @(negedge clk);
    in_valid = 0;
  endtask

  task automatic push_tree(input bit tree);
    int lv[$], ad[$];
    if (tree) md.take_writes(lv, ad); else ms.take_writes(lv, ad);
    while (lv.size() > 0) begin
      automatic int used[LEVELS];
      automatic int i = 0;
      foreach (used[s]) used[s] = 0;
      while (i < lv.size()) begin
        if (used[lv[i]] < 2) begin
          cfg_we = 1; cfg_tree = tree; cfg_stage = SW'(lv[i]); cfg_entry = used[lv[i]][0];
          cfg_addr = AW'(ad[i]); cfg_wen = 1;
          cfg_data = tree ? md.img[lv[i]][ad[i]] : DST_NODE_W'(ms.img[lv[i]][ad[i]]);
          used[lv[i]]++;
          lv.delete(i); ad.delete(i);
          @(negedge clk);
          cfg_we = 0;
        end else i++;
      end
      in_bubble = 1;
      @(negedge clk);
      in_bubble = 0;
      while (!out_bubble) @(negedge clk);
    end
  endtask

  function automatic logic [SA_W-1:0] sa_of(int i);
    return ms.val[i] | (~sst_t::mask(ms.plen[i]) & SA_W'($urandom));
  endfunction
  function automatic logic [DST_W-1:0] dst_of(int unsigned f);
    int j = md.find_flow(f);
    return md.val[j] | (~dst_t::mask(md.plen[j]) & {$urandom, $urandom});
  endfunction

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ms = new(); md = new();
    in_valid = 0; in_sa = 0; in_dst = 0; in_bubble = 0; cfg_we = 0; cfg_tree = 0;
    cfg_entry = 0; cfg_wen = 0; cfg_stage = 0; cfg_addr = 0; cfg_data = 0;
    while (ms.val.size() < NFLOW) begin
      automatic int unsigned ps = $urandom_range(12, 32);
      automatic logic [SA_W-1:0] s = SA_W'($urandom) & sst_t::mask(ps);
      automatic int unsigned pd = 16 + $urandom_range(8, 32);
      automatic logic [DST_W-1:0] d = {$urandom, $urandom};
      d = d & dst_t::mask(pd);
      if (ms.overlaps(s, ps) || md.overlaps(d, pd)) continue;
      ms.add(s, ps, ms.val.size());
      md.add(d, pd, md.val.size());
    end
    ms.build(); md.build();
    chk(!ms.overflow && !md.overflow, "trees fit");
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    push_tree(0); push_tree(1);
    // every flow (hit), two per clock
    for (int i = 0; i < int'(NFLOW); i += 2)
      send(1, sa_of(i), dst_of(ms.flow[i]), 1, sa_of(i + 1), dst_of(ms.flow[i + 1]));
    // source of one flow, destination of another: miss
    for (int i = 0; i < int'(NFLOW); i++) begin
      send(1, sa_of(i), dst_of(ms.flow[(i + 7) % NFLOW]), 0, 0, 0);
      n_cross++;
    end
    // random packets
    for (int i = 0; i < 200; i++) send(1, SA_W'($urandom), {$urandom, $urandom}, 1, SA_W'($urandom), {$urandom, $urandom});
    // delete five flows in both trees
    for (int r = 0; r < 5; r++) begin
      ms.remove(ms.flow[r * 11]); md.remove(ms.flow[r * 11]);
    end
    push_tree(0); push_tree(1);
    for (int i = 0; i < int'(NFLOW); i += 2)
      send(1, sa_of(i), dst_of(ms.flow[i]), 1, sa_of(i + 1), dst_of(ms.flow[i + 1]));
    repeat (LEVELS + 3) @(negedge clk);
    chk(sb[0].size() == 0 && sb[1].size() == 0, "all results returned");
    chk(n_hit > int'(NFLOW), "hits seen");
    $display("hits=%0d misses=%0d cross=%0d", n_hit, n_miss, n_cross);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
