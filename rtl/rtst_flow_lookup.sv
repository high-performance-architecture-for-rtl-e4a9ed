// rtst_flow_lookup: multi-pipeline flow-table lookup engine (top level).
//
// The flow table is split into K groups of mutually disjoint flows; each group
// is stored as a pair of range-based ternary search trees and searched by its
// own pipeline (flow_group_pipeline). Every packet header is handed to all K
// pipelines at once; the match selector then keeps the highest-priority hit.
// Each pipeline has two lines, so two headers are looked up per clock.
//
// Header layout (this design's choice): pkt_hdr[HDR_W-1 -: SA_W] is the
// source address, searched in the source search tree; the remaining bits,
// exact-match fields above and the destination address in the lowest SA_W
// bits, form the key of the destination search tree.
//
// Timing: a header accepted at a clock edge (pkt_valid && pkt_ready) yields
// res_* LEVELS + 2 cycles later: LEVELS tree stages, the group result
// register and the selector register. Lines 0 and 1 keep their order.
//
// Updates (modification, deletion by clearing a valid bit, insertion) are
// prepared by the control plane as node writes: it loads the write bubble
// tables through cfg_* (group, tree, stage, entry 0/1, node address, node
// content, write enable) and then raises bubble_req for one cycle. That cycle
// no header is accepted (pkt_ready=0); the bubble walks down all pipelines and
// writes the tables into the stage memories, so lookups before it see the old
// table and lookups after it the new one. upd_done pulses when the bubble
// has left the last stage.
module rtst_flow_lookup #(
  parameter int unsigned K_GROUPS = rtst_pkg::DEF_K_GROUPS,
  parameter int unsigned LEVELS   = rtst_pkg::DEF_LEVELS,
  parameter int unsigned HDR_W    = rtst_pkg::DEF_HDR_W,
  parameter int unsigned SA_W     = rtst_pkg::DEF_SA_W,
  parameter int unsigned FLOW_W   = rtst_pkg::DEF_FLOW_W,
  localparam int unsigned DST_W      = HDR_W - SA_W,
  localparam int unsigned DST_PLEN_W = rtst_pkg::bits_for(DST_W),
  localparam int unsigned DST_NODE_W = 2 * (1 + FLOW_W + DST_PLEN_W + DST_W),
  localparam int unsigned AW = rtst_pkg::max2(rtst_pkg::bits_for(rtst_pkg::pow3(LEVELS-1) - 1), FLOW_W),
  localparam int unsigned SW = (LEVELS > 1) ? $clog2(LEVELS) : 1,
  localparam int unsigned GW = (K_GROUPS > 1) ? $clog2(K_GROUPS) : 1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // packet headers, two per clock
  input  logic [1:0]             pkt_valid,
  input  logic [1:0][HDR_W-1:0]  pkt_hdr,
  output logic                   pkt_ready,
  // write bubble tables and bubble insertion
  input  logic                   cfg_we,
  input  logic [GW-1:0]          cfg_group,
  input  logic                   cfg_tree,   // 0: SST, 1: DST
  input  logic [SW-1:0]          cfg_stage,
  input  logic                   cfg_entry,
  input  logic [AW-1:0]          cfg_addr,
  input  logic [DST_NODE_W-1:0]  cfg_data,
  input  logic                   cfg_wen,
  input  logic                   bubble_req,
  output logic                   upd_done,
  // flow match
  output logic [1:0]             res_valid,
  output logic [1:0]             res_hit,
  output logic [1:0][FLOW_W-1:0] res_flow,
  output logic [1:0][GW-1:0]     res_group,
  output logic [1:0]             res_multi
);

  logic [1:0]             in_valid;
  logic [1:0][SA_W-1:0]   in_sa;
  logic [1:0][DST_W-1:0]  in_dst;

  assign pkt_ready = !bubble_req;
  assign in_valid  = pkt_valid & {2{!bubble_req}};
  for (genvar l = 0; l < 2; l++) begin : g_split
    assign in_sa[l]  = pkt_hdr[l][HDR_W-1 -: SA_W];
    assign in_dst[l] = pkt_hdr[l][DST_W-1:0];
  end

  logic [K_GROUPS-1:0][1:0]             g_valid, g_hit;
  logic [K_GROUPS-1:0][1:0][FLOW_W-1:0] g_flow;
  logic [K_GROUPS-1:0]                  g_bub;

  for (genvar g = 0; g < int'(K_GROUPS); g++) begin : g_grp
    flow_group_pipeline #(
      .LEVELS (LEVELS), .SA_W (SA_W), .DST_W (DST_W), .FLOW_W (FLOW_W)
    ) u_grp (
      .clk, .rst_n,
      .in_valid, .in_sa, .in_dst, .in_bubble (bubble_req),
      .cfg_we (cfg_we && 32'(cfg_group) == g), .cfg_tree, .cfg_stage, .cfg_entry,
      .cfg_addr, .cfg_data, .cfg_wen,
      .out_valid (g_valid[g]), .out_hit (g_hit[g]), .out_flow (g_flow[g]),
      .out_bubble (g_bub[g])
    );
  end

  match_selector #(.K (K_GROUPS), .FLOW_W (FLOW_W)) u_sel (
    .clk, .rst_n,
    .in_valid (g_valid[0]), .grp_hit (g_hit), .grp_flow (g_flow),
    .out_valid (res_valid), .out_hit (res_hit), .out_flow (res_flow),
    .out_group (res_group), .out_multi (res_multi)
  );

  assign upd_done = g_bub[0];

endmodule
