// flow_group_pipeline: lookup pipeline for one group of disjoint flows.
//
// A group is searched by two RTST pipelines side by side: the source search
// tree (SST) holds the source-address prefixes of the group's flows, the
// destination search tree (DST) holds the rest of each flow, i.e. the
// destination-address prefix together with all exact-match fields. Both trees
// see the packet in the same cycle and have the same depth, so their results
// arrive together. A packet matches a flow of the group only when its source
// address matches in the SST, the rest of the header matches in the DST, and
// both searches end at entries of the same flow (same flow identifier).
//
// DST key layout (this design's choice): the exact-match fields occupy the
// upper bits and the destination address the lowest SA_W bits, so a flow's
// DST entry is one prefix of length (DST_W - SA_W) + DA prefix length.
//
// Timing: result registered here, LEVELS + 1 cycles after the packet enters.
// Updates: cfg_tree selects the tree whose write bubble table cfg_* fills;
// an SST node uses the low bits of cfg_data. in_bubble goes to both trees.
module flow_group_pipeline #(
  parameter int unsigned LEVELS  = 6,
  parameter int unsigned SA_W    = 32,
  parameter int unsigned DST_W   = 324,
  parameter int unsigned FLOW_W  = 10,
  localparam int unsigned SA_PLEN_W  = rtst_pkg::bits_for(SA_W),
  localparam int unsigned DST_PLEN_W = rtst_pkg::bits_for(DST_W),
  localparam int unsigned SA_NODE_W  = 2 * (1 + FLOW_W + SA_PLEN_W + SA_W),
  localparam int unsigned DST_NODE_W = 2 * (1 + FLOW_W + DST_PLEN_W + DST_W),
  localparam int unsigned AW = rtst_pkg::max2(rtst_pkg::bits_for(rtst_pkg::pow3(LEVELS-1) - 1), FLOW_W),
  localparam int unsigned SW = (LEVELS > 1) ? $clog2(LEVELS) : 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [1:0]            in_valid,
  input  logic [1:0][SA_W-1:0]  in_sa,
  input  logic [1:0][DST_W-1:0] in_dst,
  input  logic                  in_bubble,
  input  logic                  cfg_we,
  input  logic                  cfg_tree,    // 0: SST, 1: DST
  input  logic [SW-1:0]         cfg_stage,
  input  logic                  cfg_entry,
  input  logic [AW-1:0]         cfg_addr,
  input  logic [DST_NODE_W-1:0] cfg_data,
  input  logic                  cfg_wen,
  output logic [1:0]            out_valid,
  output logic [1:0]            out_hit,
  output logic [1:0][FLOW_W-1:0] out_flow,
  output logic                  out_bubble
);

  logic [1:0]             sst_valid, sst_hit, dst_valid, dst_hit;
  logic [1:0][FLOW_W-1:0] sst_flow, dst_flow;
  logic                   sst_bub, dst_bub;
  logic [LEVELS-1:0][1:0] sst_mem_rd, dst_mem_rd, sst_match_at, dst_match_at;

  rtst_pipeline #(.LEVELS (LEVELS), .KEY_W (SA_W), .PLEN_W (SA_PLEN_W), .FLOW_W (FLOW_W)) u_sst (
    .clk, .rst_n,
    .in_valid, .in_key (in_sa), .in_bubble,
    .cfg_we (cfg_we && !cfg_tree), .cfg_stage, .cfg_entry, .cfg_addr,
    .cfg_data (cfg_data[SA_NODE_W-1:0]), .cfg_wen,
    .out_valid (sst_valid), .out_hit (sst_hit), .out_flow (sst_flow), .out_bubble (sst_bub),
    .mem_rd (sst_mem_rd), .match_at (sst_match_at)
  );

  rtst_pipeline #(.LEVELS (LEVELS), .KEY_W (DST_W), .PLEN_W (DST_PLEN_W), .FLOW_W (FLOW_W)) u_dst (
    .clk, .rst_n,
    .in_valid, .in_key (in_dst), .in_bubble,
    .cfg_we (cfg_we && cfg_tree), .cfg_stage, .cfg_entry, .cfg_addr,
    .cfg_data, .cfg_wen,
    .out_valid (dst_valid), .out_hit (dst_hit), .out_flow (dst_flow), .out_bubble (dst_bub),
    .mem_rd (dst_mem_rd), .match_at (dst_match_at)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid  <= '0;
      out_hit    <= '0;
      out_flow   <= '0;
      out_bubble <= 1'b0;
    end else begin
      out_valid  <= sst_valid;
      out_bubble <= sst_bub;
      for (int l = 0; l < 2; l++) begin
        out_hit[l]  <= sst_valid[l] && sst_hit[l] && dst_hit[l] && (sst_flow[l] == dst_flow[l]);
        out_flow[l] <= sst_flow[l];
      end
    end
  end

  // both trees run in lock step
  assert property (@(posedge clk) disable iff (!rst_n) sst_valid == dst_valid && sst_bub == dst_bub)
    else $error("flow_group_pipeline: SST and DST out of step");

endmodule
