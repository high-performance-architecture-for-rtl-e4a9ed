// rtst_pipeline: dual-line pipeline that searches one range-based ternary
// search tree (RTST).
//
// Tree level i is mapped to stage i, so LEVELS stages search a tree of up to
// 3**LEVELS - 1 data fields (two per node). Every search starts at the root
// (address 0 of stage 0); each stage reads one node and moves the search to the
// left, middle or right child at 3*A, 3*A+1 or 3*A+2 of the next stage
// (pointer-free layout). When a key falls inside a node's range the search is
// marked ready, later stages skip their memory reads and forward the result.
// Two independent lines share every dual-port memory, so two keys enter and
// two results leave per clock.
//
// Timing: a key presented with in_valid at clock edge t gives its result on
// out_* in the cycle after edge t+LEVELS-1, i.e. LEVELS cycles later,
// combinationally from the last stage (the next block registers it).
// Updates: cfg_* fills the write bubble table of stage cfg_stage; in_bubble
// inserts a write bubble (no packet may be presented in that cycle), which
// writes the tables into the memories stage by stage and leaves as out_bubble.
//
// Design choices: result is a flow identifier (FLOW_W bits) carried on the
// address bus after a match; a search that ends without a match reports
// hit=0.
module rtst_pipeline #(
  parameter int unsigned LEVELS = 6,
  parameter int unsigned KEY_W  = 32,
  parameter int unsigned PLEN_W = 6,
  parameter int unsigned FLOW_W = 10,
  localparam int unsigned E_W    = 1 + FLOW_W + PLEN_W + KEY_W,
  localparam int unsigned NODE_W = 2 * E_W,
  // address bus: node address of the deepest level, or a flow identifier
  localparam int unsigned AW = rtst_pkg::max2(rtst_pkg::bits_for(rtst_pkg::pow3(LEVELS-1) - 1), FLOW_W),
  localparam int unsigned SW = (LEVELS > 1) ? $clog2(LEVELS) : 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [1:0]            in_valid,
  input  logic [1:0][KEY_W-1:0] in_key,
  input  logic                  in_bubble,
  input  logic                  cfg_we,
  input  logic [SW-1:0]         cfg_stage,
  input  logic                  cfg_entry,
  input  logic [AW-1:0]         cfg_addr,
  input  logic [NODE_W-1:0]     cfg_data,
  input  logic                  cfg_wen,
  output logic [1:0]            out_valid,
  output logic [1:0]            out_hit,
  output logic [1:0][FLOW_W-1:0] out_flow,
  output logic                  out_bubble,
  output logic [LEVELS-1:0][1:0] mem_rd,    // memory reads issued per stage and line
  output logic [LEVELS-1:0][1:0] match_at   // line's search finished in this stage
);

  logic [LEVELS:0][1:0]            s_valid, s_ready, s_hit;
  logic [LEVELS:0][1:0][KEY_W-1:0] s_key;
  logic [LEVELS:0][1:0][AW-1:0]    s_addr;
  logic [LEVELS:0]                 s_bub;

  // the root is address 0 of stage 0
  assign s_valid[0] = in_valid;
  assign s_key[0]   = in_key;
  assign s_addr[0]  = '0;
  assign s_ready[0] = '0;
  assign s_hit[0]   = '0;
  assign s_bub[0]   = in_bubble;

  for (genvar g = 0; g < int'(LEVELS); g++) begin : g_stage
    rtst_stage #(
      .LEVEL (g), .KEY_W (KEY_W), .PLEN_W (PLEN_W), .FLOW_W (FLOW_W), .AW (AW)
    ) u_stage (
      .clk, .rst_n,
      .in_valid (s_valid[g]), .in_key (s_key[g]), .in_addr (s_addr[g]),
      .in_ready (s_ready[g]), .in_hit (s_hit[g]), .in_bubble (s_bub[g]),
      .cfg_we (cfg_we && 32'(cfg_stage) == g), .cfg_entry, .cfg_addr, .cfg_data, .cfg_wen,
      .out_valid (s_valid[g+1]), .out_key (s_key[g+1]), .out_addr (s_addr[g+1]),
      .out_ready (s_ready[g+1]), .out_hit (s_hit[g+1]), .out_bubble (s_bub[g+1]),
      .out_sel (), .mem_rd (mem_rd[g]), .done_here (match_at[g])
    );
  end

  assign out_valid  = s_valid[LEVELS];
  assign out_hit    = s_hit[LEVELS] & s_ready[LEVELS];
  assign out_bubble = s_bub[LEVELS];
  assign out_flow[0] = FLOW_W'(s_addr[LEVELS][0]);
  assign out_flow[1] = FLOW_W'(s_addr[LEVELS][1]);

endmodule
