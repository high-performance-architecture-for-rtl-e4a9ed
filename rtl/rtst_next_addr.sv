// rtst_next_addr: next address generator of one pipeline line (combinational).
//
// Two comparators hold the lane's key against the left and the right data of
// the node the stage memory has just returned. Each data field is a prefix, so
// it stands for the key range [value & mask, value | ~mask]; an exact field is
// a prefix of full length. The comparator outputs form the four priority
// encoder inputs of the paper's next address generator:
//   1: key below the left range            -> next address 3*A      (left child)
//   2: key above left and below right range -> next address 3*A + 1  (middle child)
//   3: key above the right range           -> next address 3*A + 2  (right child)
//   4: key inside the left or right range  -> ready; the address bus then
//                                             carries the Next_hop (flow id)
// The three child addresses are formed from A in parallel with the memory
// read, so the compare result only drives the 4:1 multiplexer select.
// Once ready is set, later stages forward the bus unchanged (SEL_HOP).
//
// Design choices beyond the paper: a match needs the entry's valid bit; a key
// inside the range of an invalid (deleted) entry ends the search without a hit
// (ready=1, hit=0), because the tree's ranges are disjoint and no descendant
// can contain it. The Next_hop value is the matched entry's flow identifier.
//
// Interface: key, node {right,left}, current node address A and the incoming
// ready/hit/bus state in; next bus value, ready, hit and the mux select out.
module rtst_next_addr
  import rtst_pkg::nxt_sel_e, rtst_pkg::SEL_LEFT, rtst_pkg::SEL_MID,
         rtst_pkg::SEL_RIGHT, rtst_pkg::SEL_HOP;
#(
  parameter int unsigned KEY_W  = 32,
  parameter int unsigned PLEN_W = 6,
  parameter int unsigned FLOW_W = 10,
  parameter int unsigned AW     = 10,
  localparam int unsigned E_W   = 1 + FLOW_W + PLEN_W + KEY_W
) (
  input  logic [KEY_W-1:0] key,
  input  logic [2*E_W-1:0] node,
  input  logic [AW-1:0]    addr_in,   // A (node address) or forwarded result
  input  logic             ready_in,
  input  logic             hit_in,
  output logic [AW-1:0]    addr_out,
  output logic             ready_out,
  output logic             hit_out,
  output nxt_sel_e         sel
);

  typedef struct packed {
    logic              valid;
    logic [FLOW_W-1:0] flow;
    logic [PLEN_W-1:0] plen;
    logic [KEY_W-1:0]  value;
  } entry_t;

  entry_t ent_l, ent_r;
  assign ent_l = entry_t'(node[E_W-1:0]);
  assign ent_r = entry_t'(node[2*E_W-1:E_W]);

  function automatic logic [KEY_W-1:0] pmask(input logic [PLEN_W-1:0] plen);
    logic [KEY_W-1:0] m;
    for (int unsigned b = 0; b < KEY_W; b++)
      m[b] = (32'(plen) >= (KEY_W - b));
    return m;
  endfunction

  logic [KEY_W-1:0] lo_l, hi_l, lo_r, hi_r;
  logic lt_l, in_l, gt_l, lt_r, in_r, gt_r;
  logic enc1, enc2, enc3, enc4;
  logic match_l, match_r;
  logic [AW-1:0] three_a, next_hop;

  always_comb begin
    lo_l = ent_l.value & pmask(ent_l.plen);
    hi_l = ent_l.value | ~pmask(ent_l.plen);
    lo_r = ent_r.value & pmask(ent_r.plen);
    hi_r = ent_r.value | ~pmask(ent_r.plen);
    // comparators
    lt_l = key < lo_l;
    gt_l = key > hi_l;
    in_l = !lt_l && !gt_l;
    lt_r = key < lo_r;
    gt_r = key > hi_r;
    in_r = !lt_r && !gt_r;
    // priority encoder inputs
    enc1 = lt_l;
    enc2 = gt_l && lt_r;
    enc3 = gt_r;
    enc4 = in_l || in_r;
    match_l = in_l && ent_l.valid;
    match_r = in_r && ent_r.valid;
  end

  // priority encoder: a finished search, then a match, then the three children
  always_comb begin
    if (ready_in || enc4) sel = SEL_HOP;
    else if (enc1)        sel = SEL_LEFT;
    else if (enc2)        sel = SEL_MID;
    else if (enc3)        sel = SEL_RIGHT;
    else                  sel = SEL_HOP;    // unreachable for an ordered node
  end

  always_comb begin
    three_a = AW'(addr_in * 3);
    if (ready_in)     next_hop = addr_in;
    else if (match_l) next_hop = AW'(ent_l.flow);
    else if (match_r) next_hop = AW'(ent_r.flow);
    else              next_hop = '0;
    unique case (sel)
      SEL_LEFT:  addr_out = three_a;
      SEL_MID:   addr_out = three_a + AW'(1);
      SEL_RIGHT: addr_out = three_a + AW'(2);
      default:   addr_out = next_hop;
    endcase
    ready_out = ready_in || enc4;
    hit_out   = ready_in ? hit_in : (match_l || match_r);
  end

endmodule
