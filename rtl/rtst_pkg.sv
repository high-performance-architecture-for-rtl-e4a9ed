// rtst_pkg: constants, encodings and helper functions shared by the RTST
// (range-based ternary search tree) flow-lookup pipeline.
//
// Default sizes follow the evaluated configuration: a 15-field, 356-bit
// OpenFlow match header and a table of 1K flows. The split of the header into
// a 32-bit source address (searched in the source search tree, SST) and the
// remaining 324 bits (searched in the destination search tree, DST), the
// number of groups and the tree height are this design's choices.
//
// Node entry layout (one "data field" of a tree node), LSB first:
//   [KEY_W-1:0]                  key value (prefix bits, left aligned)
//   [KEY_W +: PLEN_W]            prefix length; KEY_W means an exact match
//   [KEY_W+PLEN_W +: FLOW_W]     flow identifier returned on a match
//   [KEY_W+PLEN_W+FLOW_W]        valid bit (0: deleted / empty)
// A node is {right entry, left entry}, left entry in the low half.
package rtst_pkg;

  localparam int unsigned DEF_HDR_W    = 356; // d = 15 fields, L = 356 bits
  localparam int unsigned DEF_SA_W     = 32;  // IPv4 source address
  localparam int unsigned DEF_N_FLOWS  = 1024;
  localparam int unsigned DEF_K_GROUPS = 4;
  localparam int unsigned DEF_LEVELS   = 6;   // ceil(log3(2*N/K + 1)) for N/K = 256
  localparam int unsigned DEF_FLOW_W   = 10;  // log2(N_FLOWS)

  // Select of the 4:1 next-address multiplexer (inputs in figure order).
  typedef enum logic [1:0] {
    SEL_LEFT  = 2'd0,  // 3*A      : key below the left data
    SEL_MID   = 2'd1,  // 3*A + 1  : key between left and right data
    SEL_RIGHT = 2'd2,  // 3*A + 2  : key above the right data
    SEL_HOP   = 2'd3   // Next_hop : search finished, forward the result
  } nxt_sel_e;

  // 3**e
  function automatic int unsigned pow3(input int unsigned e);
    int unsigned r;
    r = 1;
    for (int unsigned i = 0; i < e; i++) r = r * 3;
    return r;
  endfunction

  // Bits needed to count 0..n
  function automatic int unsigned bits_for(input int unsigned n);
    int unsigned b;
    b = 1;
    while ((1 << b) <= n) b++;
    return b;
  endfunction

  function automatic int unsigned max2(input int unsigned a, input int unsigned b);
    return (a > b) ? a : b;
  endfunction

endpackage
