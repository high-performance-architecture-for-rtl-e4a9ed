// rtst_stage_mem: dual-port node memory of one pipeline stage.
//
// Each stage of the RTST pipeline owns the nodes of one tree level, stored
// contiguously: node j of level i sits at address j, so the children of the
// node at address A are at 3*A, 3*A+1 and 3*A+2 of the next stage's memory
// and no child pointers are stored. Both ports are independent read/write
// ports, so two searches (the two pipeline lines) or two write-bubble updates
// are served per clock, as the paper's dual-port memory block does.
//
// Timing: synchronous write and synchronous read with a one-cycle latency
// (block-RAM style, no output register). A port with en=0 keeps its last read
// data; the pipeline uses this to switch memory access off after a match.
// A port that writes does not read. An address at or above DEPTH reads as
// zero (an empty node) and is never written.
//
// Design choices: the contents start at zero (all entries invalid), as an
// FPGA block-RAM initial value. Two writes to one address in the same cycle
// are a usage error and are flagged by an assertion.
module rtst_stage_mem #(
  parameter int unsigned DEPTH = 243,
  parameter int unsigned DW    = 98,
  parameter int unsigned AW    = 10
) (
  input  logic          clk,
  // port A
  input  logic          en_a,
  input  logic          we_a,
  input  logic [AW-1:0] addr_a,
  input  logic [DW-1:0] wdata_a,
  output logic [DW-1:0] rdata_a,
  // port B
  input  logic          en_b,
  input  logic          we_b,
  input  logic [AW-1:0] addr_b,
  input  logic [DW-1:0] wdata_b,
  output logic [DW-1:0] rdata_b
);

  localparam int unsigned IW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [DW-1:0] mem [DEPTH];
  logic [IW-1:0] idx_a, idx_b;
  assign idx_a = addr_a[IW-1:0];
  assign idx_b = addr_b[IW-1:0];

  initial begin
    for (int i = 0; i < int'(DEPTH); i++) mem[i] = '0;
  end

  logic in_a, in_b;
  assign in_a = 32'(addr_a) < DEPTH;
  assign in_b = 32'(addr_b) < DEPTH;

  always_ff @(posedge clk) begin
    if (we_a && in_a) mem[idx_a] <= wdata_a;
    if (we_b && in_b) mem[idx_b] <= wdata_b;
  end

  always_ff @(posedge clk) begin
    if (en_a && !we_a) rdata_a <= in_a ? mem[idx_a] : '0;
    if (en_b && !we_b) rdata_b <= in_b ? mem[idx_b] : '0;
  end

  // both ports must not write the same node in one cycle
  assert property (@(posedge clk) !(we_a && we_b && addr_a == addr_b))
    else $error("rtst_stage_mem: both ports write address %0d", addr_a);

endmodule
