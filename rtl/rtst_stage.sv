// rtst_stage: one stage of the dual-line RTST pipeline (one tree level).
//
// The stage holds the nodes of tree level LEVEL (3**LEVEL nodes) in a
// dual-port memory block, a two-entry write bubble table and two next address
// generators, one per pipeline line. From the previous stage it receives, per
// line, the key (prefix), the node address within this level and the ready
// signal (search already finished), plus a hit flag and a valid flag.
//
// Cycle t: the incoming address is presented to the memory (the read is
// skipped for an invalid line or one whose search already finished) and the
// key, ready, hit and address are registered. Cycle t+1: the memory returns
// the node and the next address generators compare it with the registered key
// and drive the next stage's inputs combinationally. A stage therefore adds
// one clock of latency and accepts two keys per clock.
//
// A write bubble travels with the lines as the "bubble" flag; the cycle it
// reaches this stage, both memory ports carry the bubble table's writes
// instead of reads. The bubble slot carries no packets, so no read is lost.
//
// Design choices: asynchronous active-low reset of the valid/bubble flags;
// the search state travels as explicit valid/ready/hit bits.
module rtst_stage #(
  parameter int unsigned LEVEL  = 0,
  parameter int unsigned KEY_W  = 32,
  parameter int unsigned PLEN_W = 6,
  parameter int unsigned FLOW_W = 10,
  parameter int unsigned AW     = 10,
  localparam int unsigned E_W   = 1 + FLOW_W + PLEN_W + KEY_W,
  localparam int unsigned NODE_W = 2 * E_W
) (
  input  logic                clk,
  input  logic                rst_n,
  // from the previous stage (two lines)
  input  logic [1:0]          in_valid,
  input  logic [1:0][KEY_W-1:0] in_key,
  input  logic [1:0][AW-1:0]  in_addr,
  input  logic [1:0]          in_ready,
  input  logic [1:0]          in_hit,
  input  logic                in_bubble,
  // write bubble table load
  input  logic                cfg_we,
  input  logic                cfg_entry,
  input  logic [AW-1:0]       cfg_addr,
  input  logic [NODE_W-1:0]   cfg_data,
  input  logic                cfg_wen,
  // to the next stage
  output logic [1:0]          out_valid,
  output logic [1:0][KEY_W-1:0] out_key,
  output logic [1:0][AW-1:0]  out_addr,
  output logic [1:0]          out_ready,
  output logic [1:0]          out_hit,
  output logic                out_bubble,
  output rtst_pkg::nxt_sel_e [1:0] out_sel,  // multiplexer select per line
  // monitoring: memory reads issued this cycle, searches finished in this stage
  output logic [1:0]          mem_rd,
  output logic [1:0]          done_here
);

  localparam int unsigned DEPTH = rtst_pkg::pow3(LEVEL);

  // write bubble table
  logic          wb_we_a, wb_we_b;
  logic [AW-1:0] wb_addr_a, wb_addr_b;
  logic [NODE_W-1:0] wb_data_a, wb_data_b;

  rtst_write_bubble #(.AW(AW), .DW(NODE_W)) u_wb (
    .clk, .rst_n,
    .cfg_we, .cfg_entry, .cfg_addr, .cfg_data, .cfg_wen,
    .bubble (in_bubble),
    .we_a (wb_we_a), .addr_a (wb_addr_a), .wdata_a (wb_data_a),
    .we_b (wb_we_b), .addr_b (wb_addr_b), .wdata_b (wb_data_b)
  );

  // memory block: reads for live searches, writes for the bubble
  logic [NODE_W-1:0] rd_a, rd_b;
  assign mem_rd[0] = in_valid[0] && !in_ready[0];
  assign mem_rd[1] = in_valid[1] && !in_ready[1];

  rtst_stage_mem #(.DEPTH(DEPTH), .DW(NODE_W), .AW(AW)) u_mem (
    .clk,
    .en_a (mem_rd[0] || wb_we_a), .we_a (wb_we_a),
    .addr_a (wb_we_a ? wb_addr_a : in_addr[0]), .wdata_a (wb_data_a), .rdata_a (rd_a),
    .en_b (mem_rd[1] || wb_we_b), .we_b (wb_we_b),
    .addr_b (wb_we_b ? wb_addr_b : in_addr[1]), .wdata_b (wb_data_b), .rdata_b (rd_b)
  );

  // pipeline registers
  logic [1:0]            v_q, rdy_q, hit_q;
  logic [1:0][KEY_W-1:0] key_q;
  logic [1:0][AW-1:0]    addr_q;
  logic                  bub_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_q   <= '0;
      bub_q <= 1'b0;
    end else begin
      v_q   <= in_valid;
      bub_q <= in_bubble;
    end
  end

  always_ff @(posedge clk) begin
    key_q  <= in_key;
    addr_q <= in_addr;
    rdy_q  <= in_ready;
    hit_q  <= in_hit;
  end

  // next address generators
  rtst_next_addr #(.KEY_W(KEY_W), .PLEN_W(PLEN_W), .FLOW_W(FLOW_W), .AW(AW)) u_nag0 (
    .key (key_q[0]), .node (rd_a), .addr_in (addr_q[0]),
    .ready_in (rdy_q[0]), .hit_in (hit_q[0]),
    .addr_out (out_addr[0]), .ready_out (out_ready[0]), .hit_out (out_hit[0]), .sel (out_sel[0])
  );

  rtst_next_addr #(.KEY_W(KEY_W), .PLEN_W(PLEN_W), .FLOW_W(FLOW_W), .AW(AW)) u_nag1 (
    .key (key_q[1]), .node (rd_b), .addr_in (addr_q[1]),
    .ready_in (rdy_q[1]), .hit_in (hit_q[1]),
    .addr_out (out_addr[1]), .ready_out (out_ready[1]), .hit_out (out_hit[1]), .sel (out_sel[1])
  );

  assign done_here  = v_q & out_ready & ~rdy_q;
  assign out_valid  = v_q;
  assign out_key    = key_q;
  assign out_bubble = bub_q;

  // a bubble slot carries no packet, so its memory ports are free for writes
  assert property (@(posedge clk) disable iff (!rst_n) in_bubble |-> in_valid == 2'b00)
    else $error("rtst_stage: packet presented in a write-bubble slot");

endmodule
