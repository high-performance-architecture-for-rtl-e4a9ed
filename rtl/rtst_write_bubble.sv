// rtst_write_bubble: dual-ported write bubble table of one pipeline stage.
//
// The table has two entries, one per memory port, each holding the node
// address to update, the new node content and a write-enable bit. The update
// side (the control plane) fills the entries through the cfg_* port. When a
// write bubble, an empty slot inserted at the pipeline input, reaches this
// stage (bubble=1), every entry whose write-enable bit is set drives its
// memory port as a write in that cycle, so up to two nodes of the level
// change at once, between the packets ahead of the bubble and those behind it.
//
// Design choices beyond the paper: the write-enable bits clear themselves
// when the bubble has passed, so an entry is used by one bubble only; a
// configuration write in the same cycle wins over that clearing.
//
// Timing: the port outputs are combinational from the table and the bubble
// input; the table updates on the clock edge.
module rtst_write_bubble #(
  parameter int unsigned AW = 10,
  parameter int unsigned DW = 98
) (
  input  logic          clk,
  input  logic          rst_n,
  // table load
  input  logic          cfg_we,
  input  logic          cfg_entry,   // 0: port A entry, 1: port B entry
  input  logic [AW-1:0] cfg_addr,
  input  logic [DW-1:0] cfg_data,
  input  logic          cfg_wen,     // write-enable bit of the entry
  // bubble passing through this stage
  input  logic          bubble,
  // memory write ports
  output logic          we_a,
  output logic [AW-1:0] addr_a,
  output logic [DW-1:0] wdata_a,
  output logic          we_b,
  output logic [AW-1:0] addr_b,
  output logic [DW-1:0] wdata_b
);

  typedef struct packed {
    logic [AW-1:0] addr;
    logic [DW-1:0] data;
    logic          wen;
  } wb_entry_t;

  wb_entry_t tbl [2];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tbl[0] <= '0;
      tbl[1] <= '0;
    end else begin
      if (bubble) begin
        tbl[0].wen <= 1'b0;
        tbl[1].wen <= 1'b0;
      end
      if (cfg_we) tbl[cfg_entry] <= '{addr: cfg_addr, data: cfg_data, wen: cfg_wen};
    end
  end

  assign we_a    = bubble && tbl[0].wen;
  assign addr_a  = tbl[0].addr;
  assign wdata_a = tbl[0].data;
  assign we_b    = bubble && tbl[1].wen;
  assign addr_b  = tbl[1].addr;
  assign wdata_b = tbl[1].data;

endmodule
