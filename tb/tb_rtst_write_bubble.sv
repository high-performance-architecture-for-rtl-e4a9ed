// tb_rtst_write_bubble: self-checking test of the write bubble table.
//
// Loads both entries with random address/data/write-enable, passes a bubble
// and checks that exactly the enabled entries drive their memory port in the
// bubble cycle only, that the write-enable bits are spent by the bubble, and
// that a table load in the bubble cycle survives it.
module tb_rtst_write_bubble;
  localparam int unsigned AW = 10, DW = 48;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // a falling edge applies the asynchronous reset
  logic cfg_we, cfg_entry, cfg_wen, bubble;
  logic [AW-1:0] cfg_addr, addr_a, addr_b;
  logic [DW-1:0] cfg_data, wdata_a, wdata_b;
  logic we_a, we_b;
  int checks = 0, failures = 0;

  rtst_write_bubble #(.AW(AW), .DW(DW)) dut (.*);

  always #5 clk = ~clk;

  task automatic chk(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  task automatic load(input logic e, input logic [AW-1:0] a, input logic [DW-1:0] d, input logic w);
    @(negedge clk);
    cfg_we = 1; cfg_entry = e; cfg_addr = a; cfg_data = d; cfg_wen = w;
    @(negedge clk);
    cfg_we = 0;
  endtask

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [AW-1:0] a0, a1;
    logic [DW-1:0] d0, d1;
    logic w0, w1;
    cfg_we = 0; cfg_entry = 0; cfg_addr = 0; cfg_data = 0; cfg_wen = 0; bubble = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(!we_a && !we_b, "no write without bubble after reset");
    bubble = 1; #1;
    chk(!we_a && !we_b, "empty table does not write");
    @(negedge clk); bubble = 0;
    for (int it = 0; it < 500; it++) begin
      a0 = AW'($urandom); a1 = AW'($urandom); d0 = {$urandom, $urandom}; d1 = {$urandom, $urandom};
      w0 = 1'($urandom); w1 = 1'($urandom);
      load(0, a0, d0, w0);
      load(1, a1, d1, w1);
      repeat ($urandom_range(0, 3)) begin
        @(negedge clk);
        chk(!we_a && !we_b, "write outside a bubble");
      end
      bubble = 1; #1;
      chk(we_a == w0 && we_b == w1, "write enables in the bubble cycle");
      if (w0) chk(addr_a == a0 && wdata_a == d0, "port A address/data");
      if (w1) chk(addr_b == a1 && wdata_b == d1, "port B address/data");
      @(negedge clk); bubble = 0;
      // a second bubble finds the entries spent
      @(negedge clk); bubble = 1; #1;
      chk(!we_a && !we_b, "entries used once");
      @(negedge clk); bubble = 0;
    end
    // a load in the bubble cycle is kept for the next bubble
    load(0, 10'd5, 48'h1234, 1);
    @(negedge clk);
    bubble = 1; cfg_we = 1; cfg_entry = 0; cfg_addr = 10'd7; cfg_data = 48'h77; cfg_wen = 1; #1;
    chk(we_a && addr_a == 10'd5 && wdata_a == 48'h1234, "old entry written by the bubble");
    @(negedge clk); bubble = 0; cfg_we = 0;
    @(negedge clk); bubble = 1; #1;
    chk(we_a && addr_a == 10'd7 && wdata_a == 48'h77, "entry loaded in bubble cycle kept");
    @(negedge clk); bubble = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
