// tb_rtst_stage_mem: self-checking test of the dual-port stage memory.
//
// Checks the all-zero initial contents, writes from both ports in the same
// cycle, reads on both ports with one cycle of latency against a shadow
// array, that a disabled port keeps its read data, and that addresses past
// DEPTH read as zero.
module tb_rtst_stage_mem;
  localparam int unsigned DEPTH = 27, DW = 40, AW = 10;

  logic clk = 0;
  logic en_a, we_a, en_b, we_b;
  logic [AW-1:0] addr_a, addr_b;
  logic [DW-1:0] wdata_a, wdata_b, rdata_a, rdata_b;
  logic [DW-1:0] shadow [DEPTH];
  int checks = 0, failures = 0;

  rtst_stage_mem #(.DEPTH(DEPTH), .DW(DW), .AW(AW)) dut (.*);

  always #5 clk = ~clk;

  task automatic expect_eq(input logic [DW-1:0] got, input logic [DW-1:0] exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [DW-1:0] held_a;
    en_a = 0; we_a = 0; en_b = 0; we_b = 0; addr_a = 0; addr_b = 0; wdata_a = 0; wdata_b = 0;
    for (int i = 0; i < int'(DEPTH); i++) shadow[i] = '0;
    // initial contents are zero
    for (int i = 0; i < int'(DEPTH); i += 2) begin
      @(negedge clk); en_a = 1; addr_a = AW'(i); en_b = 1; addr_b = AW'(i + 1);
      @(negedge clk);
      expect_eq(rdata_a, '0, "init A");
      if (i + 1 < int'(DEPTH)) expect_eq(rdata_b, '0, "init B");
    end
    // random traffic
    for (int it = 0; it < 3000; it++) begin
      int unsigned aa, ab;
      logic wa, wb;
      @(negedge clk);
      aa = $urandom_range(0, DEPTH + 2); ab = $urandom_range(0, DEPTH + 2);
      wa = $urandom_range(0, 2) == 0; wb = $urandom_range(0, 2) == 0;
      if (wa && wb && aa == ab) wb = 0;
      en_a = 1; we_a = wa; addr_a = AW'(aa); wdata_a = {$urandom, $urandom};
      en_b = 1; we_b = wb; addr_b = AW'(ab); wdata_b = {$urandom, $urandom};
      @(posedge clk); #1;
      if (!wa) expect_eq(rdata_a, (aa < DEPTH) ? shadow[aa] : '0, "read A");
      if (!wb) expect_eq(rdata_b, (ab < DEPTH) ? shadow[ab] : '0, "read B");
      if (wa && aa < DEPTH) shadow[aa] = wdata_a;
      if (wb && ab < DEPTH) shadow[ab] = wdata_b;
    end
    // a disabled port holds its data
    @(negedge clk); we_a = 0; we_b = 0; en_a = 1; addr_a = 1;
    @(negedge clk); held_a = rdata_a; en_a = 0; addr_a = 2;
    repeat (3) @(negedge clk);
    expect_eq(rdata_a, held_a, "hold A");
    expect_eq(held_a, shadow[1], "read before hold");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
