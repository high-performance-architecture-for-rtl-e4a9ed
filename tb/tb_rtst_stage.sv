// tb_rtst_stage: self-checking test of one pipeline stage (tree level 2).
//
// Fills the nine nodes of the level with ordered random prefix pairs through
// the write bubble table (two nodes per bubble), then drives both lines with
// random node addresses, keys and incoming ready/hit states, and checks one
// clock later the next address, ready, hit and valid of each line against a
// reference computed from the testbench's copy of the nodes. Also checks that
// a finished search issues no memory read and that the bubble flag advances
// by one stage per clock.
module tb_rtst_stage;
  import rtst_pkg::*;

  localparam int unsigned LEVEL = 2, KEY_W = 16, PLEN_W = 5, FLOW_W = 8, AW = 8;
  localparam int unsigned E_W = 1 + FLOW_W + PLEN_W + KEY_W, NODE_W = 2 * E_W, DEPTH = 9;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // a falling edge applies the asynchronous reset
  logic [1:0] in_valid, in_ready, in_hit, out_valid, out_ready, out_hit, mem_rd, done_here;
  logic [1:0][KEY_W-1:0] in_key, out_key;
  logic [1:0][AW-1:0] in_addr, out_addr;
  logic in_bubble, out_bubble, cfg_we, cfg_entry, cfg_wen;
  logic [AW-1:0] cfg_addr;
  logic [NODE_W-1:0] cfg_data;
  nxt_sel_e [1:0] out_sel;

  rtst_stage #(.LEVEL(LEVEL), .KEY_W(KEY_W), .PLEN_W(PLEN_W), .FLOW_W(FLOW_W), .AW(AW)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  logic [NODE_W-1:0] img [DEPTH];

  task automatic chk(input bit c, input string s);
    checks++;
    if (!c) begin failures++; if (failures < 15) $display("FAIL %s", s); end
  endtask

  function automatic logic [KEY_W-1:0] lo_of(input logic [KEY_W-1:0] v, input int pl);
    return (pl == 0) ? '0 : ((v >> (KEY_W - pl)) << (KEY_W - pl));
  endfunction
  function automatic logic [KEY_W-1:0] hi_of(input logic [KEY_W-1:0] v, input int pl);
    return lo_of(v, pl) + KEY_W'((32'd1 << (KEY_W - pl)) - 1);
  endfunction

  // expected outputs of one line
  task automatic ref_line(input logic [AW-1:0] a, input logic [KEY_W-1:0] k, input logic rin,
                          input logic hin, output logic [AW-1:0] ea, output logic er, output logic eh);
    logic [E_W-1:0] l, r;
    int pl, pr;
    logic [KEY_W-1:0] vl, vr;
    l = img[a][E_W-1:0]; r = img[a][2*E_W-1:E_W];
    vl = l[KEY_W-1:0]; vr = r[KEY_W-1:0];
    pl = int'(l[KEY_W +: PLEN_W]); pr = int'(r[KEY_W +: PLEN_W]);
    if (rin) begin ea = a; er = 1; eh = hin; end
    else if (k >= lo_of(vl, pl) && k <= hi_of(vl, pl)) begin
      er = 1; eh = l[E_W-1]; ea = l[E_W-1] ? AW'(l[KEY_W+PLEN_W +: FLOW_W]) : '0;
    end else if (k >= lo_of(vr, pr) && k <= hi_of(vr, pr)) begin
      er = 1; eh = r[E_W-1]; ea = r[E_W-1] ? AW'(r[KEY_W+PLEN_W +: FLOW_W]) : '0;
    end else begin
      er = 0; eh = 0;
      ea = (k < lo_of(vl, pl)) ? AW'(3 * a) : (k < lo_of(vr, pr)) ? AW'(3 * a + 1) : AW'(3 * a + 2);
    end
  endtask

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [AW-1:0] ea [2];
    logic er [2], eh [2];
    int n_rd_off = 0, n_dir[4];
    foreach (n_dir[i]) n_dir[i] = 0;
    in_valid = 0; in_ready = 0; in_hit = 0; in_key = 0; in_addr = 0; in_bubble = 0;
    cfg_we = 0; cfg_entry = 0; cfg_wen = 0; cfg_addr = 0; cfg_data = 0;
    // ordered random node contents: left prefix below right prefix
    for (int a = 0; a < int'(DEPTH); a++) begin
      int pl, pr;
      logic [KEY_W-1:0] vl, vr;
      pl = $urandom_range(4, 16); pr = $urandom_range(4, 16);
      vl = lo_of({2'b00, 14'($urandom)}, pl);
      vr = lo_of({2'b10, 14'($urandom)}, pr);
      img[a] = {1'($urandom_range(0, 3) != 0), FLOW_W'($urandom), PLEN_W'(pr), vr,
                1'($urandom_range(0, 3) != 0), FLOW_W'($urandom), PLEN_W'(pl), vl};
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    // load two nodes per bubble
    for (int a = 0; a < int'(DEPTH); a += 2) begin
      @(negedge clk);
      cfg_we = 1; cfg_entry = 0; cfg_addr = AW'(a); cfg_data = img[a]; cfg_wen = 1;
      @(negedge clk);
      cfg_entry = 1; cfg_addr = AW'(a + 1); cfg_data = (a + 1 < int'(DEPTH)) ? img[a + 1] : '0;
      cfg_wen = (a + 1 < int'(DEPTH));
      @(negedge clk);
      cfg_we = 0; in_bubble = 1;
      @(negedge clk);
      in_bubble = 0;
      chk(out_bubble, "bubble leaves one clock later");
      @(negedge clk);
      chk(!out_bubble, "bubble flag is one slot long");
    end
    // random searches on both lines
    for (int it = 0; it < 4000; it++) begin
      logic [1:0] v_sent;
      for (int l = 0; l < 2; l++) begin
        in_valid[l] = $urandom_range(0, 4) != 0;
        in_addr[l]  = AW'($urandom_range(0, DEPTH - 1));
        in_key[l]   = KEY_W'($urandom);
        in_ready[l] = $urandom_range(0, 4) == 0;
        in_hit[l]   = 1'($urandom);
        if (in_ready[l]) in_addr[l] = AW'($urandom);
        ref_line(in_addr[l] % AW'(DEPTH), in_key[l], in_ready[l], in_hit[l], ea[l], er[l], eh[l]);
        if (in_ready[l]) ea[l] = in_addr[l];
        #1;
        chk(mem_rd[l] == (in_valid[l] && !in_ready[l]), "memory read only for a live search");
        if (in_valid[l] && in_ready[l]) n_rd_off++;
      end
      v_sent = in_valid;
      @(negedge clk);
      for (int l = 0; l < 2; l++) begin
        chk(out_valid[l] == v_sent[l], "valid advances one stage per clock");
        if (out_valid[l]) begin
          chk(out_addr[l] == ea[l], $sformatf("line %0d addr %0d expected %0d", l, out_addr[l], ea[l]));
          chk(out_ready[l] == er[l], $sformatf("line %0d ready %b expected %b", l, out_ready[l], er[l]));
          chk(out_hit[l] == eh[l], $sformatf("line %0d hit %b expected %b", l, out_hit[l], eh[l]));
          n_dir[out_sel[l]]++;
        end
      end
    end
    chk(n_rd_off > 100, "finished searches skip the memory");
    chk(n_dir[0] > 0 && n_dir[1] > 0 && n_dir[2] > 0 && n_dir[3] > 0, "all four next-address choices seen");
    $display("left=%0d mid=%0d right=%0d hop=%0d reads-off=%0d", n_dir[0], n_dir[1], n_dir[2], n_dir[3], n_rd_off);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
