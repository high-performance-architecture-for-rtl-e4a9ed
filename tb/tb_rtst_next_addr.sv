// tb_rtst_next_addr: self-checking test of the next address generator.
//
// Builds nodes of two ordered prefixes (random lengths, including exact
// entries and invalid ones), drives keys near and inside their ranges and
// compares multiplexer select, next address, ready and hit with a reference
// that computes the ranges arithmetically (value >> (W-len) << (W-len)).
// Also replays the worked example of an 8-bit tree: root {00110110, 10000101}
// sends key 11001000 to the right child.
module tb_rtst_next_addr;
  import rtst_pkg::*;

  localparam int unsigned KEY_W = 32, PLEN_W = 6, FLOW_W = 10, AW = 10;
  localparam int unsigned E_W = 1 + FLOW_W + PLEN_W + KEY_W;

  logic [KEY_W-1:0] key;
  logic [2*E_W-1:0] node;
  logic [AW-1:0]    addr_in, addr_out;
  logic             ready_in, hit_in, ready_out, hit_out;
  nxt_sel_e         sel;

  int checks = 0, failures = 0;

  rtst_next_addr #(.KEY_W(KEY_W), .PLEN_W(PLEN_W), .FLOW_W(FLOW_W), .AW(AW)) dut (.*);

  function automatic logic [E_W-1:0] mk(input logic v, input int unsigned flow,
                                        input int unsigned plen, input logic [KEY_W-1:0] val);
    return {v, FLOW_W'(flow), PLEN_W'(plen), val};
  endfunction

  function automatic longint unsigned lo_of(input logic [KEY_W-1:0] v, input int unsigned plen);
    if (plen == 0) return 0;
    return (longint'(v) >> (KEY_W - plen)) << (KEY_W - plen);
  endfunction
  function automatic longint unsigned hi_of(input logic [KEY_W-1:0] v, input int unsigned plen);
    return lo_of(v, plen) + (64'd1 << (KEY_W - plen)) - 1;
  endfunction

  // drive one case and compare with the reference
  task automatic check_case(input logic vl, input int unsigned fl, input int unsigned pl,
                            input logic [KEY_W-1:0] xl,
                            input logic vr, input int unsigned fr, input int unsigned pr,
                            input logic [KEY_W-1:0] xr,
                            input logic [KEY_W-1:0] k, input logic [AW-1:0] a,
                            input logic rin, input logic hin);
    longint unsigned llo, lhi, rlo, rhi, kk;
    nxt_sel_e e_sel; logic [AW-1:0] e_addr; logic e_rdy, e_hit;
    node = {mk(vr, fr, pr, xr), mk(vl, fl, pl, xl)};
    key = k; addr_in = a; ready_in = rin; hit_in = hin;
    #1;
    llo = lo_of(xl, pl); lhi = hi_of(xl, pl); rlo = lo_of(xr, pr); rhi = hi_of(xr, pr);
    kk = longint'(k);
    if (rin) begin
      e_sel = SEL_HOP; e_addr = a; e_rdy = 1; e_hit = hin;
    end else if (kk >= llo && kk <= lhi) begin
      e_sel = SEL_HOP; e_rdy = 1; e_hit = vl;
      e_addr = vl ? AW'(fl) : (vr && kk >= rlo && kk <= rhi) ? AW'(fr) : '0;
      if (!vl && vr && kk >= rlo && kk <= rhi) e_hit = 1;
    end else if (kk >= rlo && kk <= rhi) begin
      e_sel = SEL_HOP; e_rdy = 1; e_hit = vr; e_addr = vr ? AW'(fr) : '0;
    end else if (kk < llo) begin
      e_sel = SEL_LEFT; e_addr = AW'(3 * int'(a)); e_rdy = 0; e_hit = 0;
    end else if (kk < rlo) begin
      e_sel = SEL_MID; e_addr = AW'(3 * int'(a) + 1); e_rdy = 0; e_hit = 0;
    end else begin
      e_sel = SEL_RIGHT; e_addr = AW'(3 * int'(a) + 2); e_rdy = 0; e_hit = 0;
    end
    checks++;
    if (sel !== e_sel || addr_out !== e_addr || ready_out !== e_rdy || hit_out !== e_hit) begin
      failures++;
      if (failures < 10)
        $display("FAIL key=%h L=[%h..%h] R=[%h..%h] sel=%0d/%0d addr=%0d/%0d rdy=%b/%b hit=%b/%b",
                 k, llo, lhi, rlo, rhi, sel, e_sel, addr_out, e_addr, ready_out, e_rdy, hit_out, e_hit);
    end
  endtask

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int unsigned pl, pr;
    logic [KEY_W-1:0] xl, xr, k;
    longint unsigned lhi, rlo;
    int n_left = 0, n_mid = 0, n_right = 0, n_hop = 0;
    // worked example: 8-bit exact keys in the low byte, root 3 | 6, key 7
    check_case(1, 3, 32, 32'h36, 1, 6, 32, 32'h85, 32'hC8, 10'd0, 0, 0);
    if (sel !== SEL_RIGHT || addr_out !== 10'd2) begin failures++; $display("FAIL example"); end
    checks++;
    // second level: node 7 | 8 at address 2 of level 1, key 11001000 matches flow 7
    check_case(1, 7, 32, 32'hC8, 1, 8, 32, 32'hD1, 32'hC8, 10'd2, 0, 0);
    if (!(hit_out && addr_out == 10'd7)) begin failures++; $display("FAIL example match"); end
    checks++;
    for (int i = 0; i < 20000; i++) begin
      pl = $urandom_range(0, 32); pr = $urandom_range(1, 32);
      xl = $urandom; xr = $urandom;
      // keep the left range below the right range
      lhi = hi_of(xl, pl);
      if (lhi >= 64'hFFFF_FFFF) begin pl = $urandom_range(1, 32); xl = {1'b0, xl[30:0]}; lhi = hi_of(xl, pl); end
      rlo = lo_of(xr, pr);
      if (rlo <= lhi) begin
        xr = KEY_W'(lhi + 1 + ($urandom_range(0, 3)));
        if (hi_of(xl, pl) >= 64'hFFFF_FFFC) xr = '1;
        pr = 32;
        if (longint'(xr) <= lhi) continue;
      end
      case ($urandom_range(0, 5))
        0: k = KEY_W'(lo_of(xl, pl) + $urandom_range(0, 1)) - 1;
        1: k = KEY_W'(hi_of(xl, pl) + $urandom_range(0, 1));
        2: k = KEY_W'(lo_of(xr, pr) + $urandom_range(0, 1)) - 1;
        3: k = KEY_W'(hi_of(xr, pr) + $urandom_range(0, 1));
        default: k = $urandom;
      endcase
      check_case($urandom_range(0, 3) != 0, $urandom_range(0, 1023), pl, xl,
                 $urandom_range(0, 3) != 0, $urandom_range(0, 1023), pr, xr,
                 k, AW'($urandom_range(0, 242)), $urandom_range(0, 7) == 0, 1'($urandom));
      case (sel)
        SEL_LEFT: n_left++; SEL_MID: n_mid++; SEL_RIGHT: n_right++; default: n_hop++;
      endcase
    end
    $display("selects: left=%0d mid=%0d right=%0d hop=%0d", n_left, n_mid, n_right, n_hop);
    checks++;
    if (n_left == 0 || n_mid == 0 || n_right == 0 || n_hop == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
