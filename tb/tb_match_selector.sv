// tb_match_selector: self-checking test of the match selector.
//
// Drives random hit patterns and flow ids from K=4 groups on both lines and
// checks, one clock later, that the smallest flow id among the hits is
// reported with its group, that no hit is reported when no group hit, and
// that the multi-match flag is set when two or more groups hit.
module tb_match_selector;
  localparam int unsigned K = 4, FLOW_W = 10, GW = 2;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // a falling edge applies the asynchronous reset
  logic [1:0] in_valid, out_valid, out_hit, out_multi;
  logic [K-1:0][1:0] grp_hit;
  logic [K-1:0][1:0][FLOW_W-1:0] grp_flow;
  logic [1:0][FLOW_W-1:0] out_flow;
  logic [1:0][GW-1:0] out_group;
  int checks = 0, failures = 0;

  match_selector #(.K(K), .FLOW_W(FLOW_W)) dut (.*);

  always #5 clk = ~clk;

  task automatic chk(input bit c, input string s);
    checks++;
    if (!c) begin failures++; if (failures < 15) $display("FAIL %s", s); end
  endtask

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit e_hit [2], e_multi [2], e_val [2];
    int e_flow [2], e_grp [2], n, n_multi = 0;
    in_valid = 0; grp_hit = 0; grp_flow = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int it = 0; it < 5000; it++) begin
      @(negedge clk);
      in_valid = 2'($urandom);
      for (int l = 0; l < 2; l++) begin
        e_hit[l] = 0; e_flow[l] = 1 << 30; e_grp[l] = 0; n = 0;
        for (int g = 0; g < int'(K); g++) begin
          grp_hit[g][l] = $urandom_range(0, 2) == 0;
          grp_flow[g][l] = FLOW_W'($urandom);
          if (grp_hit[g][l]) begin
            n++;
            e_hit[l] = 1;
            if (int'(grp_flow[g][l]) < e_flow[l]) begin e_flow[l] = int'(grp_flow[g][l]); e_grp[l] = g; end
          end
        end
        e_multi[l] = n > 1;
        e_val[l] = in_valid[l];
      end
      @(negedge clk);
      for (int l = 0; l < 2; l++) begin
        chk(out_valid[l] == e_val[l], "valid");
        if (e_val[l]) begin
          chk(out_hit[l] == e_hit[l], $sformatf("hit %b expected %b", out_hit[l], e_hit[l]));
          chk(out_multi[l] == e_multi[l], "multi");
          if (e_hit[l]) begin
            chk(int'(out_flow[l]) == e_flow[l], $sformatf("flow %0d expected %0d", out_flow[l], e_flow[l]));
            chk(int'(out_group[l]) == e_grp[l], "group");
          end
          if (e_multi[l]) n_multi++;
        end
      end
    end
    chk(n_multi > 100, "multiple matches seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
