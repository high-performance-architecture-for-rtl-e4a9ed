// match_selector: picks one matching flow out of the k group pipelines.
//
// Every group pipeline reports, per line, whether the packet matched one of
// its flows and which one. Groups hold disjoint flows, but flows of different
// groups may overlap, so several groups can match the same packet; the flow
// of highest priority wins. Priority is encoded in the flow identifier
// (this design's choice): the control plane numbers flows in decreasing
// priority, so the smallest identifier among the hits is selected, the way a
// TCAM favours its lowest matching address. The selector also reports which
// group delivered the winner.
//
// Timing: one registered stage; the two lines are independent.
module match_selector #(
  parameter int unsigned K      = 4,
  parameter int unsigned FLOW_W = 10,
  localparam int unsigned GW    = (K > 1) ? $clog2(K) : 1
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic [1:0]                  in_valid,    // groups run in lock step
  input  logic [K-1:0][1:0]           grp_hit,
  input  logic [K-1:0][1:0][FLOW_W-1:0] grp_flow,
  output logic [1:0]                  out_valid,
  output logic [1:0]                  out_hit,
  output logic [1:0][FLOW_W-1:0]      out_flow,
  output logic [1:0][GW-1:0]          out_group,
  output logic [1:0]                  out_multi    // more than one group matched
);

  logic [1:0]             sel_hit, sel_multi;
  logic [1:0][FLOW_W-1:0] sel_flow;
  logic [1:0][GW-1:0]     sel_grp;

  always_comb begin
    for (int l = 0; l < 2; l++) begin
      sel_hit[l]   = 1'b0;
      sel_multi[l] = 1'b0;
      sel_flow[l]  = '0;
      sel_grp[l]   = '0;
      for (int g = 0; g < int'(K); g++) begin
        if (grp_hit[g][l]) begin
          if (sel_hit[l]) sel_multi[l] = 1'b1;
          if (!sel_hit[l] || grp_flow[g][l] < sel_flow[l]) begin
            sel_flow[l] = grp_flow[g][l];
            sel_grp[l]  = GW'(g);
          end
          sel_hit[l] = 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= '0;
      out_hit   <= '0;
      out_flow  <= '0;
      out_group <= '0;
      out_multi <= '0;
    end else begin
      out_valid <= in_valid;
      out_hit   <= sel_hit & in_valid;
      out_flow  <= sel_flow;
      out_group <= sel_grp;
      out_multi <= sel_multi & in_valid;
    end
  end

endmodule
