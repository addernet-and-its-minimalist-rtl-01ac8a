// adder_tree: pipelined binary tree summing N unsigned W-bit values.
//
// Each adder-kernel output of one output channel enters a leaf; each level
// adds pairs and is registered, so the width grows by one bit per level and
// the result is W + log2(N) bits wide, the tree width the paper uses in its
// resource model (N - 1 adders of DW + log2(P_in) bits). Registering every
// level is this design's choice; the paper does not say where the tree is
// pipelined.
//
// Interface: in_valid / in_data (N lanes), out_valid / out_sum.
// Timing: one result per clock, latency log2(N) cycles, no back-pressure.
// N must be a power of two, at least 2.
module adder_tree #(
  parameter int unsigned N = 64,
  parameter int unsigned W = 16,
  localparam int unsigned LVLS = $clog2(N),
  localparam int unsigned OW   = W + LVLS
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  input  logic [N-1:0][W-1:0]   in_data,
  output logic                  out_valid,
  output logic [OW-1:0]         out_sum
);
  // Level l holds N >> l nodes of W + l bits; level 0 is the input.
  for (genvar l = 0; l <= LVLS; l++) begin : g_lvl
    logic [(N >> l)-1:0][W+l-1:0] node;
    logic                         vld;
    if (l == 0) begin : g_leaf
      assign node = in_data;
      assign vld  = in_valid;
    end else begin : g_add
      always_ff @(posedge clk) begin
        for (int i = 0; i < int'(N >> l); i++)
          node[i] <= (W+l)'(g_lvl[l-1].node[2*i]) + (W+l)'(g_lvl[l-1].node[2*i+1]);
      end
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) vld <= 1'b0;
        else        vld <= g_lvl[l-1].vld;
      end
    end
  end

  assign out_sum   = g_lvl[LVLS].node[0];
  assign out_valid = g_lvl[LVLS].vld;
endmodule
