// conv_kernel: the parallel AdderNet convolution core, P_OUT x P_IN kernels.
//
// One feature vector of P_IN input channels is broadcast to P_OUT groups.
// Group o holds P_IN adder kernels, each forming |feature[i] - weight[o][i]|,
// and an adder tree that sums the P_IN distances into one partial result for
// output channel o. This is the structure of the paper's parallel kernel
// figure; P_IN = 64 and P_IN * P_OUT = 1024 are the paper's numbers.
// The kernel outputs are registered once before the tree (own choice).
//
// Interface: in_valid, feature (P_IN lanes), weight (P_OUT x P_IN lanes,
// lane o*P_IN + i), in_tag (free side band carried along with the data);
// out_valid, out_sum (P_OUT unsigned sums of DW + log2(P_IN) bits), out_tag.
// Timing: a new vector every clock, latency LAT = 1 + log2(P_IN) cycles.
module conv_kernel #(
  parameter int unsigned DW    = 16,
  parameter int unsigned P_IN  = 64,
  parameter int unsigned P_OUT = 16,
  parameter int unsigned TAG_W = 1,
  localparam int unsigned SW   = DW + $clog2(P_IN),
  localparam int unsigned LAT  = 1 + $clog2(P_IN)
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic                               in_valid,
  input  logic [P_IN-1:0][DW-1:0]            feature,
  input  logic [P_OUT-1:0][P_IN-1:0][DW-1:0] weight,
  input  logic [TAG_W-1:0]                   in_tag,
  output logic                               out_valid,
  output logic [P_OUT-1:0][SW-1:0]           out_sum,
  output logic [TAG_W-1:0]                   out_tag
);
  logic [P_OUT-1:0][P_IN-1:0][DW-1:0] absd, absd_q;
  logic                               absd_vld;
  logic [P_OUT-1:0]                   tree_vld;

  for (genvar o = 0; o < P_OUT; o++) begin : g_out
    for (genvar i = 0; i < P_IN; i++) begin : g_in
      adder_kernel #(.DW(DW)) u_k (
        .a (feature[i]),
        .b (weight[o][i]),
        .y (absd[o][i])
      );
    end
    adder_tree #(.N(P_IN), .W(DW)) u_tree (
      .clk      (clk),
      .rst_n    (rst_n),
      .in_valid (absd_vld),
      .in_data  (absd_q[o]),
      .out_valid(tree_vld[o]),
      .out_sum  (out_sum[o])
    );
  end

  always_ff @(posedge clk) absd_q <= absd;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) absd_vld <= 1'b0;
    else        absd_vld <= in_valid;
  end

  assign out_valid = tree_vld[0];

  // Side band delayed by the same LAT cycles as the data.
  logic [LAT-1:0][TAG_W-1:0] tag_sr;
  always_ff @(posedge clk) begin
    tag_sr[0] <= in_tag;
    for (int s = 1; s < int'(LAT); s++) tag_sr[s] <= tag_sr[s-1];
  end
  assign out_tag = tag_sr[LAT-1];
endmodule
