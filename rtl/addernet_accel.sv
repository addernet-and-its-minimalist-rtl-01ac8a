// addernet_accel: universal AdderNet convolution accelerator.
//
// Data path, in the order a result is made:
//   host --AXI4--> feature buffer (P_IN features per row)
//              \-> weight buffer  (P_OUT x P_IN weights per row)
//              \-> BN buffer      (P_OUT bias/gamma pairs per row)
//   conv control walks the passes: each clock one feature row and one weight
//   row enter the convolution core, whose P_OUT x P_IN adder kernels form
//   |feature - weight| and whose P_OUT adder trees sum over P_IN channels;
//   the adder-tree output buffer accumulates the negated sums of each output
//   pixel over its passes and stores the pixel;
//   when the host reads the result region over AXI4, each stored pixel passes
//   the BN unit (add, multiply, shift, ReLU, saturate) on its way out.
// Two AXI4-Lite ports configure the run (conv control) and the BN unit
// (BN control). The blocks and their connections follow the paper's block
// diagram of its general-purpose accelerator; the AXI interconnect and the
// host processor with its DRAM lie outside and connect through the three
// AXI ports.
//
// Interface: clk, rst_n (asynchronous, active low), s_axil_conv_*, s_axil_bn_*
// (AXI4-Lite), s_axi_* (AXI4), done_irq (high from the end of a run until
// the next start).
// Timing: a run of N_PIX pixels x N_ACC passes takes
// N_PIX*N_ACC + CONV_LAT + 2 clocks (CYCLES register) from the start write to done, where
// CONV_LAT = 1 + log2(P_IN) is the core's latency.
module addernet_accel
  import addernet_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  axil_req_t s_axil_conv_req,
  output axil_rsp_t s_axil_conv_rsp,
  input  axil_req_t s_axil_bn_req,
  output axil_rsp_t s_axil_bn_rsp,
  input  axi_req_t  s_axi_req,
  output axi_rsp_t  s_axi_rsp,
  output logic      done_irq
);
  localparam int unsigned SW         = DW + $clog2(P_IN);
  localparam int unsigned FEAT_WORDS = P_IN * DW / AXI_DW;          // per row
  localparam int unsigned WGT_WORDS  = P_OUT * P_IN * DW / AXI_DW;  // per row
  localparam int unsigned BN_WORDS   = P_OUT * 2 * BN_W / AXI_DW;   // per row
  localparam int unsigned FAW = $clog2(FEAT_DEPTH);
  localparam int unsigned WAW = $clog2(WGT_DEPTH);
  localparam int unsigned BAW = $clog2(BN_DEPTH);

  // ---- buffer write side (from the AXI4 data port)
  logic                        feat_we, wgt_we, bn_we;
  logic [$clog2(FEAT_DEPTH*FEAT_WORDS)-1:0] feat_waddr;
  logic [$clog2(WGT_DEPTH*WGT_WORDS)-1:0]   wgt_waddr;
  logic [$clog2(BN_DEPTH*BN_WORDS)-1:0]     bn_waddr;
  logic [AXI_DW-1:0]           wdata;
  logic [AXI_DW/8-1:0]         wstrb;

  // ---- buffer read side
  logic                        feat_re, wgt_re;
  logic [FAW-1:0]              feat_raddr;
  logic [WAW-1:0]              wgt_raddr;
  logic [BAW-1:0]              bn_row;
  logic [FEAT_WORDS-1:0][AXI_DW-1:0] feat_row;
  logic [WGT_WORDS-1:0][AXI_DW-1:0]  wgt_row;
  logic [BN_WORDS-1:0][AXI_DW-1:0]   bn_prm;

  // ---- core
  logic                        k_valid, c_valid;
  conv_tag_t                   k_tag, c_tag;
  logic [P_OUT-1:0][SW-1:0]    c_sum;
  logic                        stored;
  logic                        c_tag_fin_q;

  // ---- results
  logic                        res_re;
  logic [OUT_AW-1:0]           res_row;
  logic [P_OUT-1:0][ACC_W-1:0] acc_row;
  logic [P_OUT-1:0][BN_W-1:0]  bias, gamma;
  logic [P_OUT-1:0][DW-1:0]    res_data;
  bn_cfg_t                     bn_cfg;

  axi_data_port #(
    .FEAT_WORDS (FEAT_DEPTH * FEAT_WORDS),
    .WGT_WORDS  (WGT_DEPTH * WGT_WORDS),
    .BN_WORDS   (BN_DEPTH * BN_WORDS),
    .OUT_ROWS   (OUT_DEPTH),
    .RES_LANES  (P_OUT)
  ) u_data_port (
    .clk, .rst_n,
    .s_axi_req, .s_axi_rsp,
    .feat_we, .feat_waddr, .wgt_we, .wgt_waddr, .bn_we, .bn_waddr,
    .wdata, .wstrb,
    .res_re, .res_row, .res_data
  );

  lane_buffer #(.DEPTH(FEAT_DEPTH), .WORDS(FEAT_WORDS), .BW(AXI_DW)) u_feature_buffer (
    .clk, .we(feat_we), .waddr(feat_waddr), .wdata, .wstrb,
    .re(feat_re), .raddr(feat_raddr), .rdata(feat_row)
  );

  lane_buffer #(.DEPTH(WGT_DEPTH), .WORDS(WGT_WORDS), .BW(AXI_DW)) u_weight_buffer (
    .clk, .we(wgt_we), .waddr(wgt_waddr), .wdata, .wstrb,
    .re(wgt_re), .raddr(wgt_raddr), .rdata(wgt_row)
  );

  lane_buffer #(.DEPTH(BN_DEPTH), .WORDS(BN_WORDS), .BW(AXI_DW)) u_bn_buffer (
    .clk, .we(bn_we), .waddr(bn_waddr), .wdata, .wstrb,
    .re(1'b1), .raddr(bn_row), .rdata(bn_prm)
  );

  conv_control #(
    .FEAT_DEPTH (FEAT_DEPTH), .WGT_DEPTH (WGT_DEPTH), .OUT_DEPTH (OUT_DEPTH)
  ) u_conv_control (
    .clk, .rst_n,
    .s_axil_req (s_axil_conv_req), .s_axil_rsp (s_axil_conv_rsp),
    .feat_re, .feat_raddr, .wgt_re, .wgt_raddr,
    .k_valid, .k_tag,
    .run_fin (stored && c_tag_fin_q),
    .busy (), .done_irq
  );

  conv_kernel #(
    .DW (DW), .P_IN (P_IN), .P_OUT (P_OUT), .TAG_W ($bits(conv_tag_t))
  ) u_conv_kernel (
    .clk, .rst_n,
    .in_valid  (k_valid),
    .feature   (feat_row),
    .weight    (wgt_row),
    .in_tag    (k_tag),
    .out_valid (c_valid),
    .out_sum   (c_sum),
    .out_tag   (c_tag)
  );

  // the final flag is checked once its pixel has been stored
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) c_tag_fin_q <= 1'b0;
    else        c_tag_fin_q <= c_valid && c_tag.fin;
  end

  output_buffer #(
    .DEPTH (OUT_DEPTH), .P_OUT (P_OUT), .SW (SW), .ACC_W (ACC_W)
  ) u_output_buffer (
    .clk, .rst_n,
    .in_valid (c_valid),
    .in_first (c_tag.first),
    .in_last  (c_tag.last),
    .in_addr  (c_tag.addr),
    .in_sum   (c_sum),
    .stored,
    .re       (res_re),
    .raddr    (res_row),
    .rdata    (acc_row)
  );

  // BN buffer word o = {gamma[o], bias[o]}
  always_comb begin
    for (int o = 0; o < int'(P_OUT); o++) begin
      bias[o]  = bn_prm[o][BN_W-1:0];
      gamma[o] = bn_prm[o][2*BN_W-1:BN_W];
    end
  end

  bn_control #(.BN_DEPTH (BN_DEPTH)) u_bn_control (
    .clk, .rst_n,
    .s_axil_req (s_axil_bn_req), .s_axil_rsp (s_axil_bn_rsp),
    .cfg (bn_cfg), .bn_row
  );

  bn_unit #(.P_OUT (P_OUT), .ACC_W (ACC_W), .BN_W (BN_W), .DW (DW)) u_bn_unit (
    .clk,
    .x     (acc_row),
    .bias, .gamma,
    .cfg   (bn_cfg),
    .y     (res_data)
  );
endmodule
