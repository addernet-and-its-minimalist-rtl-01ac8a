// bn_control: AXI4-Lite configuration block of the batch-norm path.
//
// Holds the settings the BN unit applies to every result read out of the
// accelerator: BN enable, ReLU enable, the rescaling shift, and which row of
// the BN buffer (which group of P_OUT output channels) supplies bias and
// gamma. The paper shows a "BN Control" block on AXI4-Lite driving the BN
// buffer and BN unit but gives no register map; the map below is this
// design's own.
//
// Registers (word index): 0 BN_CFG (bit0 BN enable, bit1 ReLU enable),
// 1 BN_SHIFT (bits 4:0), 2 BN_ROW. All read back; others read as zero.
// Reset: BN and ReLU off, shift 0, row 0.
// Timing: a write takes effect the clock after the AXI write handshake.
module bn_control
  import addernet_pkg::*;
#(
  parameter int unsigned BN_DEPTH = addernet_pkg::BN_DEPTH,
  localparam int unsigned ROW_W   = $clog2(BN_DEPTH)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  axil_req_t         s_axil_req,
  output axil_rsp_t         s_axil_rsp,
  output bn_cfg_t           cfg,
  output logic [ROW_W-1:0]  bn_row
);
  logic              reg_we;
  logic [3:0]        reg_waddr, reg_raddr;
  logic [AXI_DW-1:0] reg_wdata, reg_rdata;
  logic [AXI_DW/8-1:0] reg_wstrb;

  axil_slave #(.NREG_AW(4)) u_axil (
    .clk, .rst_n,
    .req (s_axil_req), .rsp (s_axil_rsp),
    .reg_we, .reg_waddr, .reg_wdata, .reg_wstrb,
    .reg_raddr, .reg_rdata
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg    <= '0;
      bn_row <= '0;
    end else if (reg_we) begin
      case (bn_reg_e'(reg_waddr))
        BN_CFG:   {cfg.relu_en, cfg.bn_en} <= reg_wdata[1:0];
        BN_SHIFT: cfg.shift <= reg_wdata[4:0];
        BN_ROW:   bn_row    <= reg_wdata[ROW_W-1:0];
        default: ;
      endcase
    end
  end

  always_comb begin
    reg_rdata = '0;
    case (bn_reg_e'(reg_raddr))
      BN_CFG:   reg_rdata[1:0]       = {cfg.relu_en, cfg.bn_en};
      BN_SHIFT: reg_rdata[4:0]       = cfg.shift;
      BN_ROW:   reg_rdata[ROW_W-1:0] = bn_row;
      default: ;
    endcase
  end
endmodule
