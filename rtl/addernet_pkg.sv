// addernet_pkg: sizes, register map and bus types shared by the AdderNet
// convolution accelerator.
//
// The accelerator computes AdderNet layers, in which every multiply of a
// convolution is replaced by the L1 distance: out = -sum |feature - weight|.
// Features and weights share one quantisation scale, so the kernel subtracts
// the raw integers without aligning binary points first.
//
// Paper numbers: data width DW = 16, P_IN = 64 input channels summed per
// adder tree, P_IN * P_OUT = 1024 kernels (so P_OUT = 16). Everything else
// here (buffer depths, bus widths, register map, accumulator width) is this
// design's own choice.
package addernet_pkg;

  // ---- datapath sizes -------------------------------------------------------
  parameter int unsigned DW        = 16;   // feature / weight width (paper)
  parameter int unsigned P_IN      = 64;   // input channels per adder tree (paper)
  parameter int unsigned P_OUT     = 16;   // output channels in parallel (1024 / 64)
  parameter int unsigned ACC_W     = 32;   // output-buffer accumulator width (own choice)
  parameter int unsigned BN_W      = 16;   // BN bias / gamma width (own choice)

  // ---- on-chip buffer depths (own choice) ----------------------------------
  parameter int unsigned FEAT_DEPTH = 4096; // rows of P_IN features
  parameter int unsigned WGT_DEPTH  = 128;  // rows of P_OUT x P_IN weights
  parameter int unsigned BN_DEPTH   = 32;   // rows of P_OUT (bias, gamma) pairs
  parameter int unsigned OUT_DEPTH  = 4096; // rows of P_OUT accumulated sums

  // ---- AXI ----------------------------------------------------------------
  parameter int unsigned AXI_DW    = 32;    // data bus width, both AXI4-Lite and AXI4
  parameter int unsigned AXI_AW    = 32;
  parameter int unsigned AXI_IDW   = 4;
  parameter int unsigned AXIL_AW   = 8;     // AXI4-Lite register window: 64 words

  // AXI4 data-port address map: bits [21:20] select the region, the rest is
  // a byte address inside it (32-bit words, row-major).
  parameter int unsigned REGION_LSB = 20;
  typedef enum logic [1:0] {
    REG_FEATURE = 2'd0,   // write: feature buffer
    REG_WEIGHT  = 2'd1,   // write: weight buffer
    REG_BN      = 2'd2,   // write: BN buffer
    REG_RESULT  = 2'd3    // read : output buffer passed through the BN unit
  } region_e;

  // AXI response codes
  parameter logic [1:0] RESP_OKAY   = 2'b00;
  parameter logic [1:0] RESP_SLVERR = 2'b10;

  // ---- conv control register map (word index) -----------------------------
  typedef enum logic [3:0] {
    CONV_CTRL      = 4'd0,  // W: bit0 = start
    CONV_STATUS    = 4'd1,  // R: bit0 = busy, bit1 = done
    CONV_N_PIX     = 4'd2,  // output pixels in this run
    CONV_N_ACC     = 4'd3,  // accumulation steps per pixel (Ky*Kx*CH_in/P_IN)
    CONV_FEAT_BASE = 4'd4,  // first feature-buffer row
    CONV_WGT_BASE  = 4'd5,  // first weight-buffer row
    CONV_OUT_BASE  = 4'd6,  // first output-buffer row
    CONV_CYCLES    = 4'd7   // R: clock cycles of the last run
  } conv_reg_e;

  // ---- BN control register map (word index) --------------------------------
  typedef enum logic [3:0] {
    BN_CFG   = 4'd0,        // bit0 = BN enable, bit1 = ReLU enable
    BN_SHIFT = 4'd1,        // arithmetic right shift after the multiply (0..31)
    BN_ROW   = 4'd2         // BN-buffer row used for the current output-channel group
  } bn_reg_e;

  typedef struct packed {
    logic       bn_en;
    logic       relu_en;
    logic [4:0] shift;
  } bn_cfg_t;

  // Side band that travels with each pass through the convolution core.
  parameter int unsigned OUT_AW = $clog2(OUT_DEPTH);
  typedef struct packed {
    logic              first;  // first pass of an output pixel
    logic              last;   // last pass of an output pixel
    logic              fin;    // last pass of the whole run
    logic [OUT_AW-1:0] addr;   // output-buffer row of the pixel
  } conv_tag_t;

  // ---- bus types --------------------------------------------------------------
  typedef struct packed {
    logic [AXIL_AW-1:0]  awaddr;
    logic                awvalid;
    logic [AXI_DW-1:0]   wdata;
    logic [AXI_DW/8-1:0] wstrb;
    logic                wvalid;
    logic                bready;
    logic [AXIL_AW-1:0]  araddr;
    logic                arvalid;
    logic                rready;
  } axil_req_t;

  typedef struct packed {
    logic                awready;
    logic                wready;
    logic [1:0]          bresp;
    logic                bvalid;
    logic                arready;
    logic [AXI_DW-1:0]   rdata;
    logic [1:0]          rresp;
    logic                rvalid;
  } axil_rsp_t;

  typedef struct packed {
    logic [AXI_IDW-1:0]  awid;
    logic [AXI_AW-1:0]   awaddr;
    logic [7:0]          awlen;
    logic [2:0]          awsize;
    logic [1:0]          awburst;
    logic                awvalid;
    logic [AXI_DW-1:0]   wdata;
    logic [AXI_DW/8-1:0] wstrb;
    logic                wlast;
    logic                wvalid;
    logic                bready;
    logic [AXI_IDW-1:0]  arid;
    logic [AXI_AW-1:0]   araddr;
    logic [7:0]          arlen;
    logic [2:0]          arsize;
    logic [1:0]          arburst;
    logic                arvalid;
    logic                rready;
  } axi_req_t;

  typedef struct packed {
    logic                awready;
    logic                wready;
    logic [AXI_IDW-1:0]  bid;
    logic [1:0]          bresp;
    logic                bvalid;
    logic                arready;
    logic [AXI_IDW-1:0]  rid;
    logic [AXI_DW-1:0]   rdata;
    logic [1:0]          rresp;
    logic                rlast;
    logic                rvalid;
  } axi_rsp_t;

endpackage
