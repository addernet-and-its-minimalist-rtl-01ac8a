// axi_data_port: the accelerator's AXI4 (full) data port, the "data bus"
// between the host's interconnect and the on-chip buffers.
//
// The paper moves weights and features over AXI4-full and shows the data bus
// feeding the feature, weight and batch-norm buffers, and the BN unit's
// results flowing back onto it. Here the port is an AXI4 slave with four
// 1 MiB regions selected by address bits [21:20]:
//   0 feature buffer, 1 weight buffer, 2 BN buffer  (write only)
//   3 results: output-buffer rows passed through the BN unit (read only)
// Inside a region, byte address / 4 is the word index row * WORDS + column
// of lane_buffer; results are P_OUT/(AXI_DW/DW) words per output pixel,
// lowest channels first. A beat to the wrong direction or past the end of a
// region gets SLVERR and is dropped. The region map, slave role and
// single-outstanding behaviour are this design's choices.
//
// Timing: writes take one beat per clock after the address handshake, then
// one B response. Reads take three clocks per beat (output-buffer read,
// BN unit, data), because each beat looks up the buffer afresh. Bursts are
// treated as INCR of 4-byte beats whatever awburst/awsize say.
module axi_data_port
  import addernet_pkg::*;
#(
  parameter int unsigned FEAT_WORDS = addernet_pkg::FEAT_DEPTH * P_IN * DW / AXI_DW,
  parameter int unsigned WGT_WORDS  = addernet_pkg::WGT_DEPTH * P_OUT * P_IN * DW / AXI_DW,
  parameter int unsigned BN_WORDS   = addernet_pkg::BN_DEPTH * P_OUT,
  parameter int unsigned OUT_ROWS   = addernet_pkg::OUT_DEPTH,
  parameter int unsigned RES_LANES  = P_OUT,
  localparam int unsigned FWA = $clog2(FEAT_WORDS),
  localparam int unsigned WWA = $clog2(WGT_WORDS),
  localparam int unsigned BWA = $clog2(BN_WORDS),
  localparam int unsigned ORA = $clog2(OUT_ROWS),
  localparam int unsigned LPW = AXI_DW / DW,            // result lanes per word
  localparam int unsigned RWPR = RES_LANES / LPW,       // result words per row
  localparam int unsigned RCA = (RWPR > 1) ? $clog2(RWPR) : 1
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  axi_req_t                       s_axi_req,
  output axi_rsp_t                       s_axi_rsp,
  // buffer write ports
  output logic                           feat_we,
  output logic [FWA-1:0]                 feat_waddr,
  output logic                           wgt_we,
  output logic [WWA-1:0]                 wgt_waddr,
  output logic                           bn_we,
  output logic [BWA-1:0]                 bn_waddr,
  output logic [AXI_DW-1:0]              wdata,
  output logic [AXI_DW/8-1:0]            wstrb,
  // result read: output-buffer row request, BN results two clocks later
  output logic                           res_re,
  output logic [ORA-1:0]                 res_row,
  input  logic [RES_LANES-1:0][DW-1:0]   res_data
);
  // ---------------------------------------------------------------- write
  typedef enum logic [1:0] {W_IDLE, W_DATA, W_RESP} wstate_e;
  wstate_e               wstate;
  logic [AXI_IDW-1:0]    wid;
  logic [AXI_AW-1:0]     waddr_q;
  logic [1:0]            wresp;

  region_e               wreg;
  logic [AXI_AW-1:0]     widx;       // word index inside the region
  logic                  wbeat, wok;

  assign wreg  = region_e'(waddr_q[REGION_LSB +: 2]);
  assign widx  = AXI_AW'(waddr_q[REGION_LSB-1:2]);
  assign wbeat = (wstate == W_DATA) && s_axi_req.wvalid;
  always_comb begin
    case (wreg)
      REG_FEATURE: wok = widx < FEAT_WORDS;
      REG_WEIGHT:  wok = widx < WGT_WORDS;
      REG_BN:      wok = widx < BN_WORDS;
      default:     wok = 1'b0;
    endcase
  end

  assign feat_we    = wbeat && wok && wreg == REG_FEATURE;
  assign wgt_we     = wbeat && wok && wreg == REG_WEIGHT;
  assign bn_we      = wbeat && wok && wreg == REG_BN;
  assign feat_waddr = FWA'(widx);
  assign wgt_waddr  = WWA'(widx);
  assign bn_waddr   = BWA'(widx);
  assign wdata      = s_axi_req.wdata;
  assign wstrb      = s_axi_req.wstrb;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wstate  <= W_IDLE;
      wid     <= '0;
      waddr_q <= '0;
      wresp   <= RESP_OKAY;
    end else begin
      case (wstate)
        W_IDLE: if (s_axi_req.awvalid) begin
          wid     <= s_axi_req.awid;
          waddr_q <= s_axi_req.awaddr;
          wresp   <= RESP_OKAY;
          wstate  <= W_DATA;
        end
        W_DATA: if (s_axi_req.wvalid) begin
          waddr_q <= waddr_q + 4;
          if (!wok) wresp <= RESP_SLVERR;
          if (s_axi_req.wlast) wstate <= W_RESP;
        end
        W_RESP: if (s_axi_req.bready) wstate <= W_IDLE;
        default: wstate <= W_IDLE;
      endcase
    end
  end

  // ----------------------------------------------------------------- read
  typedef enum logic [1:0] {R_IDLE, R_ISSUE, R_WAIT, R_DATA} rstate_e;
  rstate_e               rstate;
  logic [AXI_IDW-1:0]    rid;
  logic [AXI_AW-1:0]     raddr_q;
  logic [7:0]            rleft;      // beats left after the current one
  logic [AXI_AW-1:0]     ridx;
  logic                  rok;
  logic [RCA-1:0]        rcol;

  assign ridx    = AXI_AW'(raddr_q[REGION_LSB-1:2]);
  assign rok     = region_e'(raddr_q[REGION_LSB +: 2]) == REG_RESULT
                && ridx < OUT_ROWS * RWPR;
  assign res_re  = (rstate == R_ISSUE);
  assign res_row = ORA'(ridx / RWPR);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rstate  <= R_IDLE;
      rid     <= '0;
      raddr_q <= '0;
      rleft   <= '0;
      rcol    <= '0;
    end else begin
      case (rstate)
        R_IDLE: if (s_axi_req.arvalid) begin
          rid     <= s_axi_req.arid;
          raddr_q <= s_axi_req.araddr;
          rleft   <= s_axi_req.arlen;
          rstate  <= R_ISSUE;
        end
        R_ISSUE: begin
          rcol   <= RCA'(ridx % RWPR);
          rstate <= R_WAIT;
        end
        R_WAIT: rstate <= R_DATA;
        R_DATA: if (s_axi_req.rready) begin
          raddr_q <= raddr_q + 4;
          if (rleft == 0) rstate <= R_IDLE;
          else begin
            rleft  <= rleft - 1;
            rstate <= R_ISSUE;
          end
        end
        default: rstate <= R_IDLE;
      endcase
    end
  end

  logic [AXI_DW-1:0] rword;
  always_comb begin
    for (int l = 0; l < int'(LPW); l++)
      rword[l*DW +: DW] = res_data[int'(rcol) * LPW + l];
  end

  always_comb begin
    s_axi_rsp         = '0;
    s_axi_rsp.awready = (wstate == W_IDLE);
    s_axi_rsp.wready  = (wstate == W_DATA);
    s_axi_rsp.bvalid  = (wstate == W_RESP);
    s_axi_rsp.bid     = wid;
    s_axi_rsp.bresp   = wresp;
    s_axi_rsp.arready = (rstate == R_IDLE);
    s_axi_rsp.rvalid  = (rstate == R_DATA);
    s_axi_rsp.rid     = rid;
    s_axi_rsp.rdata   = rok ? rword : '0;
    s_axi_rsp.rresp   = rok ? RESP_OKAY : RESP_SLVERR;
    s_axi_rsp.rlast   = (rstate == R_DATA) && (rleft == 0);
  end

  // AXI rule: a valid, once raised, stays up until its handshake.
  a_aw_stable: assert property (@(posedge clk) disable iff (!rst_n)
    s_axi_req.awvalid && !s_axi_rsp.awready |=> s_axi_req.awvalid);
  a_ar_stable: assert property (@(posedge clk) disable iff (!rst_n)
    s_axi_req.arvalid && !s_axi_rsp.arready |=> s_axi_req.arvalid);
endmodule
