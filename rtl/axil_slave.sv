// axil_slave: AXI4-Lite slave front end that turns bus transfers into
// single-cycle register accesses for a small register file.
//
// Both configuration blocks of the accelerator (conv control and BN control)
// sit on AXI4-Lite, as in the paper's block diagram; this module is the part
// they share. The handshake details are this design's choice.
//
// Interface: req / rsp (AXI4-Lite, 32-bit data, byte addresses); register
// side: reg_we / reg_waddr (word index) / reg_wdata / reg_wstrb, and
// reg_raddr (word index, follows araddr combinationally) / reg_rdata.
// Timing: a write is accepted in the clock where awvalid and wvalid are both
// high and reg_we pulses in that clock; bvalid follows one clock later. A
// read is accepted when arvalid is high and no read data is pending;
// reg_rdata is sampled in that clock and rvalid follows one clock later.
// One transfer of each kind is in flight at a time.
module axil_slave
  import addernet_pkg::*;
#(
  parameter int unsigned NREG_AW = 4   // register index width
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  axil_req_t            req,
  output axil_rsp_t            rsp,
  output logic                 reg_we,
  output logic [NREG_AW-1:0]   reg_waddr,
  output logic [AXI_DW-1:0]    reg_wdata,
  output logic [AXI_DW/8-1:0]  reg_wstrb,
  output logic [NREG_AW-1:0]   reg_raddr,
  input  logic [AXI_DW-1:0]    reg_rdata
);
  logic bvalid_q, rvalid_q;
  logic [AXI_DW-1:0] rdata_q;
  logic wr_go, rd_go;

  assign wr_go = req.awvalid && req.wvalid && !bvalid_q;
  assign rd_go = req.arvalid && !rvalid_q;

  assign reg_we    = wr_go;
  assign reg_waddr = req.awaddr[2 +: NREG_AW];
  assign reg_wdata = req.wdata;
  assign reg_wstrb = req.wstrb;
  assign reg_raddr = req.araddr[2 +: NREG_AW];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bvalid_q <= 1'b0;
      rvalid_q <= 1'b0;
      rdata_q  <= '0;
    end else begin
      if (wr_go)                      bvalid_q <= 1'b1;
      else if (bvalid_q && req.bready) bvalid_q <= 1'b0;
      if (rd_go) begin
        rvalid_q <= 1'b1;
        rdata_q  <= reg_rdata;
      end else if (rvalid_q && req.rready) begin
        rvalid_q <= 1'b0;
      end
    end
  end

  always_comb begin
    rsp         = '0;
    rsp.awready = wr_go;
    rsp.wready  = wr_go;
    rsp.bvalid  = bvalid_q;
    rsp.bresp   = RESP_OKAY;
    rsp.arready = rd_go;
    rsp.rvalid  = rvalid_q;
    rsp.rdata   = rdata_q;
    rsp.rresp   = RESP_OKAY;
  end

  // AXI rule: a valid, once raised, stays up until its handshake.
  a_aw_stable: assert property (@(posedge clk) disable iff (!rst_n)
    req.awvalid && !rsp.awready |=> req.awvalid);
  a_w_stable:  assert property (@(posedge clk) disable iff (!rst_n)
    req.wvalid && !rsp.wready |=> req.wvalid);
  a_ar_stable: assert property (@(posedge clk) disable iff (!rst_n)
    req.arvalid && !rsp.arready |=> req.arvalid);
endmodule
