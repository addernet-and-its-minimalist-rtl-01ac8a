// AXI4 host tasks shared by the testbenches: one INCR burst of 32-bit beats
// at a time. Expects in scope: clk, the request struct and the response
// struct named by the macro arguments, and a 256-entry array "beat" of
// 32-bit words holding the burst's data.
`define AXI_TASKS(NAME, REQ, RSP)                                             \
  task automatic NAME``_wburst(input logic [31:0] addr, input int nbeats,      \
                               input logic [3:0] id, output logic [1:0] resp); \
    @(negedge clk);                                                           \
    REQ.awid    = id;                                                         \
    REQ.awaddr  = addr;                                                       \
    REQ.awlen   = 8'(nbeats - 1);                                             \
    REQ.awsize  = 3'd2;                                                       \
    REQ.awburst = 2'b01;                                                      \
    REQ.awvalid = 1'b1;                                                       \
    do @(posedge clk); while (!RSP.awready);                                  \
    @(negedge clk);                                                           \
    REQ.awvalid = 1'b0;                                                       \
    for (int i = 0; i < nbeats; i++) begin                                    \
      REQ.wdata  = beat[i];                                                   \
      REQ.wstrb  = 4'hf;                                                      \
      REQ.wlast  = (i == nbeats - 1);                                         \
      REQ.wvalid = 1'b1;                                                      \
      do @(posedge clk); while (!RSP.wready);                                 \
      @(negedge clk);                                                         \
    end                                                                       \
    REQ.wvalid = 1'b0;                                                        \
    REQ.wlast  = 1'b0;                                                        \
    REQ.bready = 1'b1;                                                        \
    while (!RSP.bvalid) @(negedge clk);                                       \
    resp = RSP.bresp;                                                         \
    if (RSP.bid != id) resp = 2'b11;                                          \
    @(negedge clk);                                                           \
    REQ.bready = 1'b0;                                                        \
  endtask                                                                     \
  task automatic NAME``_rburst(input logic [31:0] addr, input int nbeats,      \
                               input logic [3:0] id, output logic [1:0] resp, \
                               output int bad_last);                          \
    resp = 2'b00;                                                             \
    bad_last = 0;                                                             \
    @(negedge clk);                                                           \
    REQ.arid    = id;                                                         \
    REQ.araddr  = addr;                                                       \
    REQ.arlen   = 8'(nbeats - 1);                                             \
    REQ.arsize  = 3'd2;                                                       \
    REQ.arburst = 2'b01;                                                      \
    REQ.arvalid = 1'b1;                                                       \
    do @(posedge clk); while (!RSP.arready);                                  \
    @(negedge clk);                                                           \
    REQ.arvalid = 1'b0;                                                       \
    REQ.rready  = 1'b1;                                                       \
    for (int i = 0; i < nbeats; i++) begin                                    \
      while (!RSP.rvalid) @(negedge clk);                                     \
      beat[i] = RSP.rdata;                                                    \
      if (RSP.rresp != 2'b00) resp = RSP.rresp;                               \
      if (RSP.rlast != (i == nbeats - 1) || RSP.rid != id) bad_last++;        \
      @(negedge clk);                                                         \
    end                                                                       \
    REQ.rready = 1'b0;                                                        \
  endtask
