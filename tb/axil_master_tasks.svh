// AXI4-Lite host tasks shared by the testbenches. Expects in scope: clk,
// an axil_req_t named by the macro argument's request and an axil_rsp_t
// for its response. Each task drives on the falling edge and waits for the
// handshakes on the rising edge.
`define AXIL_TASKS(NAME, REQ, RSP)                                           \
  task automatic NAME``_write(input int unsigned addr, input logic [31:0] data); \
    @(negedge clk);                                                          \
    REQ.awaddr  = 8'(addr);                                                  \
    REQ.awvalid = 1'b1;                                                      \
    REQ.wdata   = data;                                                      \
    REQ.wstrb   = 4'hf;                                                      \
    REQ.wvalid  = 1'b1;                                                      \
    REQ.bready  = 1'b1;                                                      \
    do @(posedge clk); while (!(RSP.awready && RSP.wready));                 \
    @(negedge clk);                                                          \
    REQ.awvalid = 1'b0;                                                      \
    REQ.wvalid  = 1'b0;                                                      \
    while (!RSP.bvalid) @(negedge clk);                                      \
    @(negedge clk);                                                          \
    REQ.bready  = 1'b0;                                                      \
  endtask                                                                    \
  task automatic NAME``_read(input int unsigned addr, output logic [31:0] data); \
    @(negedge clk);                                                          \
    REQ.araddr  = 8'(addr);                                                  \
    REQ.arvalid = 1'b1;                                                      \
    REQ.rready  = 1'b1;                                                      \
    do @(posedge clk); while (!RSP.arready);                                 \
    @(negedge clk);                                                          \
    REQ.arvalid = 1'b0;                                                      \
    while (!RSP.rvalid) @(negedge clk);                                      \
    data = RSP.rdata;                                                        \
    @(negedge clk);                                                          \
    REQ.rready  = 1'b0;                                                      \
  endtask
