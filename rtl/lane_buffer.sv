// lane_buffer: on-chip buffer written one bus word at a time and read one
// whole row at a time.
//
// The accelerator's feature, weight and batch-norm buffers are all this
// module with different sizes. The host fills them word by word over the
// AXI4 data port; the datapath reads a full row (P_IN features, P_OUT x P_IN
// weights or P_OUT BN pairs) in one clock. The paper names the buffers but
// gives neither their size nor their organisation; the row layout and depths
// are this design's choice.
//
// Interface: write port we / waddr (word index, row * WORDS + column) /
// wdata / wstrb (byte enables); read port re / raddr (row) / rdata (row).
// Timing: writes take effect at the clock edge; rdata is registered and
// valid the clock after re. WORDS must be a power of two.
module lane_buffer #(
  parameter int unsigned DEPTH = 4096,   // rows
  parameter int unsigned WORDS = 32,     // bus words per row
  parameter int unsigned BW    = 32,     // bus word width
  localparam int unsigned RAW  = $clog2(DEPTH),
  localparam int unsigned CAW  = $clog2(WORDS),
  localparam int unsigned WAW  = RAW + CAW
) (
  input  logic                      clk,
  input  logic                      we,
  input  logic [WAW-1:0]            waddr,
  input  logic [BW-1:0]             wdata,
  input  logic [BW/8-1:0]           wstrb,
  input  logic                      re,
  input  logic [RAW-1:0]            raddr,
  output logic [WORDS-1:0][BW-1:0]  rdata
);
  logic [WORDS-1:0][BW-1:0] mem [DEPTH];

  logic [RAW-1:0] wrow;
  logic [CAW-1:0] wcol;
  assign wrow = waddr[WAW-1:CAW];
  assign wcol = waddr[CAW-1:0];

  always_ff @(posedge clk) begin
    if (we) begin
      for (int b = 0; b < int'(BW/8); b++)
        if (wstrb[b]) mem[wrow][wcol][8*b +: 8] <= wdata[8*b +: 8];
    end
    if (re) rdata <= mem[raddr];
  end
endmodule
