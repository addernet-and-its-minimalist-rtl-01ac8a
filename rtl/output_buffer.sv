// output_buffer: the adder-tree output buffer. It accumulates the partial
// sums of one output pixel and stores the finished pixel.
//
// An output pixel of a layer needs Ky*Kx*CH_in/P_IN passes through the
// P_IN-wide adder trees. The first pass of a pixel loads the accumulators,
// later passes add to them, and on the last pass the total is written into
// the row given by in_addr. The AdderNet output is the negated L1 distance,
// so the accumulators subtract each tree sum. The paper only names this
// buffer; accumulating in it and applying the sign here are this design's
// choices.
//
// Interface: in_valid / in_first / in_last / in_addr / in_sum (P_OUT tree
// sums); stored (pulse: a row was written this clock); read port re / raddr,
// rdata valid the clock after re.
// Timing: accepts one pass per clock, no back-pressure.
module output_buffer #(
  parameter int unsigned DEPTH = 4096,
  parameter int unsigned P_OUT = 16,
  parameter int unsigned SW    = 22,     // tree sum width
  parameter int unsigned ACC_W = 32,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic                               in_valid,
  input  logic                               in_first,
  input  logic                               in_last,
  input  logic [AW-1:0]                      in_addr,
  input  logic [P_OUT-1:0][SW-1:0]           in_sum,
  output logic                               stored,
  input  logic                               re,
  input  logic [AW-1:0]                      raddr,
  output logic [P_OUT-1:0][ACC_W-1:0]        rdata
);
  logic [P_OUT-1:0][ACC_W-1:0] mem [DEPTH];
  logic [P_OUT-1:0][ACC_W-1:0] acc, acc_next;

  always_comb begin
    for (int o = 0; o < int'(P_OUT); o++)
      acc_next[o] = (in_first ? '0 : acc[o]) - ACC_W'(in_sum[o]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc    <= '0;
      stored <= 1'b0;
    end else begin
      stored <= in_valid && in_last;
      if (in_valid) acc <= acc_next;
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid && in_last) mem[in_addr] <= acc_next;
    if (re) rdata <= mem[raddr];
  end
endmodule
