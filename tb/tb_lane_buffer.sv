// tb_lane_buffer: writes random words with random byte enables into a small
// lane buffer (16 rows of 4 words) and reads whole rows back, comparing them
// with a model kept in the testbench; also checks the one-clock read latency
// (rdata must not change until the clock after re).
module tb_lane_buffer;
  localparam int unsigned DEPTH = 16, WORDS = 4, BW = 32;
  logic clk = 0;
  logic we = 0, re = 0;
  logic [5:0] waddr;
  logic [BW-1:0] wdata;
  logic [3:0] wstrb;
  logic [3:0] raddr;
  logic [WORDS-1:0][BW-1:0] rdata;
  logic [WORDS-1:0][BW-1:0] model [DEPTH];
  int checks = 0, failures = 0;

  lane_buffer #(.DEPTH(DEPTH), .WORDS(WORDS), .BW(BW)) dut (
    .clk, .we, .waddr, .wdata, .wstrb, .re, .raddr, .rdata);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic do_write(input int a, input logic [BW-1:0] d, input logic [3:0] s);
    @(negedge clk);
    we = 1; waddr = 6'(a); wdata = d; wstrb = s;
    for (int b = 0; b < 4; b++)
      if (s[b]) model[a / WORDS][a % WORDS][8*b +: 8] = d[8*b +: 8];
    @(negedge clk);
    we = 0;
  endtask

  task automatic do_read(input int r);
    logic [WORDS-1:0][BW-1:0] prev_row;
    @(negedge clk);
    re = 1; raddr = 4'(r);
    prev_row = rdata;
    #1;
    checks++;
    if (rdata !== prev_row) begin
      failures++;
      $display("FAIL rdata changed prev_row the clock");
    end
    @(negedge clk);
    re = 0;
    checks++;
    if (rdata !== model[r]) begin
      failures++;
      $display("FAIL row %0d got %h exp %h", r, rdata, model[r]);
    end
  endtask

  initial begin
    // fill every word once with full strobes so the model is defined
    for (int a = 0; a < int'(DEPTH * WORDS); a++) do_write(a, $urandom(), 4'hf);
    for (int r = 0; r < int'(DEPTH); r++) do_read(r);
    for (int i = 0; i < 200; i++) begin
      int unsigned a;
      logic [3:0] st;
      a  = $urandom % (DEPTH * WORDS);
      st = 4'($urandom() % 16);
      do_write(int'(a), $urandom(), st);
    end
    for (int r = 0; r < int'(DEPTH); r++) do_read(r);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
