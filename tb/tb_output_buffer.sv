// tb_output_buffer: feeds groups of passes (first ... last) for random
// output rows into a small output buffer (16 rows, 4 channels) and checks
// that each stored row holds the negated sum of its passes, that the
// "stored" pulse follows each last pass by one clock, and that rows not
// written keep their earlier value.
module tb_output_buffer;
  localparam int unsigned DEPTH = 16, P_OUT = 4, SW = 10, ACC_W = 16;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_first = 0, in_last = 0, stored, re = 0;
  logic [3:0] in_addr, raddr;
  logic [P_OUT-1:0][SW-1:0] in_sum;
  logic [P_OUT-1:0][ACC_W-1:0] rdata;
  int checks = 0, failures = 0;
  int model [DEPTH][P_OUT];
  bit written [DEPTH];
  int n_stored = 0, n_last = 0;

  output_buffer #(.DEPTH(DEPTH), .P_OUT(P_OUT), .SW(SW), .ACC_W(ACC_W)) dut (
    .clk, .rst_n, .in_valid, .in_first, .in_last, .in_addr, .in_sum,
    .stored, .re, .raddr, .rdata);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // stored must pulse exactly one clock after each accepted last pass
  logic last_q = 0;
  always @(posedge clk) begin
    if (rst_n) begin
      checks++;
      if (stored !== last_q) begin
        failures++;
        $display("FAIL stored=%0b expected %0b", stored, last_q);
      end
      if (stored) n_stored++;
    end
    last_q <= in_valid && in_last;
  end

  task automatic pixel(input int row, input int passes, input bit gaps);
    int acc [P_OUT];
    for (int o = 0; o < int'(P_OUT); o++) acc[o] = 0;
    for (int p = 0; p < passes; p++) begin
      if (gaps && ($urandom % 2)) begin
        @(negedge clk) in_valid = 0;
      end
      @(negedge clk);
      in_valid = 1;
      in_first = (p == 0);
      in_last  = (p == passes - 1);
      in_addr  = 4'(row);
      for (int o = 0; o < int'(P_OUT); o++) begin
        in_sum[o] = SW'($urandom);
        acc[o] -= int'(in_sum[o]);
      end
    end
    n_last++;
    @(negedge clk) in_valid = 0;
    for (int o = 0; o < int'(P_OUT); o++) model[row][o] = acc[o];
    written[row] = 1;
  endtask

  task automatic check_row(input int row);
    @(negedge clk) begin re = 1; raddr = 4'(row); end
    @(negedge clk) re = 0;
    for (int o = 0; o < int'(P_OUT); o++) begin
      checks++;
      if ($signed(rdata[o]) != 16'(model[row][o])) begin
        failures++;
        $display("FAIL row %0d ch %0d got %0d exp %0d", row, o, $signed(rdata[o]), model[row][o]);
      end
    end
  endtask

  initial begin
    in_sum = '0; in_addr = '0; raddr = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < int'(DEPTH); r++) pixel(r, 1 + r % 5, 1'b0);
    for (int r = 0; r < int'(DEPTH); r++) check_row(r);
    for (int i = 0; i < 30; i++) begin
      int unsigned r;
      r = $urandom % DEPTH;
      pixel(int'(r), 1 + int'($urandom % 9), 1'b1);
    end
    for (int r = 0; r < int'(DEPTH); r++) check_row(r);
    checks++;
    if (n_stored != n_last) begin
      failures++;
      $display("FAIL %0d rows stored for %0d pixels", n_stored, n_last);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
