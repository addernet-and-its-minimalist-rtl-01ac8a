// tb_adder_tree: streams a new random vector into the tree every clock
// (with gaps in in_valid) and checks each sum and its latency of log2(N)
// clocks against a sum computed in the testbench. Paper size N = 64, W = 16.
module tb_adder_tree;
  localparam int unsigned N = 64, W = 16, L = 6, OW = W + L;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, out_valid;
  logic [N-1:0][W-1:0] in_data;
  logic [OW-1:0] out_sum;
  int checks = 0, failures = 0;
  int unsigned cyc = 0;
  longint exp_sum [int];     // by issue cycle
  int vld_seen = 0;

  adder_tree #(.N(N), .W(W)) dut (.clk, .rst_n, .in_valid, .in_data, .out_valid, .out_sum);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && out_valid) begin
      checks++;
      vld_seen++;
      if (!exp_sum.exists(int'(cyc) - L)) begin
        failures++;
        $display("FAIL unexpected out_valid at %0d", cyc);
      end else if (longint'(out_sum) != exp_sum[int'(cyc) - L]) begin
        failures++;
        $display("FAIL cyc %0d sum %0d exp %0d", cyc, out_sum, exp_sum[int'(cyc) - L]);
      end
    end
  end

  int sent = 0;
  initial begin
    in_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      in_valid = ($urandom % 4) != 0;
      for (int i = 0; i < int'(N); i++)
        in_data[i] = (t < 4) ? {W{1'b1}} : W'($urandom);
      if (in_valid) begin
        longint s;
        s = 0;
        for (int i = 0; i < int'(N); i++) s += longint'(in_data[i]);
        exp_sum[int'(cyc)] = s;
        sent++;
      end
    end
    @(negedge clk) in_valid = 0;
    repeat (L + 3) @(posedge clk);
    checks++;
    if (vld_seen != sent) begin
      failures++;
      $display("FAIL %0d results for %0d inputs", vld_seen, sent);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
