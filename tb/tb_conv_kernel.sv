// tb_conv_kernel: drives random signed feature and weight vectors into a
// reduced convolution core (P_IN = 8, P_OUT = 4, DW = 8) every clock and
// checks every output channel's sum of |feature - weight|, the side band
// and the latency of 1 + log2(P_IN) clocks.
module tb_conv_kernel;
  localparam int unsigned DW = 8, P_IN = 8, P_OUT = 4, TAG_W = 10;
  localparam int unsigned SW = DW + 3, LAT = 4;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, out_valid;
  logic [P_IN-1:0][DW-1:0] feature;
  logic [P_OUT-1:0][P_IN-1:0][DW-1:0] weight;
  logic [TAG_W-1:0] in_tag, out_tag;
  logic [P_OUT-1:0][SW-1:0] out_sum;
  int checks = 0, failures = 0;
  int unsigned cyc = 0;
  int exp_sum [int][P_OUT];
  int exp_tag [int];
  int got = 0, sent = 0;

  conv_kernel #(.DW(DW), .P_IN(P_IN), .P_OUT(P_OUT), .TAG_W(TAG_W)) dut (
    .clk, .rst_n, .in_valid, .feature, .weight, .in_tag,
    .out_valid, .out_sum, .out_tag);

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
      int k;
      k = int'(cyc) - int'(LAT);
      got++;
      if (!exp_tag.exists(k)) begin
        checks++; failures++;
        $display("FAIL unexpected output at cycle %0d", cyc);
      end else begin
        for (int o = 0; o < int'(P_OUT); o++) begin
          checks++;
          if (int'(out_sum[o]) != exp_sum[k][o]) begin
            failures++;
            $display("FAIL cyc %0d ch %0d sum %0d exp %0d", cyc, o, out_sum[o], exp_sum[k][o]);
          end
        end
        checks++;
        if (int'(out_tag) != exp_tag[k]) begin
          failures++;
          $display("FAIL tag %0d exp %0d", out_tag, exp_tag[k]);
        end
      end
    end
  end

  initial begin
    feature = '0; weight = '0; in_tag = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      in_valid = ($urandom % 3) != 0;
      in_tag   = TAG_W'($urandom);
      for (int i = 0; i < int'(P_IN); i++) feature[i] = DW'($urandom);
      for (int o = 0; o < int'(P_OUT); o++)
        for (int i = 0; i < int'(P_IN); i++) weight[o][i] = DW'($urandom);
      if (t == 0) begin   // extreme case: -128 against 127 everywhere
        feature = {P_IN{8'h80}};
        weight  = {(P_OUT*P_IN){8'h7f}};
      end
      if (in_valid) begin
        for (int o = 0; o < int'(P_OUT); o++) begin
          int s;
          s = 0;
          for (int i = 0; i < int'(P_IN); i++) begin
            int d;
            d = int'($signed(feature[i])) - int'($signed(weight[o][i]));
            s += (d < 0) ? -d : d;
          end
          exp_sum[int'(cyc)][o] = s;
        end
        exp_tag[int'(cyc)] = int'(in_tag);
        sent++;
      end
    end
    @(negedge clk) in_valid = 0;
    repeat (LAT + 3) @(posedge clk);
    checks++;
    if (got != sent) begin
      failures++;
      $display("FAIL %0d outputs for %0d inputs", got, sent);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
