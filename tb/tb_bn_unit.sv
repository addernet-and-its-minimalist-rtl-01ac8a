// tb_bn_unit: applies random accumulated values, bias, gamma and settings
// to a 4-lane BN unit and checks each lane against
// sat16(relu(((x + bias) * gamma) >>> shift)) computed with 64-bit integers,
// one clock later. Covers BN on and off, ReLU on and off, and saturation at
// both ends.
module tb_bn_unit;
  import addernet_pkg::bn_cfg_t;
  localparam int unsigned P_OUT = 4, ACC_W = 32, BN_W = 16, DW = 16;
  logic clk = 0;
  logic [P_OUT-1:0][ACC_W-1:0] x;
  logic [P_OUT-1:0][BN_W-1:0] bias, gamma;
  bn_cfg_t cfg;
  logic [P_OUT-1:0][DW-1:0] y;
  int checks = 0, failures = 0;
  int n_sat_hi = 0, n_sat_lo = 0, n_relu = 0;

  bn_unit #(.P_OUT(P_OUT), .ACC_W(ACC_W), .BN_W(BN_W), .DW(DW)) dut (
    .clk, .x, .bias, .gamma, .cfg, .y);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint ref_lane(longint xv, longint bv, longint gv, bn_cfg_t c);
    longint t;
    t = c.bn_en ? (xv + bv) * gv : xv;
    t = t >>> c.shift;
    if (c.relu_en && t < 0) t = 0;
    if (t > 32767) t = 32767;
    if (t < -32768) t = -32768;
    return t;
  endfunction

  initial begin
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      cfg.bn_en   = 1'($urandom);
      cfg.relu_en = 1'($urandom);
      cfg.shift   = 5'($urandom);
      for (int o = 0; o < int'(P_OUT); o++) begin
        // mix of small and large magnitudes
        x[o]     = (i % 3 == 0) ? ACC_W'($urandom) : ACC_W'($signed(20'($urandom)));
        bias[o]  = BN_W'($urandom);
        gamma[o] = BN_W'($urandom);
      end
      @(negedge clk);
      for (int o = 0; o < int'(P_OUT); o++) begin
        longint e;
        e = ref_lane(longint'($signed(x[o])), longint'($signed(bias[o])),
                     longint'($signed(gamma[o])), cfg);
        checks++;
        if (e == 32767) n_sat_hi++;
        if (e == -32768) n_sat_lo++;
        if (e == 0 && cfg.relu_en) n_relu++;
        if (longint'($signed(y[o])) != e) begin
          failures++;
          $display("FAIL x=%0d b=%0d g=%0d cfg=%p y=%0d exp=%0d", $signed(x[o]),
                   $signed(bias[o]), $signed(gamma[o]), cfg, $signed(y[o]), e);
        end
      end
    end
    checks++;
    if (n_sat_hi == 0 || n_sat_lo == 0 || n_relu == 0) begin
      failures++;
      $display("FAIL coverage sat_hi=%0d sat_lo=%0d relu=%0d", n_sat_hi, n_sat_lo, n_relu);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
