// tb_addernet_accel: end-to-end test of the accelerator at its full size
// (P_IN = 64, P_OUT = 16, 16-bit data, no parameter overrides).
//
// The testbench plays the host: it writes features, weights and BN
// parameters over the AXI4 data port, programs conv control and BN control
// over AXI4-Lite, starts runs, waits for done_irq and reads the results back.
// Every result word is compared with a model computed here:
//   acc[p][o] = - sum over passes s and channels i of |f[p,s][i] - w[s][o][i]|
//   y = sat16(relu(((acc + bias) * gamma) >>> shift))   (BN on)
//   y = sat16(relu(acc >>> shift))                      (BN off)
// It also checks the run time (N_PIX*N_ACC + 9 clocks: one pass per clock
// plus the pipeline) and counts each mechanism: multi-pass accumulation,
// single-pass pixels, BN on and off, ReLU clamping, saturation, base
// offsets. A mechanism that never occurred counts as a failure.
`include "tb/axil_master_tasks.svh"
`include "tb/axi_master_tasks.svh"
module tb_addernet_accel;
  import addernet_pkg::*;
  localparam int unsigned MAX_ROWS = 64, MAX_ACC = 4;

  logic clk = 0, rst_n = 0;
  axil_req_t conv_req, bn_req;
  axil_rsp_t conv_rsp, bn_rsp;
  axi_req_t  req;
  axi_rsp_t  rsp;
  logic      done_irq;
  logic [31:0] beat [256];
  int checks = 0, failures = 0;

  addernet_accel dut (
    .clk, .rst_n,
    .s_axil_conv_req (conv_req), .s_axil_conv_rsp (conv_rsp),
    .s_axil_bn_req   (bn_req),   .s_axil_bn_rsp   (bn_rsp),
    .s_axi_req       (req),      .s_axi_rsp       (rsp),
    .done_irq);

  always #2 clk = ~clk;
  `AXIL_TASKS(conv, conv_req, conv_rsp)
  `AXIL_TASKS(bnc, bn_req, bn_rsp)
  `AXI_TASKS(bus, req, rsp)

  task automatic expect_eq(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s got %0d exp %0d", what, got, exp);
    end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- host copies of the data
  int feat [MAX_ROWS][P_IN];          // feature-buffer rows (relative to FEAT_BASE)
  int wgt  [MAX_ACC][P_OUT][P_IN];    // weight rows (relative to WGT_BASE)
  int bias [P_OUT], gamma [P_OUT];
  longint acc [128][P_OUT];           // expected sums by output-buffer row
  logic [1:0] resp_g;

  // mechanism counters
  int n_multi_pass = 0, n_single_pass = 0, n_bn_on = 0, n_bn_off = 0;
  int n_relu = 0, n_sat = 0, n_offset = 0, n_done = 0;

  function automatic logic [31:0] pack2(input int lo, input int hi);
    return {16'(hi), 16'(lo)};
  endfunction

  task automatic load_features(input int base, input int rows, input int range_);
    for (int r = 0; r < rows; r++)
      for (int i = 0; i < int'(P_IN); i++)
        feat[r][i] = int'($urandom() % (2 * range_)) - range_;
    // 32 words per row; write in bursts of up to 256 words
    for (int r0 = 0; r0 < rows; r0 += 8) begin
      int n;
      n = 0;
      for (int r = r0; r < r0 + 8 && r < rows; r++)
        for (int c = 0; c < int'(P_IN / 2); c++) beat[n++] = pack2(feat[r][2*c], feat[r][2*c+1]);
      bus_wburst(32'h0000_0000 + 4 * (base + r0) * (P_IN / 2), n, 4'h1, resp_g);
      expect_eq("feature bresp", resp_g, 0);
    end
  endtask

  task automatic load_weights(input int base, input int rows, input int range_);
    for (int r = 0; r < rows; r++)
      for (int o = 0; o < int'(P_OUT); o++)
        for (int i = 0; i < int'(P_IN); i++)
          wgt[r][o][i] = int'($urandom() % (2 * range_)) - range_;
    // 512 words per row, two bursts of 256
    for (int r = 0; r < rows; r++)
      for (int h = 0; h < 2; h++) begin
        for (int k = 0; k < 256; k++) begin
          int lane;
          lane = (h * 256 + k) * 2;
          beat[k] = pack2(wgt[r][lane / P_IN][lane % P_IN], wgt[r][(lane + 1) / P_IN][(lane + 1) % P_IN]);
        end
        bus_wburst(32'h0010_0000 + 4 * ((base + r) * 512 + h * 256), 256, 4'h2, resp_g);
        expect_eq("weight bresp", resp_g, 0);
      end
  endtask

  task automatic load_bn(input int row);
    for (int o = 0; o < int'(P_OUT); o++) begin
      bias[o]  = int'($urandom() % 4001) - 2000;
      gamma[o] = int'($urandom() % 601) - 300;
      beat[o]  = pack2(bias[o], gamma[o]);
    end
    bus_wburst(32'h0020_0000 + 4 * row * P_OUT, P_OUT, 4'h3, resp_g);
    expect_eq("bn bresp", resp_g, 0);
  endtask

  task automatic run_conv(input int np, input int na, input int fb, input int wb, input int ob);
    logic [31:0] d;
    // model
    for (int p = 0; p < np; p++)
      for (int o = 0; o < int'(P_OUT); o++) begin
        acc[ob + p][o] = 0;
        for (int s = 0; s < na; s++)
          for (int i = 0; i < int'(P_IN); i++) begin
            int df;
            df = feat[p * na + s][i] - wgt[s][o][i];
            acc[ob + p][o] -= (df < 0) ? -df : df;
          end
      end
    if (na > 1) n_multi_pass += np; else n_single_pass += np;
    if (fb != 0 || ob != 0) n_offset++;
    conv_write(4 * CONV_N_PIX, np);
    conv_write(4 * CONV_N_ACC, na);
    conv_write(4 * CONV_FEAT_BASE, fb);
    conv_write(4 * CONV_WGT_BASE, wb);
    conv_write(4 * CONV_OUT_BASE, ob);
    conv_write(4 * CONV_CTRL, 1);
    while (!done_irq) @(posedge clk);
    n_done++;
    conv_read(4 * CONV_CYCLES, d);
    expect_eq("run cycles", d, np * na + 9);
    conv_read(4 * CONV_STATUS, d);
    expect_eq("status done", d[1:0], 2'b10);
  endtask

  task automatic check_results(input int np, input int ob, input bit bn_en, input bit relu, input int sh);
    int bad;
    bnc_write(4 * BN_CFG, {30'd0, relu, bn_en});
    bnc_write(4 * BN_SHIFT, sh);
    bus_rburst(32'h0030_0000 + 4 * ob * (P_OUT / 2), np * P_OUT / 2, 4'h4, resp_g, bad);
    expect_eq("result rresp", resp_g, 0);
    expect_eq("result rlast", bad, 0);
    for (int p = 0; p < np; p++)
      for (int o = 0; o < int'(P_OUT); o++) begin
        longint t;
        logic [15:0] got;
        t = bn_en ? (acc[ob + p][o] + bias[o]) * gamma[o] : acc[ob + p][o];
        t = t >>> sh;
        if (relu && t < 0) begin t = 0; n_relu++; end
        if (t > 32767)  begin t = 32767;  n_sat++; end
        if (t < -32768) begin t = -32768; n_sat++; end
        got = beat[(p * P_OUT + o) / 2][16 * (o % 2) +: 16];
        expect_eq("result", longint'($signed(got)), t);
        if (bn_en) n_bn_on++; else n_bn_off++;
      end
  endtask

  initial begin
    conv_req = '0; bn_req = '0; req = '0;
    repeat (4) @(posedge clk);
    rst_n = 1;

    // run 1: 4 pixels x 3 passes (a 3 x 3 x 192 window would need 27),
    // small values so BN arithmetic stays in range
    load_features(0, 12, 100);
    load_weights(0, 3, 100);
    load_bn(5);
    bnc_write(4 * BN_ROW, 5);
    run_conv(4, 3, 0, 0, 0);
    check_results(4, 0, 1'b0, 1'b0, 4);    // BN off, no ReLU
    check_results(4, 0, 1'b1, 1'b1, 6);    // BN on, ReLU
    check_results(4, 0, 1'b0, 1'b0, 0);    // no shift: saturation

    // run 2: 6 single-pass pixels, full 16-bit range, offsets everywhere
    load_features(20, 6, 32768);
    load_weights(1, 1, 32768);
    run_conv(6, 1, 20, 1, 100);
    check_results(6, 100, 1'b0, 1'b1, 8);
    // run 1's results are still in place
    check_results(4, 0, 1'b1, 1'b0, 6);

    expect_eq("done seen", n_done, 2);
    $display("mechanisms: multi_pass=%0d single_pass=%0d bn_on=%0d bn_off=%0d relu=%0d sat=%0d offset_runs=%0d done=%0d",
             n_multi_pass, n_single_pass, n_bn_on, n_bn_off, n_relu, n_sat, n_offset, n_done);
    expect_eq("multi-pass accumulation seen", n_multi_pass > 0, 1);
    expect_eq("single-pass pixels seen", n_single_pass > 0, 1);
    expect_eq("BN on seen", n_bn_on > 0, 1);
    expect_eq("BN off seen", n_bn_off > 0, 1);
    expect_eq("ReLU clamp seen", n_relu > 0, 1);
    expect_eq("saturation seen", n_sat > 0, 1);
    expect_eq("base offsets seen", n_offset > 0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
