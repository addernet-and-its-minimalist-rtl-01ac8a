// tb_bn_control: writes the BN control registers over AXI4-Lite and checks
// both the read-back values and the configuration outputs that drive the
// BN unit, including the reset values.
`include "tb/axil_master_tasks.svh"
module tb_bn_control;
  import addernet_pkg::*;
  logic clk = 0, rst_n = 0;
  axil_req_t req;
  axil_rsp_t rsp;
  bn_cfg_t   cfg;
  logic [4:0] bn_row;
  int checks = 0, failures = 0;

  bn_control #(.BN_DEPTH(32)) dut (.clk, .rst_n, .s_axil_req(req), .s_axil_rsp(rsp), .cfg, .bn_row);

  always #5 clk = ~clk;
  `AXIL_TASKS(bus, req, rsp)

  task automatic expect_eq(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s got %0d exp %0d", what, got, exp);
    end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d;
    req = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    expect_eq("reset cfg", cfg, 0);
    expect_eq("reset row", bn_row, 0);
    for (int i = 0; i < 40; i++) begin
      logic [1:0] c;
      logic [4:0] sh, rw;
      c  = 2'($urandom());
      sh = 5'($urandom());
      rw = 5'($urandom());
      bus_write(0, {30'd0, c});
      bus_write(4, {27'd0, sh});
      bus_write(8, {27'd0, rw});
      expect_eq("bn_en", cfg.bn_en, c[0]);
      expect_eq("relu_en", cfg.relu_en, c[1]);
      expect_eq("shift", cfg.shift, sh);
      expect_eq("row", bn_row, rw);
      bus_read(0, d); expect_eq("rd cfg", d, c);
      bus_read(4, d); expect_eq("rd shift", d, sh);
      bus_read(8, d); expect_eq("rd row", d, rw);
      bus_read(12, d); expect_eq("rd unused", d, 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
