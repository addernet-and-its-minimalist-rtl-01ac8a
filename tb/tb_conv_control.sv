// tb_conv_control: programs the convolution sequencer over AXI4-Lite, lets
// it run against a stand-in datapath that returns the final pass after the
// real core's delay, and checks: the feature and weight rows it reads, one
// pass per clock with no gaps, the first/last/final flags and output row of
// every pass, busy/done status, the CYCLES register
// (= N_PIX*N_ACC + 9 with this delay), and that a start while busy or with
// a zero size is ignored.
`include "tb/axil_master_tasks.svh"
module tb_conv_control;
  import addernet_pkg::*;
  localparam int unsigned DLY = 8;   // core latency 7 + store 1
  logic clk = 0, rst_n = 0;
  axil_req_t req;
  axil_rsp_t rsp;
  logic feat_re, wgt_re, k_valid, run_fin, busy, done_irq;
  logic [5:0] feat_raddr;
  logic [3:0] wgt_raddr;
  conv_tag_t k_tag;
  int checks = 0, failures = 0;

  conv_control #(.FEAT_DEPTH(64), .WGT_DEPTH(16), .OUT_DEPTH(16)) dut (
    .clk, .rst_n, .s_axil_req(req), .s_axil_rsp(rsp),
    .feat_re, .feat_raddr, .wgt_re, .wgt_raddr, .k_valid, .k_tag,
    .run_fin, .busy, .done_irq);

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
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // stand-in datapath: final flag comes back DLY clocks later
  logic [DLY-1:0] fin_sr = '0;
  always @(posedge clk) fin_sr <= {fin_sr[DLY-2:0], k_valid && k_tag.fin};
  assign run_fin = fin_sr[DLY-1];

  // monitor
  int n_pix, n_acc, fbase, wbase, obase;
  int issued = 0, n_tagged = 0, first_issue_cyc = -1, last_issue_cyc = -1;
  int cyc = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (feat_re) begin
      int p, s;
      p = issued / n_acc;
      s = issued % n_acc;
      expect_eq("feat row", feat_raddr, (fbase + issued) % 64);
      expect_eq("wgt row", wgt_raddr, (wbase + s) % 16);
      expect_eq("wgt_re", wgt_re, 1);
      if (first_issue_cyc < 0) first_issue_cyc = cyc;
      last_issue_cyc = cyc;
      issued++;
    end
    if (k_valid) begin
      int p, s;
      p = n_tagged / n_acc;
      s = n_tagged % n_acc;
      expect_eq("first", k_tag.first, s == 0);
      expect_eq("last", k_tag.last, s == n_acc - 1);
      expect_eq("fin", k_tag.fin, n_tagged == n_pix * n_acc - 1);
      expect_eq("addr", k_tag.addr, (obase + p) % 16);
      n_tagged++;
    end
  end

  task automatic run(input int np, input int na, input int fb, input int wb, input int ob);
    logic [31:0] d;
    n_pix = np; n_acc = na; fbase = fb; wbase = wb; obase = ob;
    issued = 0; n_tagged = 0; first_issue_cyc = -1;
    bus_write(4*CONV_N_PIX, np);
    bus_write(4*CONV_N_ACC, na);
    bus_write(4*CONV_FEAT_BASE, fb);
    bus_write(4*CONV_WGT_BASE, wb);
    bus_write(4*CONV_OUT_BASE, ob);
    bus_write(4*CONV_CTRL, 1);
    expect_eq("busy after start", busy, 1);
    bus_write(4*CONV_CTRL, 1);          // ignored: already running
    bus_read(4*CONV_STATUS, d);
    expect_eq("status busy", d[1:0], 2'b01);
    while (!done_irq) @(posedge clk);
    @(negedge clk);
    expect_eq("passes issued", issued, np * na);
    expect_eq("passes tagged", n_tagged, np * na);
    expect_eq("one pass per clock", last_issue_cyc - first_issue_cyc, np * na - 1);
    bus_read(4*CONV_STATUS, d);
    expect_eq("status done", d[1:0], 2'b10);
    bus_read(4*CONV_CYCLES, d);
    expect_eq("cycles", d, np * na + DLY + 1);
    bus_read(4*CONV_N_PIX, d);
    expect_eq("n_pix readback", d, np);
  endtask

  initial begin
    logic [31:0] d;
    req = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(3, 4, 5, 2, 1);
    run(1, 1, 0, 0, 0);
    run(5, 3, 40, 7, 9);
    // zero size: start ignored
    bus_write(4*CONV_N_PIX, 0);
    bus_write(4*CONV_CTRL, 1);
    repeat (3) @(posedge clk);
    expect_eq("no start with N_PIX = 0", busy, 0);
    bus_read(4*CONV_STATUS, d);
    expect_eq("done kept", d[1:0], 2'b10);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
