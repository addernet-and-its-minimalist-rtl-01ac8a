// tb_axi_data_port: AXI4 bursts against a small data port (64 feature
// words, 128 weight words, 32 BN words, 8 result rows of 4 lanes). Checks
// that each written beat reaches the right buffer at the right word index
// with its data and strobes, that results come back lane-ordered from a
// stand-in output path with the real two-clock latency, that rlast and the
// IDs are right, and that wrong-direction or out-of-range beats get SLVERR
// and write nothing.
`include "tb/axi_master_tasks.svh"
module tb_axi_data_port;
  import addernet_pkg::*;
  localparam int unsigned FW = 64, WW = 128, BWn = 32, OR = 8, RL = 4;
  logic clk = 0, rst_n = 0;
  axi_req_t req;
  axi_rsp_t rsp;
  logic feat_we, wgt_we, bn_we, res_re;
  logic [5:0] feat_waddr;
  logic [6:0] wgt_waddr;
  logic [4:0] bn_waddr;
  logic [31:0] wdata;
  logic [3:0] wstrb;
  logic [2:0] res_row;
  logic [RL-1:0][15:0] res_data;
  logic [31:0] beat [256];
  int checks = 0, failures = 0;

  axi_data_port #(.FEAT_WORDS(FW), .WGT_WORDS(WW), .BN_WORDS(BWn), .OUT_ROWS(OR), .RES_LANES(RL)) dut (
    .clk, .rst_n, .s_axi_req(req), .s_axi_rsp(rsp),
    .feat_we, .feat_waddr, .wgt_we, .wgt_waddr, .bn_we, .bn_waddr, .wdata, .wstrb,
    .res_re, .res_row, .res_data);

  always #5 clk = ~clk;
  `AXI_TASKS(bus, req, rsp)

  task automatic expect_eq(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s got %0d exp %0d", what, got, exp);
    end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // record what reaches each buffer
  logic [31:0] feat_m [FW], wgt_m [WW], bn_m [BWn];
  int n_writes = 0;
  always @(posedge clk) begin
    if (feat_we) begin feat_m[feat_waddr] <= wdata; n_writes <= n_writes + 1; end
    if (wgt_we)  begin wgt_m[wgt_waddr]   <= wdata; n_writes <= n_writes + 1; end
    if (bn_we)   begin bn_m[bn_waddr]     <= wdata; n_writes <= n_writes + 1; end
    if ((feat_we || wgt_we || bn_we) && wstrb != 4'hf) begin
      checks++; failures++;
      $display("FAIL strobe %h", wstrb);
    end
  end

  // stand-in for output buffer + BN unit: two clocks from res_re to data
  function automatic logic [15:0] lane_val(input int row, input int l);
    return 16'(16'h1000 + row * 16 + l);
  endfunction
  logic [2:0] row_q;
  always @(posedge clk) begin
    if (res_re) row_q <= res_row;
    for (int l = 0; l < int'(RL); l++) res_data[l] <= lane_val(int'(row_q), l);
  end

  initial begin
    logic [1:0] resp;
    int bad;
    int n_before;
    req = '0;
    for (int i = 0; i < int'(FW); i++) feat_m[i] = '0;
    for (int i = 0; i < int'(WW); i++) wgt_m[i] = '0;
    for (int i = 0; i < int'(BWn); i++) bn_m[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // feature region: whole buffer in one burst
    for (int i = 0; i < int'(FW); i++) beat[i] = $urandom();
    bus_wburst(32'h0000_0000, FW, 4'h3, resp);
    expect_eq("feat bresp", resp, 0);
    for (int i = 0; i < int'(FW); i++) expect_eq("feat word", feat_m[i], beat[i]);

    // weight region, burst starting mid-buffer
    for (int i = 0; i < 40; i++) beat[i] = $urandom();
    bus_wburst(32'h0010_0000 + 4 * 17, 40, 4'h5, resp);
    expect_eq("wgt bresp", resp, 0);
    for (int i = 0; i < 40; i++) expect_eq("wgt word", wgt_m[17 + i], beat[i]);

    // BN region
    for (int i = 0; i < int'(BWn); i++) beat[i] = $urandom();
    bus_wburst(32'h0020_0000, BWn, 4'h9, resp);
    expect_eq("bn bresp", resp, 0);
    for (int i = 0; i < int'(BWn); i++) expect_eq("bn word", bn_m[i], beat[i]);

    // write to the result region: SLVERR, nothing written
    n_before = n_writes;
    bus_wburst(32'h0030_0000, 4, 4'h1, resp);
    expect_eq("result write slverr", resp, RESP_SLVERR);
    // burst running past the end of the BN region: last beats refused
    bus_wburst(32'h0020_0000 + 4 * (BWn - 2), 4, 4'h2, resp);
    expect_eq("overrun slverr", resp, RESP_SLVERR);
    expect_eq("only in-range beats written", n_writes - n_before, 2);

    // read all results: 8 rows x 2 words
    bus_rburst(32'h0030_0000, OR * RL / 2, 4'h7, resp, bad);
    expect_eq("read rresp", resp, 0);
    expect_eq("rlast / rid", bad, 0);
    for (int w = 0; w < int'(OR * RL / 2); w++) begin
      int r, c;
      r = w / 2; c = w % 2;
      expect_eq("result lo", beat[w][15:0],  lane_val(r, 2 * c));
      expect_eq("result hi", beat[w][31:16], lane_val(r, 2 * c + 1));
    end
    // single-beat read in the middle
    bus_rburst(32'h0030_0000 + 4 * 11, 1, 4'hc, resp, bad);
    expect_eq("single rlast", bad, 0);
    expect_eq("single lo", beat[0][15:0], lane_val(5, 2));
    // reading the feature region is refused
    bus_rburst(32'h0000_0000, 2, 4'h1, resp, bad);
    expect_eq("feature read slverr", resp, RESP_SLVERR);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
