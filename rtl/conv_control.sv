// conv_control: AXI4-Lite configuration registers and sequencer of the
// convolution path.
//
// The host writes the size of a run and starts it. The sequencer then walks
// the output pixels one after another; for each pixel it issues N_ACC passes,
// one per clock. Pass s of pixel p reads feature-buffer row
// FEAT_BASE + p*N_ACC + s and weight-buffer row WGT_BASE + s, and tags the
// pass with first / last / final flags and the output-buffer row
// OUT_BASE + p. The feature rows are therefore expected in "unrolled" order
// (the host lays out each pixel's Ky*Kx*CH_in/P_IN input vectors one after
// another), and the weight tile of the current P_OUT output channels occupies
// N_ACC consecutive rows. The paper names a "Conv Control" block on
// AXI4-Lite but gives no details; this addressing, the register map and the
// one-pass-per-clock schedule are this design's own. One pass per clock
// keeps all P_IN x P_OUT kernels busy, the rate the paper's throughput
// figures imply.
//
// Registers (word index): 0 CTRL (write bit0 = start), 1 STATUS (bit0 busy,
// bit1 done), 2 N_PIX, 3 N_ACC, 4 FEAT_BASE, 5 WGT_BASE, 6 OUT_BASE,
// 7 CYCLES (clocks from start to the last result stored).
// Datapath side: feat_re/feat_raddr and wgt_re/wgt_raddr (buffers answer one
// clock later), k_valid/k_tag (aligned with the buffer data), run_fin (pulse
// when the pass tagged final has been stored), done_irq (level, = done).
// A start while busy, or with N_PIX or N_ACC zero, is ignored.
module conv_control
  import addernet_pkg::*;
#(
  parameter int unsigned FEAT_DEPTH = addernet_pkg::FEAT_DEPTH,
  parameter int unsigned WGT_DEPTH  = addernet_pkg::WGT_DEPTH,
  parameter int unsigned OUT_DEPTH  = addernet_pkg::OUT_DEPTH,
  localparam int unsigned FAW = $clog2(FEAT_DEPTH),
  localparam int unsigned WAW = $clog2(WGT_DEPTH),
  localparam int unsigned OAW = $clog2(OUT_DEPTH)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  axil_req_t       s_axil_req,
  output axil_rsp_t       s_axil_rsp,
  output logic            feat_re,
  output logic [FAW-1:0]  feat_raddr,
  output logic            wgt_re,
  output logic [WAW-1:0]  wgt_raddr,
  output logic            k_valid,
  output conv_tag_t       k_tag,
  input  logic            run_fin,
  output logic            busy,
  output logic            done_irq
);
  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN} state_e;
  state_e state;

  logic              reg_we;
  logic [3:0]        reg_waddr, reg_raddr;
  logic [AXI_DW-1:0] reg_wdata, reg_rdata;
  logic [AXI_DW/8-1:0] reg_wstrb;

  axil_slave #(.NREG_AW(4)) u_axil (
    .clk, .rst_n,
    .req (s_axil_req), .rsp (s_axil_rsp),
    .reg_we, .reg_waddr, .reg_wdata, .reg_wstrb,
    .reg_raddr, .reg_rdata
  );

  logic [31:0] n_pix, n_acc, feat_base, wgt_base, out_base, cycles;
  logic        done;
  logic        start;

  // sequencer counters
  logic [31:0] pix, step, faddr;

  assign start = reg_we && conv_reg_e'(reg_waddr) == CONV_CTRL && reg_wdata[0]
              && state == S_IDLE && n_pix != 0 && n_acc != 0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n_pix     <= '0;
      n_acc     <= '0;
      feat_base <= '0;
      wgt_base  <= '0;
      out_base  <= '0;
    end else if (reg_we && state == S_IDLE) begin
      case (conv_reg_e'(reg_waddr))
        CONV_N_PIX:     n_pix     <= reg_wdata;
        CONV_N_ACC:     n_acc     <= reg_wdata;
        CONV_FEAT_BASE: feat_base <= reg_wdata;
        CONV_WGT_BASE:  wgt_base  <= reg_wdata;
        CONV_OUT_BASE:  out_base  <= reg_wdata;
        default: ;
      endcase
    end
  end

  always_comb begin
    reg_rdata = '0;
    case (conv_reg_e'(reg_raddr))
      CONV_STATUS:    reg_rdata = {30'd0, done, busy};
      CONV_N_PIX:     reg_rdata = n_pix;
      CONV_N_ACC:     reg_rdata = n_acc;
      CONV_FEAT_BASE: reg_rdata = feat_base;
      CONV_WGT_BASE:  reg_rdata = wgt_base;
      CONV_OUT_BASE:  reg_rdata = out_base;
      CONV_CYCLES:    reg_rdata = cycles;
      default: ;
    endcase
  end

  // ---- pass issue -------------------------------------------------------------
  logic issue, last_step, last_pix;
  assign issue     = (state == S_RUN);
  assign last_step = (step == n_acc - 1);
  assign last_pix  = (pix == n_pix - 1);

  assign feat_re    = issue;
  assign feat_raddr = FAW'(faddr);
  assign wgt_re     = issue;
  assign wgt_raddr  = WAW'(wgt_base + step);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      pix     <= '0;
      step    <= '0;
      faddr   <= '0;
      done    <= 1'b0;
      cycles  <= '0;
      k_valid <= 1'b0;
      k_tag   <= '0;
    end else begin
      // tag travels one clock behind the buffer read, aligned with its data
      k_valid     <= issue;
      k_tag.first <= (step == 0);
      k_tag.last  <= last_step;
      k_tag.fin   <= last_step && last_pix;
      k_tag.addr  <= OAW'(out_base + pix);
      if (state != S_IDLE) cycles <= cycles + 1;
      case (state)
        S_IDLE: if (start) begin
          state  <= S_RUN;
          pix    <= '0;
          step   <= '0;
          faddr  <= feat_base;
          done   <= 1'b0;
          cycles <= '0;
        end
        S_RUN: begin
          faddr <= faddr + 1;
          if (last_step) begin
            step <= '0;
            pix  <= pix + 1;
            if (last_pix) state <= S_DRAIN;
          end else begin
            step <= step + 1;
          end
        end
        S_DRAIN: if (run_fin) begin
          state <= S_IDLE;
          done  <= 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy     = (state != S_IDLE);
  assign done_irq = done;
endmodule
