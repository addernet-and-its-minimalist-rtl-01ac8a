// bn_unit: batch normalisation and activation on P_OUT accumulated results.
//
// Per lane: t = (x + bias) * gamma, then an arithmetic right shift that
// rescales to the shared quantisation step, then ReLU, then saturation to
// DW signed bits so the result can feed the next layer. The paper's block
// diagram lists this unit as "Adder, Multiply, Activation" and that order
// is kept; the shift, the choice of ReLU and the saturation are this
// design's own. With bn_en low the add and multiply are skipped (x is only
// shifted, activated and saturated).
//
// Interface: x (P_OUT x ACC_W signed), bias / gamma (P_OUT x BN_W signed),
// cfg (bn_en, relu_en, shift); y (P_OUT x DW signed).
// Timing: one registered stage; y is valid the clock after x.
module bn_unit
  import addernet_pkg::bn_cfg_t;
#(
  parameter int unsigned P_OUT = 16,
  parameter int unsigned ACC_W = 32,
  parameter int unsigned BN_W  = 16,
  parameter int unsigned DW    = 16
) (
  input  logic                         clk,
  input  logic [P_OUT-1:0][ACC_W-1:0]  x,
  input  logic [P_OUT-1:0][BN_W-1:0]   bias,
  input  logic [P_OUT-1:0][BN_W-1:0]   gamma,
  input  bn_cfg_t                      cfg,
  output logic [P_OUT-1:0][DW-1:0]     y
);
  localparam int unsigned PW = ACC_W + 1 + BN_W;   // product width

  localparam logic signed [PW-1:0] MAXV = PW'((1 << (DW-1)) - 1);
  localparam logic signed [PW-1:0] MINV = -PW'(1 << (DW-1));

  logic signed [PW-1:0] t   [P_OUT];
  logic signed [PW-1:0] s   [P_OUT];
  logic [P_OUT-1:0][DW-1:0] y_d;

  always_comb begin
    for (int o = 0; o < int'(P_OUT); o++) begin
      if (cfg.bn_en)
        t[o] = (PW'(signed'(x[o])) + PW'(signed'(bias[o]))) * PW'(signed'(gamma[o]));
      else
        t[o] = PW'(signed'(x[o]));
      s[o] = t[o] >>> cfg.shift;
      if (cfg.relu_en && s[o] < 0) s[o] = '0;
      if (s[o] > MAXV)      y_d[o] = MAXV[DW-1:0];
      else if (s[o] < MINV) y_d[o] = MINV[DW-1:0];
      else                  y_d[o] = s[o][DW-1:0];
    end
  end

  always_ff @(posedge clk) y <= y_d;
endmodule
