// res_block: the residual (ResNet) block in the backbone of the network
// ("Resblock" in the PE).  On a W x CH feature map (14 x 10 at the defaults):
//   u   = UAC(x)                 adder conv 1x1 + BN + ReLU
//   a   = ReLU(AC(u))            adder conv 1x1 + ReLU, no BN
//   out = BN(a + x)              skip addition, then batch norm, no ReLU
// The three steps run one after the other (uac_layer, uac_layer, res_add_bn);
// `done` pulses when out_fm holds the result.  Pulse `start` while idle and
// hold in_fm stable while busy.  Parameters use layer ids L_RES_U (weights,
// scale, shift), L_RES_A (weights) and L_RES_BN (scale, shift).
//
// Note on the AC + ReLU step: an adder convolution returns -sum|x - w|, which
// is never positive, so ReLU without a BN in between makes `a` zero and the
// block reduces to BN(x).  The layer order is taken as printed in the paper's
// block diagram (AC, ReLU, add, BN); the step is kept, and its BN can be
// turned on with MID_BN_EN if a trained model places a BN there.
//
// The paper gives the block's composition and that it keeps the 14 x 10 size
// without zero padding; the 1x1 kernels follow from that and are this
// design's reading, as is the parallelism PAR (input and output channels per
// cycle).
module res_block
  import flan_pkg::*;
#(
  parameter int W         = 14,
  parameter int CH        = 10,
  parameter int PAR       = 10,
  parameter bit MID_BN_EN = 1'b0
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    start,
  output logic    busy,
  output logic    done,
  input  fm_t     in_fm  [W*CH],
  output fm_t     out_fm [W*CH],
  input  logic    prm_wr_valid,
  input  prm_wr_t prm_wr
);

  fm_t  f_u [W*CH];
  fm_t  f_a [W*CH];
  logic d_u, d_a;
  logic go_a, go_bn;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      go_a  <= 1'b0;
      go_bn <= 1'b0;
    end else begin
      go_a  <= d_u;
      go_bn <= d_a;
      if (start && !busy) busy <= 1'b1;
      else if (done)      busy <= 1'b0;
    end
  end

  uac_layer #(.LAYER_ID(L_RES_U), .CH_IN(CH), .CH_OUT(CH), .K(1), .S(1), .W_IN(W),
              .CI_PAR(PAR), .CO_PAR(PAR)) u_uac (
    .clk, .rst_n, .start(start && !busy), .busy(), .done(d_u),
    .in_fm(in_fm), .out_fm(f_u), .prm_wr_valid, .prm_wr);

  uac_layer #(.LAYER_ID(L_RES_A), .CH_IN(CH), .CH_OUT(CH), .K(1), .S(1), .W_IN(W),
              .CI_PAR(PAR), .CO_PAR(PAR), .BN_EN(MID_BN_EN), .RELU_EN(1'b1)) u_ac (
    .clk, .rst_n, .start(go_a), .busy(), .done(d_a),
    .in_fm(f_u), .out_fm(f_a), .prm_wr_valid, .prm_wr);

  res_add_bn #(.LAYER_ID(L_RES_BN), .W(W), .CH(CH)) u_add_bn (
    .clk, .rst_n, .start(go_bn), .busy(), .done(done),
    .a_fm(f_a), .skip_fm(in_fm), .out_fm(out_fm), .prm_wr_valid, .prm_wr);

endmodule
