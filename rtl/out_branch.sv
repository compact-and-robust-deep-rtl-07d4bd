// out_branch: one output branch of the network (O #1 for tau_A, O #2 for
// tau_I).  It takes the backbone's feature map flattened to 1 x CH_IN
// (1 x 140 at the defaults) and applies three 1x1 UACs (adder conv + BN +
// ReLU) with CH1 = 70, CH2 = 30 and 1 output channels; the single value left
// is the lifetime, Q16.16.
//
// The three layers run one after the other; `done` pulses when `tau` is
// valid (it holds until the next run).  Pulse `start` while idle and hold
// in_fm stable while busy.  Parameters use layer ids LID1..LID3
// (L_OA1..L_OA3 for O #1, L_OI1..L_OI3 for O #2).  Each layer reads
// CI_PAR inputs and serves CO_PAR outputs per cycle, so at the defaults the
// branch takes 98 + 21 + 3 issue cycles plus 4 cycles per layer.
//
// Layer widths and the final ReLU (every box is a UAC) are the paper's;
// the parallelism is this design's choice.
module out_branch
  import flan_pkg::*;
#(
  parameter layer_e LID1   = L_OA1,
  parameter layer_e LID2   = L_OA2,
  parameter layer_e LID3   = L_OA3,
  parameter int     CH_IN  = 140,
  parameter int     CH1    = 70,
  parameter int     CH2    = 30,
  parameter int     CI_PAR = 10,
  parameter int     CO_PAR = 10
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    start,
  output logic    busy,
  output logic    done,
  input  fm_t     in_fm [CH_IN],
  output fm_t     tau,
  input  logic    prm_wr_valid,
  input  prm_wr_t prm_wr
);

  fm_t  f1 [CH1];
  fm_t  f2 [CH2];
  fm_t  f3 [1];
  logic d1, d2, go2, go3;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      go2  <= 1'b0;
      go3  <= 1'b0;
    end else begin
      go2 <= d1;
      go3 <= d2;
      if (start && !busy) busy <= 1'b1;
      else if (done)      busy <= 1'b0;
    end
  end

  assign tau = f3[0];

  uac_layer #(.LAYER_ID(LID1), .CH_IN(CH_IN), .CH_OUT(CH1), .K(1), .S(1), .W_IN(1),
              .CI_PAR(CI_PAR), .CO_PAR(CO_PAR)) u_l1 (
    .clk, .rst_n, .start(start && !busy), .busy(), .done(d1),
    .in_fm(in_fm), .out_fm(f1), .prm_wr_valid, .prm_wr);

  uac_layer #(.LAYER_ID(LID2), .CH_IN(CH1), .CH_OUT(CH2), .K(1), .S(1), .W_IN(1),
              .CI_PAR(CI_PAR), .CO_PAR(CO_PAR)) u_l2 (
    .clk, .rst_n, .start(go2), .busy(), .done(d2),
    .in_fm(f1), .out_fm(f2), .prm_wr_valid, .prm_wr);

  uac_layer #(.LAYER_ID(LID3), .CH_IN(CH2), .CH_OUT(1), .K(1), .S(1), .W_IN(1),
              .CI_PAR(CI_PAR), .CO_PAR(1)) u_l3 (
    .clk, .rst_n, .start(go3), .busy(), .done(done),
    .in_fm(f2), .out_fm(f3), .prm_wr_valid, .prm_wr);

endmodule
