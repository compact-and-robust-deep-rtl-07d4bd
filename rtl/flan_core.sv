// flan_core: one FLAN processing element (PE): a complete 1-D Fluorescence
// Lifetime AdderNet that turns one pixel's photon histogram into its
// amplitude-averaged lifetime tau_A and intensity-averaged lifetime tau_I.
//
// Datapath (Fig. 1 and Fig. 12 of the paper), with feature-map sizes for the
// default N_BINS = 256:
//   histogram buffer 256x1
//   Pre #1   UAC 1x13, stride 5, 5 channels          -> 49x5
//   Pre #2   UAC 1x9,  stride 3, 10 channels         -> 14x10
//   Resblock UAC 1x1 (AC,BN,ReLU) -> AC 1x1 + ReLU -> + input -> BN -> 14x10
//   reshape  14x10 read as 1x140 (no logic: maps are stored channels-last)
//   O #1     UAC 140->70, 70->30, 30->1   -> tau_A
//   O #2     UAC 140->70, 70->30, 30->1   -> tau_I
// The two output branches run at the same time; the other layers run one
// after the other, each in its own uac_layer with its own parameter RAMs and
// output buffer, so intermediate maps never leave the core.
//
// Before the network a bg_filter sums the photon count N_pc of the histogram
// as it is loaded; if N_pc <= threshold the core skips the network and
// returns tau_A = tau_I = 0 (Algorithm 1 of the paper).
//
// Interface: the histogram is written bin by bin through hist_we/addr/data,
// with hist_clear pulsed with (or before) the first bin.  Then pulse `start`;
// `done` pulses when tau_a / tau_i are valid (they hold until the next
// start).  `skipped` tells whether the pixel was treated as background.
// Lifetimes are Q16.16 in the units the network was trained for.  Parameters
// are loaded over prm_wr (see flan_pkg) while the core is idle.
//
// Timing: a foreground pixel takes 959 cycles from the start cycle to the
// done pulse at the defaults: 1 (start) + Pre #1 (49*13 + 3) + 1 + Pre #2
// (14*9 + 3) + 1 + Resblock 51 + 1 + branches 133 + 1 + 1.  Each uac_layer
// takes W_out * ceil(CH_out/CO_PAR) * K * ceil(CH_in/CI_PAR) + 3 cycles.
// A background pixel takes 2 cycles.
//
// Paper: layer sizes, strides, kernel sizes, channel counts, the UAC and
// residual block composition, the branch topology and the threshold test.
// This design's own choices: the residual block's 1x1 kernels (the paper
// prints only that the block keeps the 14x10 size and uses no padding), the
// per-layer parallelism (CI_PAR / CO_PAR parameters), sequential layer
// scheduling and the handshake.
module flan_core
  import flan_pkg::*;
#(
  parameter int N_BINS   = 256,
  // Pre #1 / Pre #2 geometry (Fig. 1)
  parameter int P1_K     = 13,
  parameter int P1_S     = 5,
  parameter int P1_CH    = 5,
  parameter int P2_K     = 9,
  parameter int P2_S     = 3,
  parameter int P2_CH    = 10,
  // branch widths (Fig. 1)
  parameter int B1_CH    = 70,
  parameter int B2_CH    = 30,
  // parallelism (this design's choice)
  parameter int RES_PAR  = 10,
  parameter int BR_CI_PAR = 10,
  parameter int BR_CO_PAR = 10
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      hist_clear,
  input  logic                      hist_we,
  input  logic [$clog2(N_BINS)-1:0] hist_addr,
  input  fm_t                       hist_data,
  input  logic [31:0]               threshold,
  input  logic                      start,
  output logic                      busy,
  output logic                      done,
  output logic                      skipped,
  output fm_t                       tau_a,
  output fm_t                       tau_i,
  input  logic                      prm_wr_valid,
  input  prm_wr_t                   prm_wr
);

  localparam int W1  = (N_BINS - P1_K) / P1_S + 1;   // 49
  localparam int W2  = (W1 - P2_K) / P2_S + 1;       // 14
  localparam int FLAT = W2 * P2_CH;                  // 140

  // ------------------------------------------------ input histogram buffer
  fm_t hist [N_BINS];
  always_ff @(posedge clk) if (hist_we) hist[hist_addr] <= hist_data;

  logic fg;
  bg_filter u_bg (
    .clk      (clk),
    .rst_n    (rst_n),
    .clear    (hist_clear),
    .bin_valid(hist_we),
    .bin      (hist_data),
    .threshold(threshold),
    .npc      (),
    .fg       (fg)
  );

  // ------------------------------------------------------------ sequencer
  typedef enum logic [2:0] { S_IDLE, S_PRE1, S_PRE2, S_RES, S_BR, S_FIN } state_e;

  state_e st_q;
  logic   go_pre1, go_pre2, go_res, go_br;
  logic   d_pre1, d_pre2, d_res, d_a, d_i;
  logic   a_seen, i_seen;
  fm_t    br_tau_a, br_tau_i;

  fm_t f_pre1 [W1*P1_CH];
  fm_t f_pre2 [FLAT];
  fm_t f_res  [FLAT];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q    <= S_IDLE;
      go_pre1 <= 1'b0;
      go_pre2 <= 1'b0;
      go_res  <= 1'b0;
      go_br   <= 1'b0;
      busy    <= 1'b0;
      done    <= 1'b0;
      skipped <= 1'b0;
      tau_a   <= '0;
      tau_i   <= '0;
      a_seen  <= 1'b0;
      i_seen  <= 1'b0;
    end else begin
      go_pre1 <= 1'b0;
      go_pre2 <= 1'b0;
      go_res  <= 1'b0;
      go_br   <= 1'b0;
      done    <= 1'b0;
      unique case (st_q)
        S_IDLE: if (start) begin
          busy    <= 1'b1;
          skipped <= !fg;
          if (fg) begin st_q <= S_PRE1; go_pre1 <= 1'b1; end
          else          st_q <= S_FIN;
        end
        S_PRE1: if (d_pre1) begin st_q <= S_PRE2; go_pre2 <= 1'b1; end
        S_PRE2: if (d_pre2) begin st_q <= S_RES;  go_res  <= 1'b1; end
        S_RES:  if (d_res)  begin st_q <= S_BR;   go_br   <= 1'b1; end
        S_BR: begin
          // both branches run at the same time; wait for the later one
          if (d_a) a_seen <= 1'b1;
          if (d_i) i_seen <= 1'b1;
          if ((d_a || a_seen) && (d_i || i_seen)) begin
            st_q   <= S_FIN;
            a_seen <= 1'b0;
            i_seen <= 1'b0;
          end
        end
        S_FIN: begin
          tau_a <= skipped ? fm_t'(0) : br_tau_a;
          tau_i <= skipped ? fm_t'(0) : br_tau_i;
          done  <= 1'b1;
          busy  <= 1'b0;
          st_q  <= S_IDLE;
        end
        default: st_q <= S_IDLE;
      endcase
    end
  end

  // --------------------------------------------------------------- layers
  // Pre #1
  uac_layer #(.LAYER_ID(L_PRE1), .CH_IN(1), .CH_OUT(P1_CH), .K(P1_K), .S(P1_S),
              .W_IN(N_BINS), .CI_PAR(1), .CO_PAR(P1_CH)) u_pre1 (
    .clk, .rst_n, .start(go_pre1), .busy(), .done(d_pre1),
    .in_fm(hist), .out_fm(f_pre1), .prm_wr_valid, .prm_wr);

  // Pre #2
  uac_layer #(.LAYER_ID(L_PRE2), .CH_IN(P1_CH), .CH_OUT(P2_CH), .K(P2_K), .S(P2_S),
              .W_IN(W1), .CI_PAR(P1_CH), .CO_PAR(P2_CH)) u_pre2 (
    .clk, .rst_n, .start(go_pre2), .busy(), .done(d_pre2),
    .in_fm(f_pre1), .out_fm(f_pre2), .prm_wr_valid, .prm_wr);

  // Resblock
  res_block #(.W(W2), .CH(P2_CH), .PAR(RES_PAR)) u_res (
    .clk, .rst_n, .start(go_res), .busy(), .done(d_res),
    .in_fm(f_pre2), .out_fm(f_res), .prm_wr_valid, .prm_wr);

  // O #1 (tau_A) and O #2 (tau_I); the reshape to 1 x 140 is the identity on
  // the channels-last buffer f_res
  out_branch #(.LID1(L_OA1), .LID2(L_OA2), .LID3(L_OA3), .CH_IN(FLAT), .CH1(B1_CH),
               .CH2(B2_CH), .CI_PAR(BR_CI_PAR), .CO_PAR(BR_CO_PAR)) u_o1 (
    .clk, .rst_n, .start(go_br), .busy(), .done(d_a),
    .in_fm(f_res), .tau(br_tau_a), .prm_wr_valid, .prm_wr);

  out_branch #(.LID1(L_OI1), .LID2(L_OI2), .LID3(L_OI3), .CH_IN(FLAT), .CH1(B1_CH),
               .CH2(B2_CH), .CI_PAR(BR_CI_PAR), .CO_PAR(BR_CO_PAR)) u_o2 (
    .clk, .rst_n, .start(go_br), .busy(), .done(d_i),
    .in_fm(f_res), .tau(br_tau_i), .prm_wr_valid, .prm_wr);

endmodule
