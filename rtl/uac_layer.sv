// uac_layer: one unified adder-convolution layer (UAC = AC + BN + ReLU) with
// its own partitioned parameter memories and output feature-map buffer.
//
// Function (Algorithm 1 of the paper, with the input index written the usual
// way, w = w_o*S + k_x):
//   F_o[w_o][c_o] = ReLU( scale[c_o] * ( -sum_{c_i,k} |F_i[w_o*S+k][c_i] - W[k][c_i][c_o]| )
//                         + shift[c_o] )
// No zero padding is used; the layer shrinks the width to W_OUT = (W_IN-K)/S+1.
//
// Organisation (Fig. 13 of the paper): CO_PAR adder-conv lanes (ac_lane) work
// side by side, one per output channel of the current channel group; each lane
// consumes CI_PAR input channels per cycle through its own partition of the
// weight memory (wmem[lane][j] is one small RAM, as in Fig. 13b) and feeds one
// bn_relu unit.  The loop order is
//   for w_o, for output-channel group, for tap k, for input-channel group
// so one layer takes W_OUT * ceil(CH_OUT/CO_PAR) * K * ceil(CH_IN/CI_PAR)
// issue cycles plus 3 cycles of pipeline (weight read, accumulate, write).
//
// Interface: pulse `start` while idle; `busy` is high until `done` pulses one
// cycle after the last result is written to out_fm.  in_fm must stay stable
// while busy.  Feature maps are flat arrays, element [w*CH + c] (channels
// last), so a 14x10 map read as 1x140 needs no data movement.  Parameters are
// written through the prm_wr bus while the layer is idle; writes whose layer
// field differs from LAYER_ID are ignored.  BN_EN / RELU_EN select the
// post-processing (the residual block's second AC has ReLU but no BN).
//
// Paper: the UAC function, the AC / adder tree / Acc / Reg / BN structure and
// the partitioned parameter BRAMs.  This design's own choices: the
// parallelism CI_PAR and CO_PAR (the paper prints neither), the loop order,
// the load bus and the handshake.
module uac_layer
  import flan_pkg::*;
#(
  parameter layer_e LAYER_ID = L_PRE1,
  parameter int     CH_IN    = 1,
  parameter int     CH_OUT   = 5,
  parameter int     K        = 13,
  parameter int     S        = 5,
  parameter int     W_IN     = 256,
  parameter int     CI_PAR   = 1,
  parameter int     CO_PAR   = 5,
  parameter bit     BN_EN    = 1'b1,
  parameter bit     RELU_EN  = 1'b1,
  localparam int    W_OUT    = (W_IN - K) / S + 1
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    start,
  output logic    busy,
  output logic    done,
  input  fm_t     in_fm  [W_IN*CH_IN],
  output fm_t     out_fm [W_OUT*CH_OUT],
  input  logic    prm_wr_valid,
  input  prm_wr_t prm_wr
);

  localparam int N_CIG  = (CH_IN  + CI_PAR - 1) / CI_PAR;
  localparam int N_COG  = (CH_OUT + CO_PAR - 1) / CO_PAR;
  localparam int DEPTH  = N_COG * K * N_CIG;
  localparam int AW     = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  // ---------------------------------------------------------------- memories
  logic [PRM_W-1:0] wmem      [CO_PAR][CI_PAR][DEPTH];
  logic [PRM_W-1:0] scale_mem [CH_OUT];
  logic [PRM_W-1:0] shift_mem [CH_OUT];

  wire prm_hit = prm_wr_valid && (prm_wr.layer == LAYER_ID);

  always_ff @(posedge clk) begin
    if (prm_hit) begin
      unique case (prm_wr.kind)
        P_WEIGHT: if (int'(prm_wr.co) < CH_OUT && int'(prm_wr.ci) < CH_IN && int'(prm_wr.k) < K)
          wmem[int'(prm_wr.co) % CO_PAR][int'(prm_wr.ci) % CI_PAR]
              [((int'(prm_wr.co) / CO_PAR) * K + int'(prm_wr.k)) * N_CIG + int'(prm_wr.ci) / CI_PAR]
              <= prm_wr.data;
        P_SCALE:  if (int'(prm_wr.co) < CH_OUT) scale_mem[int'(prm_wr.co)] <= prm_wr.data;
        P_SHIFT:  if (int'(prm_wr.co) < CH_OUT) shift_mem[int'(prm_wr.co)] <= prm_wr.data;
        default: ;
      endcase
    end
  end

  // ---------------------------------------------------------- loop counters
  logic running;
  int   wo_q, cg_q, k_q, ig_q;

  wire is_first = (k_q == 0) && (ig_q == 0);
  wire is_last  = (k_q == K - 1) && (ig_q == N_CIG - 1);
  wire is_final = is_last && (wo_q == W_OUT - 1) && (cg_q == N_COG - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running <= 1'b0;
      wo_q <= 0; cg_q <= 0; k_q <= 0; ig_q <= 0;
    end else if (!running) begin
      if (start && !busy) begin
        running <= 1'b1;
        wo_q <= 0; cg_q <= 0; k_q <= 0; ig_q <= 0;
      end
    end else begin
      if (ig_q < N_CIG - 1) ig_q <= ig_q + 1;
      else begin
        ig_q <= 0;
        if (k_q < K - 1) k_q <= k_q + 1;
        else begin
          k_q <= 0;
          if (cg_q < N_COG - 1) cg_q <= cg_q + 1;
          else begin
            cg_q <= 0;
            if (wo_q < W_OUT - 1) wo_q <= wo_q + 1;
            else running <= 1'b0;
          end
        end
      end
    end
  end

  // ------------------------------------- stage 1: operands (weights, inputs)
  logic              s1_en, s1_first, s1_last, s1_final;
  int                s1_wo, s1_cg;
  logic [CI_PAR-1:0] s1_mask;
  fm_t               s1_x [CI_PAR];
  prm_t              s1_w [CO_PAR][CI_PAR];

  wire [AW-1:0] rd_addr = AW'((cg_q * K + k_q) * N_CIG + ig_q);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_en <= 1'b0; s1_first <= 1'b0; s1_last <= 1'b0; s1_final <= 1'b0;
      s1_wo <= 0; s1_cg <= 0; s1_mask <= '0;
    end else begin
      s1_en    <= running;
      s1_first <= is_first;
      s1_last  <= is_last;
      s1_final <= is_final;
      s1_wo    <= wo_q;
      s1_cg    <= cg_q;
      for (int j = 0; j < CI_PAR; j++)
        s1_mask[j] <= (ig_q * CI_PAR + j) < CH_IN;
    end
  end

  always_ff @(posedge clk) begin
    for (int j = 0; j < CI_PAR; j++) begin
      int ci;
      ci = ig_q * CI_PAR + j;
      s1_x[j] <= (ci < CH_IN) ? in_fm[(wo_q * S + k_q) * CH_IN + ci] : fm_t'(0);
    end
    for (int l = 0; l < CO_PAR; l++)
      for (int j = 0; j < CI_PAR; j++)
        s1_w[l][j] <= prm_t'(wmem[l][j][rd_addr]);
  end

  // -------------------------------------------- stage 2: AC lanes (Acc, Reg)
  logic res_valid [CO_PAR];
  acc_t res       [CO_PAR];

  for (genvar l = 0; l < CO_PAR; l++) begin : g_lane
    ac_lane #(.CI_PAR(CI_PAR)) u_ac (
      .clk      (clk),
      .rst_n    (rst_n),
      .en       (s1_en),
      .first    (s1_first),
      .last     (s1_last),
      .mask     (s1_mask),
      .x        (s1_x),
      .w        (s1_w[l]),
      .res_valid(res_valid[l]),
      .res      (res[l])
    );
  end

  logic s2_final;
  int   s2_wo, s2_cg;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s2_final <= 1'b0; s2_wo <= 0; s2_cg <= 0;
    end else if (s1_en && s1_last) begin
      s2_final <= s1_final;
      s2_wo    <= s1_wo;
      s2_cg    <= s1_cg;
    end
  end

  // ------------------------------------ stage 3: BN + ReLU, write the output
  fm_t y [CO_PAR];
  for (genvar l = 0; l < CO_PAR; l++) begin : g_bn
    localparam int CO_IDX_MAX = CH_OUT - 1;
    int co;
    assign co = s2_cg * CO_PAR + l;
    bn_relu #(.BN_EN(BN_EN), .RELU_EN(RELU_EN)) u_bn (
      .x     (res[l]),
      .scale (prm_t'(scale_mem[(co > CO_IDX_MAX) ? CO_IDX_MAX : co])),
      .shift (prm_t'(shift_mem[(co > CO_IDX_MAX) ? CO_IDX_MAX : co])),
      .y     (y[l])
    );
  end

  always_ff @(posedge clk) begin
    if (res_valid[0]) begin
      for (int l = 0; l < CO_PAR; l++)
        if (s2_cg * CO_PAR + l < CH_OUT)
          out_fm[s2_wo * CH_OUT + s2_cg * CO_PAR + l] <= y[l];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !busy) busy <= 1'b1;
      else if (res_valid[0] && s2_final) begin
        busy <= 1'b0;
        done <= 1'b1;
      end
    end
  end

endmodule
