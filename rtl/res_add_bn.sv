// res_add_bn: the tail of the residual (ResNet) block: skip addition and the
// batch norm that follows it.
//
// out[w][c] = sat32( scale[c] * (a[w][c] + skip[w][c]) + shift[c] )
// where a is the output of the block's AC+ReLU layer and skip is the block's
// input feature map.  There is no ReLU after this BN (Fig. 1 of the paper:
// AC, ReLU, add, BN).  One row of CH channels is processed per cycle through
// CH bn_relu units, so a W x CH map takes W cycles; `done` pulses one cycle
// after the last row is written.  Interface as uac_layer: pulse `start` while
// idle, keep the inputs stable while `busy`; scale/shift are written through the
// parameter bus with layer L_RES_BN (kind P_SCALE / P_SHIFT, index co).
//
// The order add-then-BN is the paper's; one row per cycle is this design's
// choice.
module res_add_bn
  import flan_pkg::*;
#(
  parameter layer_e LAYER_ID = L_RES_BN,
  parameter int     W        = 14,
  parameter int     CH       = 10
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    start,
  output logic    busy,
  output logic    done,
  input  fm_t     a_fm    [W*CH],
  input  fm_t     skip_fm [W*CH],
  output fm_t     out_fm  [W*CH],
  input  logic    prm_wr_valid,
  input  prm_wr_t prm_wr
);

  logic [PRM_W-1:0] scale_mem [CH];
  logic [PRM_W-1:0] shift_mem [CH];

  always_ff @(posedge clk) begin
    if (prm_wr_valid && prm_wr.layer == LAYER_ID && int'(prm_wr.co) < CH) begin
      if (prm_wr.kind == P_SCALE) scale_mem[int'(prm_wr.co)] <= prm_wr.data;
      if (prm_wr.kind == P_SHIFT) shift_mem[int'(prm_wr.co)] <= prm_wr.data;
    end
  end

  int  row_q;
  fm_t y [CH];

  for (genvar c = 0; c < CH; c++) begin : g_bn
    acc_t sum;
    assign sum = acc_t'(a_fm[row_q * CH + c]) + acc_t'(skip_fm[row_q * CH + c]);
    bn_relu #(.BN_EN(1'b1), .RELU_EN(1'b0)) u_bn (
      .x     (sum),
      .scale (prm_t'(scale_mem[c])),
      .shift (prm_t'(shift_mem[c])),
      .y     (y[c])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      done  <= 1'b0;
      row_q <= 0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy  <= 1'b1;
          row_q <= 0;
        end
      end else if (row_q == W - 1) begin
        busy <= 1'b0;
        done <= 1'b1;
      end else begin
        row_q <= row_q + 1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (busy)
      for (int c = 0; c < CH; c++) out_fm[row_q * CH + c] <= y[c];
  end

endmodule
