// ac_lane: one adder-convolution (AC) unit, the "AC" box of the UAC datapath.
//
// Each cycle in which `en` is high the lane takes CI_PAR feature values x[j]
// and CI_PAR weights w[j], forms the l1 distances |x[j] - w[j]| (weights are
// first aligned from Q10.10 to the Q16.16 feature format), sums them in an
// adder tree and adds the sum into an accumulator (Acc).  `first` restarts the
// accumulator; on a cycle with `last` the negated total, -(sum of |x - w|),
// which is the AdderNet output of one output pixel and channel, is moved into
// the result register (Reg) and `res_valid` pulses one cycle later.  Input
// channels with mask[j] = 0 contribute nothing (they pad a channel count that
// is not a multiple of CI_PAR).
//
// The subtract / adder-tree / accumulate / register structure is the paper's
// (Fig. 13a); the parallel width CI_PAR, the one-cycle latency and the mask
// are this design's choices.
module ac_lane
  import flan_pkg::*;
#(
  parameter int CI_PAR = 10
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              en,
  input  logic              first,
  input  logic              last,
  input  logic [CI_PAR-1:0] mask,
  input  fm_t               x [CI_PAR],
  input  prm_t              w [CI_PAR],
  output logic              res_valid,
  output acc_t              res
);

  acc_t tree_sum;
  acc_t acc_q;

  // l1 distances and adder tree
  always_comb begin
    tree_sum = '0;
    for (int j = 0; j < CI_PAR; j++) begin
      acc_t d;
      d = acc_t'(x[j]) - (acc_t'(w[j]) <<< ALIGN);
      if (d < 0) d = -d;
      if (mask[j]) tree_sum = tree_sum + d;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_q     <= '0;
      res       <= '0;
      res_valid <= 1'b0;
    end else begin
      res_valid <= 1'b0;
      if (en) begin
        if (last) begin
          res       <= -((first ? acc_t'(0) : acc_q) + tree_sum);
          res_valid <= 1'b1;
        end
        acc_q <= (first ? acc_t'(0) : acc_q) + tree_sum;
      end
    end
  end

endmodule
