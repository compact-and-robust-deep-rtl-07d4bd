// bg_filter: background-pixel test at the entry of the network.
//
// While a histogram is written into a core's input buffer, every bin value
// (Q16.16) is added to a photon-count accumulator.  `fg` is high when the
// total photon count N_pc exceeds the threshold T (an integer photon count),
// i.e. when the pixel belongs to the sample and must be processed; for a
// background pixel the core skips the network and reports tau_A = tau_I = 0.
// `clear` (one cycle) empties the accumulator before a new histogram; a write
// in the same cycle as `clear` is counted as the first bin.  The count is
// registered, so fg is valid one cycle after the last bin.
//
// The test N_pc > T and the zero output follow Algorithm 1 and Fig. 1 of the
// paper.  The paper's FPGA system makes the same decision in the ARM
// processor from an offline mask map; here it is done in the core, with T
// supplied as an input, which is this design's choice.
module bg_filter
  import flan_pkg::*;
#(
  parameter int CNT_W = ACC_W
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic             bin_valid,
  input  fm_t              bin,
  input  logic [31:0]      threshold,
  output logic [CNT_W-1:0] npc,
  output logic             fg
);

  logic signed [CNT_W-1:0] base;
  assign base = clear ? '0 : $signed(npc);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         npc <= '0;
    else if (bin_valid) npc <= CNT_W'(base + CNT_W'(bin));
    else if (clear)     npc <= '0;
  end

  // N_pc > T, with T an integer and N_pc in Q16.16
  assign fg = $signed(npc) > $signed({(CNT_W-FM_FRAC)'({1'b0, threshold}), {FM_FRAC{1'b0}}});

endmodule
