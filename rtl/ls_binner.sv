// ls_binner: log-scale time-bin merging.  It compresses a T_BINS-bin photon
// histogram (256 at the defaults) into M bins (80) whose widths grow
// geometrically, so the early part of the decay, where the information is,
// keeps its resolution and the long, sparse tail is summed into wide bins.
//
// Compressed bin x covers original bins s(x) .. s(x+1)-1 with
//   s(x) = floor( (r^x - 1) / (r - 1) ),   r chosen so that (r^M - 1)/(r - 1) = T_BINS,
// and its value is the sum of the counts in that range.  For M = 80 and
// T_BINS = 256, r = 1.02560; the first nine compressed bins are one bin wide
// and the last one is eight bins wide.  r is found at elaboration by
// bisection in double precision and the boundary table is built from it
// (s(M) is pinned to T_BINS), so the table costs no logic beyond M+1
// constants.
//
// Streaming interface: one original bin per cycle on in_valid/in_data, with
// in_first on bin 0 of each histogram and an opaque in_tag (used here for the
// destination PE) carried along.  When the last original bin of an interval
// arrives, the merged bin is presented one cycle later on out_valid with its
// index out_addr, its sum out_data (Q16.16, saturated), out_first on merged
// bin 0 and the tag.  There is no back-pressure; the output rate is at most
// the input rate.
//
// The mapping (equations for s(x) and r, M = 80, T = 256, summing counts) is
// the paper's; where the merge runs (the paper does not place it in the FPGA
// logic), the streaming form and the saturation are this design's choices.
module ls_binner
  import flan_pkg::*;
#(
  parameter int T_BINS = 256,
  parameter int M      = 80,
  parameter int TAG_W  = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic                 in_first,
  input  fm_t                  in_data,
  input  logic [TAG_W-1:0]     in_tag,
  output logic                 out_valid,
  output logic                 out_first,
  output logic [$clog2(M)-1:0] out_addr,
  output fm_t                  out_data,
  output logic [TAG_W-1:0]     out_tag
);

  typedef int bound_t [M+1];

  // ratio r with (r^M - 1)/(r - 1) = T, by bisection
  function automatic real ls_ratio();
    real lo = 1.0000001, hi = 2.0, r = 1.5, g;
    for (int i = 0; i < 200; i++) begin
      r = (lo + hi) / 2.0;
      g = (r ** M - 1.0) / (r - 1.0);
      if (g < real'(T_BINS)) lo = r;
      else                   hi = r;
    end
    return (lo + hi) / 2.0;
  endfunction

  function automatic bound_t ls_bounds();
    bound_t b;
    real r = ls_ratio();
    for (int x = 0; x <= M; x++) b[x] = int'($floor((r ** x - 1.0) / (r - 1.0) + 1.0e-9));
    b[0] = 0;
    b[M] = T_BINS;
    return b;
  endfunction

  localparam bound_t S = ls_bounds();

  logic [$clog2(T_BINS+1)-1:0] j_q;    // next original bin index
  logic [$clog2(M+1)-1:0]      x_q;    // current compressed bin
  acc_t                        acc_q;

  logic [$clog2(T_BINS+1)-1:0] j;
  logic [$clog2(M+1)-1:0]      x;
  acc_t                        sum;
  logic                        close;

  always_comb begin
    j     = in_first ? '0 : j_q;
    x     = in_first ? '0 : x_q;
    sum   = ((int'(x) < M && int'(j) == S[x]) ? acc_t'(0) : acc_q) + acc_t'(in_data);
    close = (int'(x) < M) && (int'(j) + 1 == S[(int'(x) < M) ? int'(x) + 1 : M]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      j_q       <= '0;
      x_q       <= '0;
      acc_q     <= '0;
      out_valid <= 1'b0;
      out_first <= 1'b0;
      out_addr  <= '0;
      out_data  <= '0;
      out_tag   <= '0;
    end else begin
      out_valid <= 1'b0;
      if (in_valid) begin
        j_q   <= j + 1'b1;
        acc_q <= sum;
        if (close) begin
          out_valid <= 1'b1;
          out_first <= (x == '0);
          out_addr  <= ($clog2(M))'(x);
          out_data  <= sat_fm((ACC_W+PRM_W)'(sum));
          out_tag   <= in_tag;
          x_q       <= x + 1'b1;
        end else begin
          x_q <= x;
        end
      end
    end
  end

endmodule
