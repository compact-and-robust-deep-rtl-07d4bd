// input_logic: the "Input logic (memcpy)" of the accelerator.  It copies a
// batch of N_PE consecutive histograms, arriving one bin per beat on a
// valid/ready stream, into the input buffers of the N_PE processing elements:
// beats 0..N_BINS-1 go to PE 0, the next N_BINS to PE 1, and so on.
//
// After `arm` (one cycle) the block accepts exactly N_PE*N_BINS beats
// (s_ready high), then drops s_ready and pulses `loaded` in the cycle that
// carries the last buffer write.  Writes are registered: a beat accepted in
// cycle t appears on hist_we/hist_addr/hist_data in cycle t+1, with
// hist_clear high on the first bin of each histogram so the PE's photon
// counter restarts.  Bins are Q16.16 values already converted from floating
// point by the host processor.
//
// The batch of four histograms copied into four buffers is the paper's; the
// stream handshake, the arm/loaded protocol and the fixed batch length
// (the host always sends whole batches) are this design's choices.
module input_logic
  import flan_pkg::*;
#(
  parameter int N_PE   = 4,
  parameter int N_BINS = 256
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      arm,
  input  logic                      s_valid,
  output logic                      s_ready,
  input  fm_t                       s_data,
  output logic [N_PE-1:0]           hist_we,
  output logic [N_PE-1:0]           hist_clear,
  output logic [$clog2(N_BINS)-1:0] hist_addr,
  output fm_t                       hist_data,
  output logic                      loaded
);

  localparam int PEW = (N_PE > 1) ? $clog2(N_PE) : 1;

  logic                      active;
  logic [$clog2(N_BINS)-1:0] bin_q;
  logic [PEW-1:0]            pe_q;

  assign s_ready = active;
  wire beat     = s_valid && s_ready;
  wire last_bin = (int'(bin_q) == N_BINS - 1);
  wire last_pe  = (int'(pe_q) == N_PE - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active     <= 1'b0;
      bin_q      <= '0;
      pe_q       <= '0;
      hist_we    <= '0;
      hist_clear <= '0;
      hist_addr  <= '0;
      hist_data  <= '0;
      loaded     <= 1'b0;
    end else begin
      hist_we    <= '0;
      hist_clear <= '0;
      loaded     <= 1'b0;
      if (arm && !active) begin
        active <= 1'b1;
        bin_q  <= '0;
        pe_q   <= '0;
      end else if (beat) begin
        hist_we[pe_q]    <= 1'b1;
        hist_clear[pe_q] <= (bin_q == '0);
        hist_addr        <= bin_q;
        hist_data        <= s_data;
        if (last_bin) begin
          bin_q <= '0;
          if (last_pe) begin
            active <= 1'b0;
            loaded <= 1'b1;
          end else begin
            pe_q <= pe_q + 1'b1;
          end
        end else begin
          bin_q <= bin_q + 1'b1;
        end
      end
    end
  end

endmodule
