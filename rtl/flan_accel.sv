// flan_accel: FPGA-side FLAN lifetime accelerator with N_PE = 4 processing
// elements that each run one pixel's histogram through a complete 1-D
// Fluorescence Lifetime AdderNet, so four pixels are processed at once.
//
// Flow for one batch (Fig. 12 of the paper):
//   1. LOAD   input_logic copies N_PE consecutive histograms (N_PE*N_BINS
//             Q16.16 bins on the s_* stream) into the PEs' input buffers;
//             each PE's bg_filter counts the photons on the way.
//   2. RUN    all PEs start together; background pixels (N_pc <= threshold)
//             finish at once with zero lifetimes, the others run the network.
//   3. OUT    when every PE is done, output_logic sends the 2*N_PE lifetimes
//             (tau_A, tau_I per pixel, Q16.16) on the m_* stream, m_last on
//             the last one; then the next batch can be loaded.
// Learned parameters (adder-conv weights and folded batch-norm scale/shift,
// Q10.10) are broadcast over prm_wr to all PEs' parameter RAMs before use;
// each PE keeps its own copy so the PEs never compete for memory ports.
//
// Status outputs: `busy` is high outside LOAD; `batches` counts finished
// batches and `skipped_px` the pixels treated as background.
//
// Timing at the defaults: a batch takes N_PE*N_BINS = 1,024 cycles to load
// (one bin per cycle with s_valid held high); m_valid rises 964 cycles after
// the cycle that accepts the last bin when at least one pixel of the batch is
// foreground (959 of them are the PEs' run), 7 cycles when all four are
// background; unloading takes 8 cycles without back-pressure.  A batch of
// four foreground pixels thus takes about 2,000 cycles end to end.
//
// LS_EN = 1 puts ls_binner between the input logic and the PEs: each
// histogram is merged from N_BINS to LS_M log-scale bins on its way in (one
// extra cycle of load latency, hidden by the START state) and the PEs are
// built for LS_M bins.  The PEs keep the same layer stack, which on 80 bins
// gives 14x5 and 2x10 maps and a 20-value branch input; it shows the merger
// working in the datapath and is not a separately trained compressed
// network.  LS_EN = 0, the default, is the 256-bin network.
//
// Paper: four cores, four input buffers, memcpy-style input and output logic,
// the per-PE parameter BRAMs, the 8-value output vector.  This design's own
// choices: the streams and their handshakes, the load bus, and that loading,
// computing and unloading do not overlap.  The host processor, its DDR
// memory and the AXI interconnect are outside this module.
module flan_accel
  import flan_pkg::*;
#(
  parameter int N_PE   = 4,
  parameter int N_BINS = 256,
  parameter bit LS_EN  = 1'b0,
  parameter int LS_M   = 80
) (
  input  logic        clk,
  input  logic        rst_n,
  // histogram stream from the host (one Q16.16 bin per beat)
  input  logic        s_valid,
  output logic        s_ready,
  input  fm_t         s_data,
  // lifetime stream to the host
  output logic        m_valid,
  input  logic        m_ready,
  output fm_t         m_data,
  output logic        m_last,
  // parameter load bus and background threshold (integer photon count)
  input  logic        prm_wr_valid,
  input  prm_wr_t     prm_wr,
  input  logic [31:0] threshold,
  // status
  output logic        busy,
  output logic [31:0] batches,
  output logic [31:0] skipped_px
);

  typedef enum logic [1:0] { T_LOAD, T_START, T_RUN, T_OUT } top_state_e;

  top_state_e st_q;
  logic       arm_q, start_q, capture_q;

  localparam int CORE_BINS = LS_EN ? LS_M : N_BINS;

  logic [N_PE-1:0]           hist_we, hist_clear;
  logic [$clog2(N_BINS)-1:0] hist_addr;
  fm_t                       hist_data;
  logic                      loaded;

  // write ports as seen by the PEs (after the optional merger)
  logic [N_PE-1:0]              core_we, core_clear;
  logic [$clog2(CORE_BINS)-1:0] core_addr;
  fm_t                          core_data;

  logic [N_PE-1:0] pe_done, pe_skipped, done_seen;
  fm_t             tau_a [N_PE];
  fm_t             tau_i [N_PE];
  fm_t             vals  [2*N_PE];
  logic            out_busy;

  input_logic #(.N_PE(N_PE), .N_BINS(N_BINS)) u_in (
    .clk, .rst_n,
    .arm       (arm_q),
    .s_valid, .s_ready, .s_data,
    .hist_we, .hist_clear, .hist_addr, .hist_data,
    .loaded
  );

  if (LS_EN) begin : g_ls
    localparam int TAG_W = (N_PE > 1) ? $clog2(N_PE) : 1;
    logic [TAG_W-1:0] in_tag, out_tag;
    logic             out_valid, out_first;

    always_comb begin
      in_tag = '0;
      for (int p = 0; p < N_PE; p++) if (hist_we[p]) in_tag = TAG_W'(p);
    end

    ls_binner #(.T_BINS(N_BINS), .M(LS_M), .TAG_W(TAG_W)) u_ls (
      .clk, .rst_n,
      .in_valid (|hist_we),
      .in_first (|hist_clear),
      .in_data  (hist_data),
      .in_tag   (in_tag),
      .out_valid(out_valid),
      .out_first(out_first),
      .out_addr (core_addr),
      .out_data (core_data),
      .out_tag  (out_tag)
    );

    for (genvar p = 0; p < N_PE; p++) begin : g_dec
      assign core_we[p]    = out_valid && (int'(out_tag) == p);
      assign core_clear[p] = out_valid && out_first && (int'(out_tag) == p);
    end
  end else begin : g_direct
    assign core_we    = hist_we;
    assign core_clear = hist_clear;
    assign core_addr  = hist_addr;
    assign core_data  = hist_data;
  end

  for (genvar p = 0; p < N_PE; p++) begin : g_pe
    flan_core #(.N_BINS(CORE_BINS)) u_core (
      .clk, .rst_n,
      .hist_clear  (core_clear[p]),
      .hist_we     (core_we[p]),
      .hist_addr   (core_addr),
      .hist_data   (core_data),
      .threshold   (threshold),
      .start       (start_q),
      .busy        (),
      .done        (pe_done[p]),
      .skipped     (pe_skipped[p]),
      .tau_a       (tau_a[p]),
      .tau_i       (tau_i[p]),
      .prm_wr_valid(prm_wr_valid),
      .prm_wr      (prm_wr)
    );
    assign vals[2*p]     = tau_a[p];
    assign vals[2*p + 1] = tau_i[p];
  end

  output_logic #(.N_OUT(2*N_PE)) u_out (
    .clk, .rst_n,
    .capture (capture_q),
    .vals    (vals),
    .busy    (out_busy),
    .m_valid, .m_ready, .m_data, .m_last
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q       <= T_LOAD;
      arm_q      <= 1'b1;
      start_q    <= 1'b0;
      capture_q  <= 1'b0;
      done_seen  <= '0;
      batches    <= '0;
      skipped_px <= '0;
    end else begin
      arm_q     <= 1'b0;
      start_q   <= 1'b0;
      capture_q <= 1'b0;
      unique case (st_q)
        T_LOAD:  if (loaded) st_q <= T_START;
        T_START: begin
          start_q   <= 1'b1;
          done_seen <= '0;
          st_q      <= T_RUN;
        end
        T_RUN: begin
          done_seen <= done_seen | pe_done;
          if ((done_seen | pe_done) == '1) begin
            capture_q <= 1'b1;
            st_q      <= T_OUT;
            skipped_px <= skipped_px + 32'($countones(pe_skipped));
          end
        end
        T_OUT: if (!capture_q && !out_busy) begin
          batches <= batches + 1;
          arm_q   <= 1'b1;
          st_q    <= T_LOAD;
        end
        default: st_q <= T_LOAD;
      endcase
    end
  end

  assign busy = (st_q != T_LOAD);

endmodule
