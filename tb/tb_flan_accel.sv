// tb_flan_accel: end-to-end test of the accelerator at its default size
// (4 PEs, 256-bin histograms, full network).  It loads one random parameter
// set, then streams 100 pixels as 25 batches of four (the batch arrangement
// used for the paper's FPGA timing), with:
//   - synthetic decays of varied peak count and decay length,
//   - background pixels mixed into batches and one batch of background only
//     (the threshold bypass),
//   - random gaps on the input stream (input stall),
//   - random back-pressure on the output stream (output stall).
// Every lifetime is compared with the bit-exact reference network, in the
// order PE0 tau_A, PE0 tau_I, ..., with m_last on the eighth word; the
// batches and skipped_px counters are checked; the cycles from the last
// accepted input bin to the first output word are checked (964 when a batch
// has a foreground pixel, 7 when it has none).  Each mechanism must occur at
// least once.
module tb_flan_accel;
  import flan_pkg::*;
  import flan_ref_pkg::*;

  localparam int N_BATCH = 25, NP = 4, NB = 256;
  localparam int LAT_FG = 964, LAT_BG = 7;

  int checks = 0, failures = 0;
  int n_bg_px = 0, n_fg_px = 0, n_bg_batch = 0, in_stalls = 0, out_stalls = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic s_valid = 0, s_ready, m_valid, m_ready = 0, m_last, prm_wr_valid = 0, busy;
  fm_t  s_data = '0, m_data;
  prm_wr_t prm_wr = '0;
  logic [31:0] threshold = 32'd150, batches, skipped_px;

  flan_accel dut (.*);

  flan_params p;
  int hist [NP][];
  int exp_v [2*NP];
  int last_in_cycle, cycle = 0;
  int first_out_cycle;

  always @(posedge clk) cycle++;

  task automatic wr(int l, prm_kind_e kd, int co, int ci, int k, int v);
    @(negedge clk);
    prm_wr_valid = 1; prm_wr.layer = layer_e'(l); prm_wr.kind = kd;
    prm_wr.co = 8'(co); prm_wr.ci = 8'(ci); prm_wr.k = 4'(k); prm_wr.data = prm_t'(v);
  endtask

  task automatic load_all();
    for (int l = 0; l < NL; l++)
      for (int co = 0; co < p.ch_out[l]; co++) begin
        for (int ci = 0; ci < p.ch_in[l]; ci++)
          for (int k = 0; k < p.k[l]; k++)
            wr(l, P_WEIGHT, co, ci, k, p.wt[l][(co*p.ch_in[l] + ci)*p.k[l] + k]);
        wr(l, P_SCALE, co, 0, 0, p.sc[l][co]);
        wr(l, P_SHIFT, co, 0, 0, p.shf[l][co]);
      end
    @(negedge clk);
    prm_wr_valid = 0;
  endtask

  task automatic send_batch();
    for (int px = 0; px < NP; px++)
      for (int i = 0; i < NB; i++) begin
        @(negedge clk);
        s_valid = 0;
        while (($urandom % 16) == 0) begin in_stalls++; @(negedge clk); end
        s_valid = 1; s_data = hist[px][i];
        @(posedge clk);
        while (!s_ready) @(posedge clk);
        last_in_cycle = cycle;
      end
    @(negedge clk);
    s_valid = 0;
  endtask

  task automatic receive_batch();
    int got = 0;
    first_out_cycle = -1;
    while (got < 2*NP) begin
      @(negedge clk);
      m_ready = ($urandom % 4) != 0;
      if (m_valid && first_out_cycle < 0) first_out_cycle = cycle;
      if (m_valid && !m_ready) out_stalls++;
      @(posedge clk);
      if (m_valid && m_ready) begin
        checks += 2;
        if (m_data !== exp_v[got]) begin failures++; $display("word %0d got %0d exp %0d", got, m_data, exp_v[got]); end
        if (m_last !== (got == 2*NP - 1)) begin failures++; $display("m_last wrong at %0d", got); end
        got++;
      end
    end
    @(negedge clk);
    m_ready = 0;
  endtask

  initial begin
    int ea, ei, skipped_exp = 0;
    bit any_fg;
    repeat (2) @(negedge clk);
    rst_n = 1;
    p = new(NB);
    p.randomize_params();
    load_all();
    for (int b = 0; b < N_BATCH; b++) begin
      any_fg = 0;
      for (int px = 0; px < NP; px++) begin
        automatic int kind = (b == 3) ? 0 : int'($urandom % 6);
        if (kind == 0) begin
          // background: a handful of dark counts
          hist[px] = new[NB];
          foreach (hist[px][i]) hist[px][i] = (($urandom % 40) == 0) ? 65536 : 0;
        end else begin
          flan_params::make_hist(NB, 5 + int'($urandom % 120), 3 + int'($urandom % 60), hist[px]);
        end
        p.run(hist[px], int'(threshold), ea, ei);
        exp_v[2*px] = ea; exp_v[2*px + 1] = ei;
        if (p.foreground(hist[px], int'(threshold))) begin n_fg_px++; any_fg = 1; end
        else begin n_bg_px++; skipped_exp++; end
      end
      if (!any_fg) n_bg_batch++;
      send_batch();
      receive_batch();
      checks++;
      if (first_out_cycle - last_in_cycle != (any_fg ? LAT_FG : LAT_BG)) begin
        failures++;
        $display("batch %0d: %0d cycles from last bin to first result", b, first_out_cycle - last_in_cycle);
      end
    end
    repeat (3) @(negedge clk);
    checks += 3;
    if (batches !== 32'(N_BATCH)) begin failures++; $display("batches %0d", batches); end
    if (skipped_px !== 32'(skipped_exp)) begin failures++; $display("skipped_px %0d exp %0d", skipped_px, skipped_exp); end
    if (busy) begin failures++; $display("busy at the end"); end
    $display("pixels: %0d foreground, %0d background; background-only batches %0d; input stalls %0d; output stalls %0d",
             n_fg_px, n_bg_px, n_bg_batch, in_stalls, out_stalls);
    checks += 4;
    if (n_bg_px == 0)    begin failures++; $display("background bypass never happened"); end
    if (n_bg_batch == 0) begin failures++; $display("no background-only batch"); end
    if (in_stalls == 0)  begin failures++; $display("no input stall"); end
    if (out_stalls == 0) begin failures++; $display("no output stall"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
