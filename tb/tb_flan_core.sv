// tb_flan_core: one full-size processing element (256-bin input, all layer
// sizes at their defaults).  Loads a random parameter set over the parameter
// bus, then feeds synthetic decays of different peak counts and decay
// lengths plus background pixels, and compares tau_A / tau_I with the
// bit-exact reference network.  Checks the foreground latency (959 cycles
// from start to done), the 2-cycle background bypass and the `skipped` flag.
module tb_flan_core;
  import flan_pkg::*;
  import flan_ref_pkg::*;

  localparam int FG_LAT = 959, BG_LAT = 2;
  int checks = 0, failures = 0, n_fg = 0, n_bg = 0, nz = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic hist_clear = 0, hist_we = 0, start = 0, busy, done, skipped;
  logic [7:0] hist_addr = '0;
  fm_t hist_data = '0, tau_a, tau_i;
  logic [31:0] threshold = 32'd200;
  logic prm_wr_valid = 0;
  prm_wr_t prm_wr = '0;

  flan_core dut (.*);

  flan_params p;

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

  task automatic pixel(int h[]);
    int ea, ei, cyc;
    bit fg;
    for (int i = 0; i < 256; i++) begin
      @(negedge clk);
      hist_we = 1; hist_clear = (i == 0); hist_addr = 8'(i); hist_data = h[i];
    end
    @(negedge clk);
    hist_we = 0; hist_clear = 0;
    start = 1;
    @(negedge clk);
    start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    fg = p.foreground(h, int'(threshold));
    p.run(h, int'(threshold), ea, ei);
    if (fg) n_fg++; else n_bg++;
    if (ea != 0 || ei != 0) nz++;
    checks += 4;
    if (tau_a !== ea) begin failures++; $display("tau_a got %0d exp %0d", tau_a, ea); end
    if (tau_i !== ei) begin failures++; $display("tau_i got %0d exp %0d", tau_i, ei); end
    if (skipped !== !fg) begin failures++; $display("skipped %0b fg %0b", skipped, fg); end
    if (cyc != (fg ? FG_LAT : BG_LAT)) begin failures++; $display("latency %0d (fg %0b)", cyc, fg); end
  endtask

  initial begin
    int h[];
    repeat (2) @(negedge clk);
    rst_n = 1;
    p = new(256);
    p.randomize_params();
    load_all();
    for (int r = 0; r < 6; r++) begin
      flan_params::make_hist(256, 10 + 30 * r, 4 + 12 * r, h);
      pixel(h);
    end
    // background pixel: a few stray counts
    h = new[256];
    foreach (h[i]) h[i] = ((i % 50) == 7) ? 65536 : 0;
    pixel(h);
    // threshold exactly at the count -> background, one below -> foreground
    threshold = 6;
    pixel(h);
    threshold = 5;
    pixel(h);
    checks += 2;
    if (n_bg < 2 || n_fg < 5) begin failures++; $display("mix fg %0d bg %0d", n_fg, n_bg); end
    if (nz < 3) begin failures++; $display("too few non-zero lifetimes (%0d)", nz); end
    $display("foreground %0d, background %0d, non-zero results %0d", n_fg, n_bg, nz);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
