// tb_res_block: loads random parameters for the residual block's UAC, AC
// and final BN, runs random 14 x 10 maps through it, and compares the output
// with the reference UAC -> AC+ReLU -> add -> BN.  A second instance with
// MID_BN_EN = 1 (BN between the AC and the ReLU) is checked the same way so
// that the AC path is seen to contribute.  Checks the latency:
// (14 + 3) + 1 + (14 + 3) + 1 + (14 + 1) = 51 cycles.
module tb_res_block;
  import flan_pkg::*;
  import flan_ref_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0, busy, done, busy2, done2;
  fm_t in_fm [140], out_fm [140], out2 [140];
  logic prm_wr_valid = 0;
  prm_wr_t prm_wr = '0;

  res_block dut (.clk, .rst_n, .start, .busy, .done, .in_fm, .out_fm, .prm_wr_valid, .prm_wr);
  res_block #(.MID_BN_EN(1'b1)) dut_bn (.clk, .rst_n, .start, .busy(busy2), .done(done2),
                                      .in_fm, .out_fm(out2), .prm_wr_valid, .prm_wr);

  flan_params p;

  task automatic wr(int l, prm_kind_e kd, int co, int ci, int k, int v);
    @(negedge clk);
    prm_wr_valid = 1; prm_wr.layer = layer_e'(l); prm_wr.kind = kd;
    prm_wr.co = 8'(co); prm_wr.ci = 8'(ci); prm_wr.k = 4'(k); prm_wr.data = prm_t'(v);
    @(negedge clk);
    prm_wr_valid = 0;
  endtask

  initial begin
    int fin[], u[], a[], a2[], e, e2, cyc, nz_a2;
    repeat (2) @(negedge clk);
    rst_n = 1;
    p = new(256);
    p.randomize_params();
    for (int l = 2; l <= 4; l++)
      for (int co = 0; co < 10; co++) begin
        for (int ci = 0; ci < p.ch_in[l]; ci++) wr(l, P_WEIGHT, co, ci, 0, p.wt[l][co*p.ch_in[l] + ci]);
        wr(l, P_SCALE, co, 0, 0, p.sc[l][co]);
        wr(l, P_SHIFT, co, 0, 0, p.shf[l][co]);
      end
    nz_a2 = 0;
    for (int rep = 0; rep < 4; rep++) begin
      fin = new[140];
      foreach (fin[i]) begin fin[i] = flan_params::rnd(0, 40*65536); in_fm[i] = fin[i]; end
      @(negedge clk);
      start = 1;
      @(negedge clk);
      start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc != 51) begin failures++; $display("latency %0d", cyc); end
      ref_layer(fin, 14, 10, 10, 1, 1, p.wt[2], p.sc[2], p.shf[2], 1, 1, u);
      ref_layer(u, 14, 10, 10, 1, 1, p.wt[3], p.sc[3], p.shf[3], 0, 1, a);
      ref_layer(u, 14, 10, 10, 1, 1, p.wt[3], p.sc[3], p.shf[3], 1, 1, a2);
      for (int i = 0; i < 140; i++) begin
        e  = ref_bn(longint'(a[i]) + longint'(fin[i]), p.sc[4][i % 10], p.shf[4][i % 10], 1, 0);
        e2 = ref_bn(longint'(a2[i]) + longint'(fin[i]), p.sc[4][i % 10], p.shf[4][i % 10], 1, 0);
        if (a2[i] != 0) nz_a2++;
        checks += 2;
        if (out_fm[i] !== e)  begin failures++; if (failures < 10) $display("[%0d] got %0d exp %0d", i, out_fm[i], e); end
        if (out2[i]   !== e2) begin failures++; if (failures < 10) $display("bn [%0d] got %0d exp %0d", i, out2[i], e2); end
      end
    end
    checks++;
    if (nz_a2 == 0) begin failures++; $display("AC path never non-zero"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
