// tb_out_branch: loads random parameters into an O #1 (tau_A) and an O #2
// (tau_I) branch, feeds both the same random 1 x 140 vector and checks each
// lifetime against the reference 140 -> 70 -> 30 -> 1 UAC chain; checks
// that the two branches keep their own parameters and the latency
// (98+3) + 1 + (21+3) + 1 + (3+3) = 133 cycles.
module tb_out_branch;
  import flan_pkg::*;
  import flan_ref_pkg::*;

  int checks = 0, failures = 0, nz = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0, busy_a, done_a, busy_i, done_i;
  fm_t in_fm [140], tau_a, tau_i;
  logic prm_wr_valid = 0;
  prm_wr_t prm_wr = '0;

  out_branch dut_a (.clk, .rst_n, .start, .busy(busy_a), .done(done_a), .in_fm, .tau(tau_a), .prm_wr_valid, .prm_wr);
  out_branch #(.LID1(L_OI1), .LID2(L_OI2), .LID3(L_OI3)) dut_i (
    .clk, .rst_n, .start, .busy(busy_i), .done(done_i), .in_fm, .tau(tau_i), .prm_wr_valid, .prm_wr);

  flan_params p;

  task automatic wr(int l, prm_kind_e kd, int co, int ci, int v);
    @(negedge clk);
    prm_wr_valid = 1; prm_wr.layer = layer_e'(l); prm_wr.kind = kd;
    prm_wr.co = 8'(co); prm_wr.ci = 8'(ci); prm_wr.k = '0; prm_wr.data = prm_t'(v);
    @(negedge clk);
    prm_wr_valid = 0;
  endtask

  initial begin
    int fin[], o1[], o2[], o3[], cyc;
    repeat (2) @(negedge clk);
    rst_n = 1;
    p = new(256);
    p.randomize_params();
    for (int l = 5; l <= 10; l++)
      for (int co = 0; co < p.ch_out[l]; co++) begin
        for (int ci = 0; ci < p.ch_in[l]; ci++) wr(l, P_WEIGHT, co, ci, p.wt[l][co*p.ch_in[l] + ci]);
        wr(l, P_SCALE, co, 0, p.sc[l][co]);
        wr(l, P_SHIFT, co, 0, p.shf[l][co]);
      end
    for (int rep = 0; rep < 6; rep++) begin
      fin = new[140];
      foreach (fin[i]) begin fin[i] = flan_params::rnd(0, 40*65536); in_fm[i] = fin[i]; end
      @(negedge clk);
      start = 1;
      @(negedge clk);
      start = 0;
      cyc = 1;
      while (!(done_a && done_i)) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc != 133) begin failures++; $display("latency %0d", cyc); end
      for (int b = 0; b < 2; b++) begin
        automatic int l0 = (b == 0) ? 5 : 8;
        ref_layer(fin, 1, 140, 70, 1, 1, p.wt[l0], p.sc[l0], p.shf[l0], 1, 1, o1);
        ref_layer(o1, 1, 70, 30, 1, 1, p.wt[l0+1], p.sc[l0+1], p.shf[l0+1], 1, 1, o2);
        ref_layer(o2, 1, 30, 1, 1, 1, p.wt[l0+2], p.sc[l0+2], p.shf[l0+2], 1, 1, o3);
        checks++;
        if (o3[0] != 0) nz++;
        if (((b == 0) ? tau_a : tau_i) !== o3[0]) begin
          failures++;
          $display("branch %0d got %0d exp %0d", b, (b == 0) ? tau_a : tau_i, o3[0]);
        end
      end
    end
    if (nz == 0) $display("note: all lifetimes zero");
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
