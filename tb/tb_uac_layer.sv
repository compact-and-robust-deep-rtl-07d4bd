// tb_uac_layer: loads random weights and batch-norm coefficients into three
// UAC layers over the parameter bus, runs random feature maps through them
// and compares every output element with the reference model.
//   A: the default geometry (Pre #1: 256 x 1 -> 49 x 5, kernel 13, stride 5)
//   B: channel counts that are not multiples of the parallelism
//      (7 -> 5 channels, CI_PAR 3, CO_PAR 2, kernel 3, stride 2)
//   C: as B but with BN and ReLU off (raw adder-conv output, saturated)
// It also checks the latency from start to done, W_OUT*ceil(CH_OUT/CO_PAR)*
// K*ceil(CH_IN/CI_PAR) + 3 cycles, and that writes for another layer id are
// ignored.
module tb_uac_layer;
  import flan_pkg::*;
  import flan_ref_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic    prm_wr_valid = 0;
  prm_wr_t prm_wr = '0;

  // ---------------- A: defaults
  localparam int A_WO = 49;
  logic a_start = 0, a_busy, a_done;
  fm_t  a_in [256];
  fm_t  a_out [A_WO*5];
  uac_layer dut_a (.clk, .rst_n, .start(a_start), .busy(a_busy), .done(a_done),
                   .in_fm(a_in), .out_fm(a_out), .prm_wr_valid, .prm_wr);

  // ---------------- B / C: odd sizes
  localparam int B_CI = 7, B_CO = 5, B_K = 3, B_S = 2, B_WI = 11, B_WO = 5;
  logic b_start = 0, b_busy, b_done, c_busy, c_done;
  fm_t  b_in [B_WI*B_CI];
  fm_t  b_out [B_WO*B_CO];
  fm_t  c_out [B_WO*B_CO];
  uac_layer #(.LAYER_ID(L_PRE2), .CH_IN(B_CI), .CH_OUT(B_CO), .K(B_K), .S(B_S), .W_IN(B_WI),
              .CI_PAR(3), .CO_PAR(2)) dut_b (
    .clk, .rst_n, .start(b_start), .busy(b_busy), .done(b_done),
    .in_fm(b_in), .out_fm(b_out), .prm_wr_valid, .prm_wr);
  uac_layer #(.LAYER_ID(L_RES_A), .CH_IN(B_CI), .CH_OUT(B_CO), .K(B_K), .S(B_S), .W_IN(B_WI),
              .CI_PAR(3), .CO_PAR(2), .BN_EN(1'b0), .RELU_EN(1'b0)) dut_c (
    .clk, .rst_n, .start(b_start), .busy(c_busy), .done(c_done),
    .in_fm(b_in), .out_fm(c_out), .prm_wr_valid, .prm_wr);

  task automatic wr(layer_e l, prm_kind_e kd, int co, int ci, int k, int v);
    @(negedge clk);
    prm_wr_valid = 1;
    prm_wr.layer = l; prm_wr.kind = kd;
    prm_wr.co = 8'(co); prm_wr.ci = 8'(ci); prm_wr.k = 4'(k); prm_wr.data = prm_t'(v);
    @(negedge clk);
    prm_wr_valid = 0;
  endtask

  task automatic load(layer_e l, int ci_n, int co_n, int k_n, ref int wt[], ref int sc[], ref int shf[]);
    for (int co = 0; co < co_n; co++) begin
      for (int ci = 0; ci < ci_n; ci++)
        for (int k = 0; k < k_n; k++)
          wr(l, P_WEIGHT, co, ci, k, wt[(co*ci_n + ci)*k_n + k]);
      wr(l, P_SCALE, co, 0, 0, sc[co]);
      wr(l, P_SHIFT, co, 0, 0, shf[co]);
    end
  endtask

  task automatic gen(int n, int terms, output int wt[], output int sc[], output int shf[], input int co_n);
    wt = new[n]; sc = new[co_n]; shf = new[co_n];
    foreach (wt[i]) wt[i] = flan_params::rnd(-5*1024, 60*1024);
    foreach (sc[i]) begin
      sc[i] = -(1024 * flan_params::rnd(30, 150)) / (100 * terms);
      if (sc[i] == 0) sc[i] = -1;
      if (flan_params::rnd(0, 4) == 0) sc[i] = -sc[i];
    end
    foreach (shf[i]) shf[i] = flan_params::rnd(-20*1024, 20*1024);
  endtask

  // run one layer and return the cycle count from start to done
  task automatic run(ref logic st, ref logic dn, output int cycles);
    @(negedge clk);
    st = 1;
    cycles = 0;
    @(negedge clk);
    st = 0;
    cycles = 1;
    while (!dn) begin @(negedge clk); cycles++; end
  endtask

  int a_wt[], a_sc[], a_sh[], b_wt[], b_sc[], b_sh[];
  int in_a[], in_b[], exp_o[], exp_c[];
  int cyc, nz;

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    gen(13*5, 13, a_wt, a_sc, a_sh, 5);
    gen(B_CO*B_CI*B_K, B_CI*B_K, b_wt, b_sc, b_sh, B_CO);
    load(L_PRE1, 1, 5, 13, a_wt, a_sc, a_sh);
    load(L_PRE2, B_CI, B_CO, B_K, b_wt, b_sc, b_sh);
    load(L_RES_A, B_CI, B_CO, B_K, b_wt, b_sc, b_sh);
    // writes addressed to other layers must not disturb A
    wr(L_OA1, P_WEIGHT, 0, 0, 0, 12345);
    wr(L_PRE2, P_SCALE, 0, 0, 0, b_sc[0]);

    for (int rep = 0; rep < 3; rep++) begin
      int peak = 20 + 20 * rep;
      flan_params::make_hist(256, peak, 10 + 15 * rep, in_a);
      foreach (a_in[i]) a_in[i] = in_a[i];
      in_b = new[B_WI*B_CI];
      foreach (in_b[i]) begin in_b[i] = flan_params::rnd(0, 60*65536); b_in[i] = in_b[i]; end

      run(a_start, a_done, cyc);
      checks++;
      if (cyc != A_WO*1*13*1 + 3) begin failures++; $display("A latency %0d", cyc); end
      ref_layer(in_a, 256, 1, 5, 13, 5, a_wt, a_sc, a_sh, 1, 1, exp_o);
      nz = 0;
      foreach (exp_o[i]) begin
        checks++;
        if (a_out[i] !== exp_o[i]) begin failures++; if (failures < 10) $display("A[%0d] got %0d exp %0d", i, a_out[i], exp_o[i]); end
        if (exp_o[i] != 0) nz++;
      end
      if (nz == 0 || nz == A_WO*5) $display("note: A outputs all %s", nz == 0 ? "zero" : "non-zero");

      run(b_start, b_done, cyc);
      checks++;
      if (cyc != B_WO*3*B_K*3 + 3) begin failures++; $display("B latency %0d", cyc); end
      checks++;
      if (!c_done && c_busy) begin failures++; $display("C did not finish with B"); end
      ref_layer(in_b, B_WI, B_CI, B_CO, B_K, B_S, b_wt, b_sc, b_sh, 1, 1, exp_o);
      ref_layer(in_b, B_WI, B_CI, B_CO, B_K, B_S, b_wt, b_sc, b_sh, 0, 0, exp_c);
      foreach (exp_o[i]) begin
        checks += 2;
        if (b_out[i] !== exp_o[i]) begin failures++; $display("B[%0d] got %0d exp %0d", i, b_out[i], exp_o[i]); end
        if (c_out[i] !== exp_c[i]) begin failures++; $display("C[%0d] got %0d exp %0d", i, c_out[i], exp_c[i]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
