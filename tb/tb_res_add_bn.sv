// tb_res_add_bn: random AC outputs, skip inputs and BN coefficients; checks
// every element of BN(a + skip) (no ReLU) against the reference and the
// W + 1 cycle latency from start to done.
module tb_res_add_bn;
  import flan_pkg::*;
  import flan_ref_pkg::*;

  localparam int W = 14, CH = 10;
  int checks = 0, failures = 0, negs = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0, busy, done;
  fm_t a_fm [W*CH], skip_fm [W*CH], out_fm [W*CH];
  logic prm_wr_valid = 0;
  prm_wr_t prm_wr = '0;
  int sc [CH], shf [CH];

  res_add_bn dut (.*);

  task automatic wr(prm_kind_e kd, int co, int v);
    @(negedge clk);
    prm_wr_valid = 1; prm_wr.layer = L_RES_BN; prm_wr.kind = kd; prm_wr.co = 8'(co); prm_wr.data = prm_t'(v);
    @(negedge clk);
    prm_wr_valid = 0;
  endtask

  initial begin
    int cyc;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 5; rep++) begin
      for (int c = 0; c < CH; c++) begin
        sc[c] = flan_params::rnd(-2048, 2048);
        shf[c] = flan_params::rnd(-30*1024, 30*1024);
        wr(P_SCALE, c, sc[c]);
        wr(P_SHIFT, c, shf[c]);
      end
      wr(P_WEIGHT, 0, 777);  // no weights in this unit: must be ignored
      foreach (a_fm[i]) begin
        a_fm[i] = fm_t'(flan_params::rnd(0, 50*65536));
        skip_fm[i] = fm_t'(flan_params::rnd(0, 50*65536));
      end
      @(negedge clk);
      start = 1;
      @(negedge clk);
      start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc != W + 1) begin failures++; $display("latency %0d", cyc); end
      for (int i = 0; i < W*CH; i++) begin
        automatic int e = ref_bn(longint'(a_fm[i]) + longint'(skip_fm[i]), sc[i % CH], shf[i % CH], 1, 0);
        checks++;
        if (e < 0) negs++;
        if (out_fm[i] !== e) begin failures++; if (failures < 10) $display("[%0d] got %0d exp %0d", i, out_fm[i], e); end
      end
    end
    checks++;
    if (negs == 0) begin failures++; $display("no negative outputs: ReLU-free path not shown"); end
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
