// tb_ac_lane: drives one adder-conv lane with random runs of 1..6 cycles
// (first on the first, last on the final cycle) and random channel masks,
// and compares each result with -sum|x - w*64| computed in the testbench.
// Also checks that the result appears exactly one cycle after `last`.
module tb_ac_lane;
  import flan_pkg::*;

  localparam int CI = 4;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  logic en = 0, first = 0, last = 0;
  logic [CI-1:0] mask = '0;
  fm_t  x [CI];
  prm_t w [CI];
  logic res_valid;
  acc_t res;

  always #5 clk = ~clk;

  ac_lane #(.CI_PAR(CI)) dut (.*);

  initial begin
    longint expv;
    for (int j = 0; j < CI; j++) begin x[j] = '0; w[j] = '0; end
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int run = 0; run < 300; run++) begin
      automatic int len = 1 + int'($urandom % 6);
      expv = 0;
      for (int c = 0; c < len; c++) begin
        @(negedge clk);
        en = 1; first = (c == 0); last = (c == len - 1);
        for (int j = 0; j < CI; j++) begin
          automatic int xv = int'($urandom % 8000000) - 1000000;
          automatic int wv = int'($urandom % 200000) - 50000;
          automatic bit m  = ($urandom % 4) != 0;
          automatic longint d;
          x[j] = xv; w[j] = prm_t'(wv); mask[j] = m;
          d = longint'(xv) - longint'(wv) * 64;
          if (m) expv += (d < 0) ? -d : d;
        end
      end
      // gap cycle: sometimes enabled with no channel active
      @(negedge clk);
      en = ($urandom % 2) == 0; first = 0; last = 0; mask = '0;
      checks++;
      if (!res_valid || res !== acc_t'(-expv)) begin
        failures++;
        $display("run %0d: valid=%0b got %0d exp %0d", run, res_valid, res, -expv);
      end
      @(negedge clk);
      en = 0;
      checks++;
      if (res_valid) begin failures++; $display("res_valid longer than one cycle"); end
    end
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
