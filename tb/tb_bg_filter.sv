// tb_bg_filter: loads histograms whose photon counts lie just below, at and
// just above the threshold, and random ones, and checks the count and the
// foreground flag (N_pc > T) against sums made in the testbench.  Also checks
// that `clear` together with the first bin restarts the count.
module tb_bg_filter;
  import flan_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        clear = 0, bin_valid = 0;
  fm_t         bin = '0;
  logic [31:0] threshold = '0;
  logic [ACC_W-1:0] npc;
  logic        fg;

  bg_filter dut (.*);

  // send n bins whose total is `total` photons (plus `frac` in Q16.16)
  task automatic send(int n, int total, int frac);
    int left = total;
    for (int i = 0; i < n; i++) begin
      int v = (i == n - 1) ? left : int'($urandom % (left / 4 + 1));
      @(negedge clk);
      clear = (i == 0); bin_valid = 1; bin = fm_t'(v * 65536 + ((i == n - 1) ? frac : 0));
      left -= v;
    end
    @(negedge clk);
    clear = 0; bin_valid = 0;
  endtask

  task automatic expect_fg(longint exp_cnt, bit exp_fg);
    checks += 2;
    if (npc !== ACC_W'(exp_cnt)) begin failures++; $display("npc got %0d exp %0d", npc, exp_cnt); end
    if (fg !== exp_fg) begin failures++; $display("fg got %0b exp %0b (npc %0d, T %0d)", fg, exp_fg, npc, threshold); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    threshold = 100;
    send(256, 100, 0);     expect_fg(100 * 65536, 0);        // N_pc = T -> background
    send(256, 100, 1);     expect_fg(100 * 65536 + 1, 1);    // just above
    send(256, 99, 65535);  expect_fg(99 * 65536 + 65535, 0); // just below
    send(256, 101, 0);     expect_fg(101 * 65536, 1);
    threshold = 0;
    send(16, 0, 0);        expect_fg(0, 0);                  // empty pixel
    for (int r = 0; r < 50; r++) begin
      automatic int tot = int'($urandom % 5000);
      threshold = $urandom % 5000;
      send(256, tot, 0);
      expect_fg(longint'(tot) * 65536, tot > int'(threshold));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
