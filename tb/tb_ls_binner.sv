// tb_ls_binner: streams random 256-bin histograms (with random idle cycles
// and a changing tag) through the log-scale merger and checks the 80 merged
// bins: their order, out_first on bin 0 only, the carried tag and each sum
// against the boundary table s(x) = floor((r^x - 1)/(r - 1)),
// r = 1.0255954589 ((r^80 - 1)/(r - 1) = 256), written out below.  A second
// histogram is cut short and restarted with in_first to check the restart.
module tb_ls_binner;
  import flan_pkg::*;

  localparam int S [81] = '{0, 1, 2, 3, 4, 5, 6, 7, 8, 9, 11, 12, 13, 15, 16, 18, 19, 20, 22,
    24, 25, 27, 29, 30, 32, 34, 36, 38, 40, 42, 44, 46, 48, 50, 53, 55, 57, 60, 63, 65, 68, 71,
    73, 76, 79, 82, 85, 89, 92, 95, 99, 102, 106, 110, 113, 117, 121, 125, 130, 134, 138, 143,
    148, 152, 157, 162, 168, 173, 178, 184, 190, 195, 201, 208, 214, 220, 227, 234, 241, 248, 256};

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid = 0, in_first = 0, out_valid, out_first;
  fm_t  in_data = '0, out_data;
  logic [3:0] in_tag = '0, out_tag;
  logic [6:0] out_addr;

  ls_binner dut (.*);

  int hist [256];
  int n_out, exp_tag;

  always @(posedge clk) if (rst_n && out_valid) begin
    automatic longint e = 0;
    for (int i = S[n_out]; i < S[n_out + 1]; i++) e += hist[i];
    checks += 4;
    if (out_addr !== 7'(n_out)) begin failures++; $display("addr %0d exp %0d", out_addr, n_out); end
    if (out_first !== (n_out == 0)) begin failures++; $display("out_first wrong at %0d", n_out); end
    if (out_tag !== 4'(exp_tag)) begin failures++; $display("tag wrong"); end
    if (out_data !== fm_t'(e)) begin failures++; $display("bin %0d got %0d exp %0d", n_out, out_data, e); end
    n_out++;
  end

  task automatic send(int n, int tag);
    n_out = 0; exp_tag = tag;
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      in_valid = 0;
      while (($urandom % 4) == 0) @(negedge clk);
      in_valid = 1; in_first = (i == 0); in_data = hist[i]; in_tag = 4'(tag);
    end
    @(negedge clk);
    in_valid = 0; in_first = 0;
    @(negedge clk);
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 6; rep++) begin
      foreach (hist[i]) hist[i] = int'($urandom % 200) * 65536 + int'($urandom % 65536);
      if (rep == 2) begin
        send(100, 9);   // cut short, then restarted below
        checks++;
        if (n_out != 50) begin failures++; $display("%0d bins from 100 inputs, exp 50", n_out); end
      end
      send(256, rep);
      checks++;
      if (n_out != 80) begin failures++; $display("%0d merged bins", n_out); end
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
