// tb_input_logic: streams batches of 4 x 256 bins with random gaps in
// s_valid and checks that every bin lands in the right PE buffer at the
// right address with the right value, that hist_clear marks bin 0 of each
// histogram, that `loaded` pulses once per batch together with the last
// write and that s_ready stays low between batches until `arm`.
module tb_input_logic;
  import flan_pkg::*;

  localparam int NP = 4, NB = 256;
  int checks = 0, failures = 0, gaps = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic arm = 0, s_valid = 0, s_ready, loaded;
  fm_t  s_data = '0;
  logic [NP-1:0] hist_we, hist_clear;
  logic [7:0] hist_addr;
  fm_t  hist_data;

  input_logic dut (.*);

  fm_t mem [NP][NB];
  int  writes, loads;

  always @(posedge clk) if (rst_n) begin
    for (int p = 0; p < NP; p++)
      if (hist_we[p]) begin
        mem[p][hist_addr] <= hist_data;
        writes++;
        if (hist_clear[p] !== (hist_addr == 0)) begin failures++; $display("hist_clear wrong at pe %0d bin %0d", p, hist_addr); end
      end
    if ($countones(hist_we) > 1) begin failures++; $display("two PEs written at once"); end
    if (loaded) loads++;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int b = 0; b < 3; b++) begin
      @(negedge clk);
      checks++;
      if (s_ready) begin failures++; $display("ready before arm"); end
      arm = 1;
      @(negedge clk);
      arm = 0;
      writes = 0; loads = 0;
      for (int i = 0; i < NP*NB; i++) begin
        s_valid = 0;
        while (($urandom % 5) == 0) begin gaps++; @(negedge clk); end
        s_valid = 1; s_data = fm_t'(b * 100000 + i);
        @(posedge clk);
        while (!s_ready) @(posedge clk);
        @(negedge clk);
      end
      s_valid = 0;
      repeat (3) @(negedge clk);
      checks += 3;
      if (writes != NP*NB) begin failures++; $display("writes %0d", writes); end
      if (loads != 1) begin failures++; $display("loaded pulses %0d", loads); end
      if (s_ready) begin failures++; $display("ready after a full batch"); end
      for (int p = 0; p < NP; p++)
        for (int i = 0; i < NB; i++) begin
          checks++;
          if (mem[p][i] !== fm_t'(b * 100000 + p*NB + i)) begin
            failures++;
            if (failures < 10) $display("pe %0d bin %0d got %0d", p, i, mem[p][i]);
          end
        end
    end
    checks++;
    if (gaps == 0) begin failures++; $display("no input gaps"); end
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
