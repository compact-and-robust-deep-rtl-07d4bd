// tb_output_logic: captures random 8-word vectors and drains them with
// random back-pressure on m_ready; checks word order, m_last on the eighth
// word only, that busy ends after the last word and that a capture while busy
// is ignored.  The module's own assertion checks that offered words are held.
module tb_output_logic;
  import flan_pkg::*;

  int checks = 0, failures = 0, stalls = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic capture = 0, busy, m_valid, m_ready = 0, m_last;
  fm_t  vals [8];
  fm_t  m_data;
  fm_t  sent [8];

  output_logic dut (.*);

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int b = 0; b < 40; b++) begin
      automatic int got = 0;
      @(negedge clk);
      foreach (vals[i]) begin vals[i] = fm_t'($urandom); sent[i] = vals[i]; end
      capture = 1;
      @(negedge clk);
      capture = 0;
      foreach (vals[i]) vals[i] = fm_t'($urandom);  // must not matter now
      capture = (b % 3 == 0);                        // ignored while busy
      while (got < 8) begin
        m_ready = ($urandom % 3) != 0;
        if (m_valid && !m_ready) stalls++;
        @(posedge clk);
        if (m_valid && m_ready) begin
          checks += 2;
          if (m_data !== sent[got]) begin failures++; $display("batch %0d word %0d got %h exp %h", b, got, m_data, sent[got]); end
          if (m_last !== (got == 7)) begin failures++; $display("m_last wrong at word %0d", got); end
          got++;
        end
        @(negedge clk);
        capture = 0;
      end
      m_ready = 0;
      checks++;
      if (busy || m_valid) begin failures++; $display("still busy after 8 words"); end
    end
    checks++;
    if (stalls == 0) begin failures++; $display("back-pressure never exercised"); end
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
