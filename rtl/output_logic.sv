// output_logic: the "Output logic (memcpy)" of the accelerator.  When all PEs
// of a batch have finished, it captures their 2*N_PE lifetimes (tau_A and
// tau_I of each pixel) and sends them to the host as one vector on a
// valid/ready stream: PE0 tau_A, PE0 tau_I, PE1 tau_A, ... with m_last on the
// final word.
//
// `capture` (one cycle, while idle) loads the vector; the first word is
// offered in the next cycle, one word leaves per cycle in which m_ready is
// high, and `busy` stays high until the last word has been taken.  Standard
// stream rules hold and are asserted: once m_valid is high, m_valid, m_data
// and m_last stay unchanged until m_ready.
//
// The eight-value output vector per batch of four pixels is the paper's; the
// stream format and word order are this design's choices.
module output_logic
  import flan_pkg::*;
#(
  parameter int N_OUT = 8
) (
  input  logic clk,
  input  logic rst_n,
  input  logic capture,
  input  fm_t  vals [N_OUT],
  output logic busy,
  output logic m_valid,
  input  logic m_ready,
  output fm_t  m_data,
  output logic m_last
);

  fm_t buf_q [N_OUT];
  int  idx_q;

  assign m_valid = busy;
  assign m_data  = buf_q[idx_q];
  assign m_last  = busy && (idx_q == N_OUT - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      idx_q <= 0;
    end else if (!busy) begin
      if (capture) begin
        busy  <= 1'b1;
        idx_q <= 0;
      end
    end else if (m_ready) begin
      if (idx_q == N_OUT - 1) busy <= 1'b0;
      else                    idx_q <= idx_q + 1;
    end
  end

  always_ff @(posedge clk) begin
    if (capture && !busy) buf_q <= vals;
  end

  // stream rule: a word on offer is held until it is taken
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
    (m_valid && !m_ready) |=> (m_valid && $stable(m_data) && $stable(m_last)));

endmodule
