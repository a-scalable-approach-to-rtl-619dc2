// clkdiv_counter: the two series counters used for clock division.
//
// The low counter advances every enabled cycle. The high counter advances
// only when the low counter rolls over from 2^W-1, detected by ANDing all of
// the low counter's output lines, as in the paper's clock-division circuit.
// Together they sweep every (low, high) pair exactly once in 2^(2W) cycles,
// so a generator on the low counter repeats its stream 2^W times while a
// generator on the high counter holds each of its bits for 2^W cycles.
//
// The paper drives the high counter's clock from that AND gate; here the
// design is fully synchronous and the AND output is the high counter's
// enable instead, which gives the same count sequence.
//
// Interface: `clear` (priority) zeroes both counters; `en` advances them.
// `lo_wrap` is high in the cycle whose edge moves the high counter;
// `last` is high while both counters are all ones (the final cycle of a
// 2^(2W)-cycle sweep).
module clkdiv_counter #(
  parameter int unsigned W = unary_pkg::HALF_BITS
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clear,
  input  logic         en,
  output logic [W-1:0] cnt_lo,
  output logic [W-1:0] cnt_hi,
  output logic         lo_wrap,
  output logic         last
);

  assign lo_wrap = en & (&cnt_lo);
  assign last    = (&cnt_lo) & (&cnt_hi);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt_lo <= '0;
      cnt_hi <= '0;
    end else if (clear) begin
      cnt_lo <= '0;
      cnt_hi <= '0;
    end else if (en) begin
      cnt_lo <= cnt_lo + 1'b1;
      if (lo_wrap) cnt_hi <= cnt_hi + 1'b1;
    end
  end

endmodule
