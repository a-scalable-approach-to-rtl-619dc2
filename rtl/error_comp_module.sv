// error_comp_module: Error Compensation Module of the main multiply stage.
//
// Downscaling always rounds an operand down, so its only wrong bit is the
// first 0 of its thermometer stream, and compensation only ever turns that
// 0 into a 1. In the clock-division sweep that bit recurs 2^(n/2) times; the
// module flips it Inv times, choosing recurrences that meet ones of the
// other operand, so each flip adds exactly one to the product:
//   * A (fast stream): its first 0 appears once per row; it is flipped in
//     the first Inv(A') rows, where B' (thermometer, ones first) is 1.
//   * B (slow stream): its first 0 fills one whole row; it is flipped in
//     that row's first Inv(B') columns, where A' is 1.
// The two kinds of flip never fall on the same cycle, so the unused
// Error(A') x Error(B') term is left out, as the paper intends.
//
// What the module must do is the paper's; how is this design's choice. The
// first 0 is found from the streams alone, without comparing counters with
// operands. Inv(A') and Inv(B') are loaded into down-counters at `start`; a
// flip is made while the counter is non-zero and consumes one count.
//   * For A a register remembers the previous bit of the row (taken as 1 at
//     the start of each row), and a 1->0 step marks the first 0.
//   * For B no such register is needed: the first row in which B is 0 is
//     its first-0 row, and since Inv(B') is below the row length of
//     2^(n/2), the down-counter is used up within that row.
// The two multiplexers choose between each stream and its inverse with
// `sel_a` / `sel_b`.
//
// Timing: `start` loads the Inv counts; thereafter `en` is high for each
// stream bit and `lo_wrap` in the last column of every row (from the
// counter pair). Outputs are combinational in the current bits.
module error_comp_module #(
  parameter int unsigned H = unary_pkg::HALF_BITS
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [H-1:0] inv_a_in,
  input  logic [H-1:0] inv_b_in,
  input  logic         en,
  input  logic         lo_wrap,
  input  logic         a_bit,
  input  logic         b_bit,
  output logic         sel_a,
  output logic         sel_b,
  output logic         a_out,
  output logic         b_out
);

  logic [H-1:0] rem_a, rem_b;
  logic         prev_a;
  logic         first0_a, first0_b;

  assign first0_a = ~a_bit & prev_a;
  assign first0_b = ~b_bit;

  assign sel_a = en & first0_a & (rem_a != '0);
  assign sel_b = en & first0_b & (rem_b != '0);

  // A / NOT(A) and B / NOT(B) multiplexers.
  assign a_out = sel_a ? ~a_bit : a_bit;
  assign b_out = sel_b ? ~b_bit : b_bit;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rem_a  <= '0;
      rem_b  <= '0;
      prev_a <= 1'b1;
    end else if (start) begin
      rem_a  <= inv_a_in;
      rem_b  <= inv_b_in;
      prev_a <= 1'b1;
    end else if (en) begin
      if (sel_a) rem_a <= rem_a - 1'b1;
      if (sel_b) rem_b <= rem_b - 1'b1;
      prev_a <= lo_wrap ? 1'b1 : a_bit;
    end
  end

endmodule
