// unary_det_mult: deterministic (clock-division) unary multiplier.
//
// Two thermometer generators share a clock-division counter pair: operand
// `a` is compared with the fast (low) counter and operand `b` with the slow
// (high) counter, so every bit of one stream meets every bit of the other
// exactly once in 2^(2W) cycles. An AND gate multiplies the two streams and
// an output counter accumulates its ones, giving exactly a*b after the
// sweep. The structure is the paper's (generators, series counters, AND,
// accumulating counter).
//
// PRESET is the value the output counter starts from. The error estimator
// uses PRESET = 2^(W-1) and reads the upper W bits, which rounds a*b/2^W to
// the nearest integer; with PRESET = 0 the result is the exact product.
//
// Timing: `start` (one cycle) loads `a`, `b`, clears the counters and the
// accumulator. The 2^(2W) stream bits are produced in the following cycles
// while `busy` is high; `last` marks the final one, in which `acc_final`
// (combinational) already holds the finished count. `result` is registered
// from it and `done` pulses in the next cycle. `start` may be asserted in
// the `last` cycle to begin the next product without a gap.
module unary_det_mult #(
  parameter int unsigned     W      = unary_pkg::HALF_BITS,
  parameter logic [2*W-1:0]  PRESET = '0
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic [W-1:0]   a,
  input  logic [W-1:0]   b,
  output logic [W-1:0]   a_q,
  output logic [W-1:0]   b_q,
  output logic           busy,
  output logic           and_bit,
  output logic           last,
  output logic [2*W-1:0] acc_final,
  output logic [2*W-1:0] result,
  output logic           done
);

  logic [W-1:0]   cnt_lo, cnt_hi;
  logic           lo_wrap, sweep_last;
  logic           a_bit, b_bit;
  logic [2*W-1:0] acc;

  clkdiv_counter #(.W(W)) u_cnt (
    .clk, .rst_n,
    .clear  (start),
    .en     (busy),
    .cnt_lo (cnt_lo),
    .cnt_hi (cnt_hi),
    .lo_wrap(lo_wrap),
    .last   (sweep_last)
  );

  unary_sng #(.W(W)) u_gen_a (
    .clk, .rst_n, .load(start), .din(a), .cnt(cnt_lo), .value(a_q), .bit_o(a_bit)
  );
  unary_sng #(.W(W)) u_gen_b (
    .clk, .rst_n, .load(start), .din(b), .cnt(cnt_hi), .value(b_q), .bit_o(b_bit)
  );

  assign and_bit   = busy & a_bit & b_bit;
  assign last      = busy & sweep_last;
  assign acc_final = acc + {{(2*W-1){1'b0}}, and_bit};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy   <= 1'b0;
      acc    <= '0;
      result <= '0;
      done   <= 1'b0;
    end else begin
      done <= last;
      if (last) result <= acc_final;
      if (start) begin
        busy <= 1'b1;
        acc  <= PRESET;
      end else if (busy) begin
        acc <= acc_final;
        if (sweep_last) busy <= 1'b0;
      end
    end
  end

endmodule
