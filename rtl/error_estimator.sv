// error_estimator: first stage of the scalable unary multiplier.
//
// Splitting each n-bit operand into a high half (the downscaled operand,
// A' or B') and a low half (its downscaling error), this stage works out how
// many of the flipped error bits must line up with ones of the other
// operand:
//     Inv(A') = Error(A') * B' / 2^(n/2)      (A_L * B_H)
//     Inv(B') = Error(B') * A' / 2^(n/2)      (B_L * A_H)
// Each is one deterministic unary multiplier on 2^(n/2)-bit streams, with
// the error operand on the fast counter and the other operand's high half on
// the slow counter, as in the paper's stage-one circuit. The two run in
// parallel over 2^n cycles.
//
// The paper draws the Inv counters as n/2 bits wide and its worked example
// rounds 3 x 1/4 = 3/4 to 1. Here each output counter is n bits wide,
// preset to 2^(n/2-1), and only its upper n/2 bits are used: that is an
// n/2-bit Inv counter behind an n/2-bit prescaler, and it rounds to nearest.
// Inv never exceeds the other operand's high half, so every flip can sit on
// a one of the other stream.
//
// Timing follows unary_det_mult: `start` loads the four halves, `last` marks
// the final of the 2^n cycles, in which `inv_a_final` / `inv_b_final` are
// valid (combinational); `inv_a` / `inv_b` hold them from the next cycle,
// with `done` pulsing then. `a_hi_q` / `b_hi_q` are the stored high halves,
// which the pipeline hands on to the second stage.
module error_estimator #(
  parameter int unsigned H = unary_pkg::HALF_BITS
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [H-1:0] a_hi,
  input  logic [H-1:0] a_lo,
  input  logic [H-1:0] b_hi,
  input  logic [H-1:0] b_lo,
  output logic [H-1:0] a_hi_q,
  output logic [H-1:0] b_hi_q,
  output logic         busy,
  output logic         last,
  output logic [H-1:0] inv_a_final,
  output logic [H-1:0] inv_b_final,
  output logic [H-1:0] inv_a,
  output logic [H-1:0] inv_b,
  output logic         done
);

  localparam logic [2*H-1:0] ROUND = (2*H)'(1) << (H - 1);

  logic [2*H-1:0] acc_a_final, acc_b_final, res_a, res_b;
  logic [H-1:0]   err_a_q, err_b_q;
  logic           busy_b, last_b, done_b, and_a, and_b;

  // Inv(A'): Error(A') on the fast counter, B' on the slow counter.
  unary_det_mult #(.W(H), .PRESET(ROUND)) u_inv_a (
    .clk, .rst_n, .start,
    .a(a_lo), .b(b_hi), .a_q(err_a_q), .b_q(b_hi_q),
    .busy(busy), .and_bit(and_a), .last(last),
    .acc_final(acc_a_final), .result(res_a), .done(done)
  );

  // Inv(B'): Error(B') on the fast counter, A' on the slow counter.
  unary_det_mult #(.W(H), .PRESET(ROUND)) u_inv_b (
    .clk, .rst_n, .start,
    .a(b_lo), .b(a_hi), .a_q(err_b_q), .b_q(a_hi_q),
    .busy(busy_b), .and_bit(and_b), .last(last_b),
    .acc_final(acc_b_final), .result(res_b), .done(done_b)
  );

  assign inv_a_final = acc_a_final[2*H-1:H];
  assign inv_b_final = acc_b_final[2*H-1:H];
  assign inv_a       = res_a[2*H-1:H];
  assign inv_b       = res_b[2*H-1:H];

  // The two multipliers are started together and must stay in step.
  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
    (busy == busy_b) && (last == last_b) && (done == done_b));

endmodule
