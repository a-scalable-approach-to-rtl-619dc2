// unary_scalable_mult: scalable deterministic unary multiplier (two-stage
// pipeline).
//
// Multiplying two 2^n-bit unary streams by clock division needs 2^(2n)
// cycles. This multiplier keeps the output at 2^n bits instead: each n-bit
// operand is split into a high half (the downscaled operand, a 2^(n/2)-bit
// stream) and a low half (the error made by rounding it down), and
//     A*B / 2^n  ~  A_H*B_H + round(A_L*B_H / 2^(n/2)) + round(B_L*A_H / 2^(n/2)).
// Stage 1 (error_estimator) computes the two correction terms with two
// unary multipliers; stage 2 (main_multiplier) produces the A_H x B_H
// stream and flips exactly that many extra 0s to 1s. The A_L*B_L term is
// left out, as in the paper, which bounds the error at two output bits.
//
// Both stages take 2^n cycles, so they are run as a pipeline: while stage 2
// streams the product of one operand pair, stage 1 works on the next. A new
// pair is accepted every 2^n cycles and each result leaves 2^(n+1) cycles
// after it entered. The lock-step control below is this design's own; the
// paper only says that the two stages can be pipelined.
//
// Interface: valid/ready on the input; an operand pair is taken in a cycle
// with `in_valid && in_ready`, together with `in_user` (sideband copied to
// the outputs that belong to the same product). `in_ready` is high when the
// pipeline is idle or both busy stages are in their final cycle.
// `out_valid` marks the 2^n cycles of the output bit-stream `out_bit`,
// `out_last` its final bit. `res_valid` pulses one cycle later with the
// accumulated count `result` (the product in units of 2^-n).
module unary_scalable_mult #(
  parameter int unsigned N_BITS = unary_pkg::N_BITS,
  parameter int unsigned USER_W = 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [N_BITS-1:0] a,
  input  logic [N_BITS-1:0] b,
  input  logic [USER_W-1:0] in_user,
  output logic              out_valid,
  output logic              out_bit,
  output logic              out_last,
  output logic [USER_W-1:0] out_user,
  output logic              res_valid,
  output logic [N_BITS-1:0] result,
  output logic [USER_W-1:0] res_user
);

  localparam int unsigned H = N_BITS / 2;

  logic         s1_start, s1_busy, s1_last;
  logic [H-1:0] s1_a_hi, s1_b_hi, inv_a_final, inv_b_final;
  logic         s2_start, s2_busy, s2_last;
  logic [USER_W-1:0] s1_user;

  // Pipeline advance: no stage is in the middle of a sweep.
  assign in_ready = (!s1_busy || s1_last) && (!s2_busy || s2_last);
  assign s1_start = in_ready && in_valid;
  assign s2_start = in_ready && s1_busy;

  error_estimator #(.H(H)) u_stage1 (
    .clk, .rst_n,
    .start      (s1_start),
    .a_hi       (a[N_BITS-1:H]),
    .a_lo       (a[H-1:0]),
    .b_hi       (b[N_BITS-1:H]),
    .b_lo       (b[H-1:0]),
    .a_hi_q     (s1_a_hi),
    .b_hi_q     (s1_b_hi),
    .busy       (s1_busy),
    .last       (s1_last),
    .inv_a_final(inv_a_final),
    .inv_b_final(inv_b_final),
    .inv_a      (),
    .inv_b      (),
    .done       ()
  );

  main_multiplier #(.H(H)) u_stage2 (
    .clk, .rst_n,
    .start      (s2_start),
    .a_hi       (s1_a_hi),
    .b_hi       (s1_b_hi),
    .inv_a      (inv_a_final),
    .inv_b      (inv_b_final),
    .busy       (s2_busy),
    .out_bit    (out_bit),
    .last       (s2_last),
    .count_final(),
    .result     (result),
    .done       (res_valid)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_user  <= '0;
      out_user <= '0;
      res_user <= '0;
    end else begin
      if (s1_start) s1_user  <= in_user;
      if (s2_start) out_user <= s1_user;
      if (s2_last)  res_user <= out_user;
    end
  end

  assign out_valid = s2_busy;
  assign out_last  = s2_last;

  // The stages run in lock step: whenever both are busy they end together.
  a_stages_in_step: assert property (@(posedge clk) disable iff (!rst_n)
    (s1_busy && s2_busy) |-> (s1_last == s2_last));

  initial begin
    assert (N_BITS % 2 == 0 && N_BITS >= 2)
      else $error("N_BITS must be even and at least 2");
  end

endmodule
