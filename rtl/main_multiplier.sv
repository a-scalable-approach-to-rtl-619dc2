// main_multiplier: second stage of the scalable unary multiplier.
//
// The downscaled operands A' and B' (the upper n/2 bits of A and B) drive
// two thermometer generators on a clock-division counter pair, A' on the
// fast counter and B' on the slow one, giving a 2^n-bit product stream. The
// Error Compensation Module flips the first 0 of A' Inv(A') times and that
// of B' Inv(B') times, and the AND of the two compensated streams is the
// final output bit-stream. An n-bit counter accumulates its ones, so after
// 2^n cycles it holds  A'*B' + Inv(A') + Inv(B'),  an approximation of
// A*B / 2^n that stays within two of the best one.
//
// The blocks and their wiring (generators, compensation module, AND gate,
// n-bit output counter) are the paper's second-stage circuit. The counter
// pair uses a synchronous enable where the paper gates the clock, and the
// start/busy/last/done handshake is this design's own.
//
// Timing: `start` loads A', B', Inv(A'), Inv(B'). In the next 2^n cycles
// `busy` is high and `out_bit` carries the output stream; `last` marks the
// final bit, in which `count_final` (combinational) is the finished count.
// `result` holds it from the next cycle, when `done` pulses. `start` may be
// given in the `last` cycle for back-to-back operation.
module main_multiplier #(
  parameter int unsigned H = unary_pkg::HALF_BITS
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic [H-1:0]   a_hi,
  input  logic [H-1:0]   b_hi,
  input  logic [H-1:0]   inv_a,
  input  logic [H-1:0]   inv_b,
  output logic           busy,
  output logic           out_bit,
  output logic           last,
  output logic [2*H-1:0] count_final,
  output logic [2*H-1:0] result,
  output logic           done
);

  logic [H-1:0]   cnt_lo, cnt_hi, a_q, b_q;
  logic           lo_wrap, sweep_last;
  logic           a_bit, b_bit, a_cmp, b_cmp, sel_a, sel_b;
  logic [2*H-1:0] count;

  clkdiv_counter #(.W(H)) u_cnt (
    .clk, .rst_n,
    .clear  (start),
    .en     (busy),
    .cnt_lo (cnt_lo),
    .cnt_hi (cnt_hi),
    .lo_wrap(lo_wrap),
    .last   (sweep_last)
  );

  unary_sng #(.W(H)) u_gen_a (
    .clk, .rst_n, .load(start), .din(a_hi), .cnt(cnt_lo), .value(a_q), .bit_o(a_bit)
  );
  unary_sng #(.W(H)) u_gen_b (
    .clk, .rst_n, .load(start), .din(b_hi), .cnt(cnt_hi), .value(b_q), .bit_o(b_bit)
  );

  error_comp_module #(.H(H)) u_ecm (
    .clk, .rst_n, .start,
    .inv_a_in(inv_a), .inv_b_in(inv_b),
    .en(busy), .lo_wrap(lo_wrap),
    .a_bit, .b_bit,
    .sel_a, .sel_b,
    .a_out(a_cmp), .b_out(b_cmp)
  );

  assign out_bit     = busy & a_cmp & b_cmp;
  assign last        = busy & sweep_last;
  assign count_final = count + {{(2*H-1){1'b0}}, out_bit};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy   <= 1'b0;
      count  <= '0;
      result <= '0;
      done   <= 1'b0;
    end else begin
      done <= last;
      if (last) result <= count_final;
      if (start) begin
        busy  <= 1'b1;
        count <= '0;
      end else if (busy) begin
        count <= count_final;
        if (sweep_last) busy <= 1'b0;
      end
    end
  end

endmodule
