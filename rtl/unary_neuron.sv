// unary_neuron: hybrid binary-unary neuron (dot-product unit).
//
// Computes  y = sum_k s_k * x_k * w_k  for unsigned n-bit inputs x_k and
// weight magnitudes w_k with signs s_k. The products are made in the unary
// domain, the sums in binary: negative values are not encoded in the
// streams; products with positive weights and products with negative weights
// go to two separate binary accumulators, and the neuron's output is their
// difference. That split, and binary accumulation, follow the paper's
// neuron diagram. The activation function that would follow is not part of
// this module: the signed pre-activation sum is its output.
//
// LANES scalable unary multipliers (unary_scalable_mult) work in parallel;
// the paper leaves the number of comparator lanes to the designer, trading
// area for latency. A dot product longer than LANES is fed as a sequence of
// groups of LANES terms; the last group carries `in_last`, and lanes of a
// group may be switched off with `lane_en`. Every cycle, the output bits of
// all lanes are counted into the positive or negative accumulator, so each
// accumulator ends up holding the sum of the product counts (units of 2^-n).
// Each lane keeps its own counters here, while the paper notes that one
// counter may serve all of the generators; the streams are the same.
//
// Timing: a group is taken in a cycle with `in_valid && in_ready`; groups
// are accepted every 2^n cycles. `dot_valid` pulses, with `dot`, `pos_sum`
// and `neg_sum`, 2^(n+1)+1 cycles after the last group was taken. The
// accumulators then restart for the next dot product with no gap.
// Accumulators are sized for MAX_TERMS terms.
module unary_neuron #(
  parameter int unsigned N_BITS    = unary_pkg::N_BITS,
  parameter int unsigned LANES     = unary_pkg::LANES,
  parameter int unsigned MAX_TERMS = unary_pkg::MAX_TERMS,
  localparam int unsigned ACC_W    = N_BITS + $clog2(MAX_TERMS)
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         in_valid,
  output logic                         in_ready,
  input  logic [LANES-1:0][N_BITS-1:0] x,
  input  logic [LANES-1:0][N_BITS-1:0] w,
  input  logic [LANES-1:0]             w_neg,
  input  logic [LANES-1:0]             lane_en,
  input  logic                         in_last,
  output logic                         dot_valid,
  output logic signed [ACC_W:0]        dot,
  output logic [ACC_W-1:0]             pos_sum,
  output logic [ACC_W-1:0]             neg_sum
);

  localparam int unsigned CNT_W = $clog2(LANES + 1);

  logic [LANES-1:0] lane_ready, lane_out_valid, lane_out_bit, lane_out_last;
  unary_pkg::term_tag_t lane_tag    [LANES];
  unary_pkg::term_tag_t lane_out_tag[LANES];

  logic [CNT_W-1:0] pos_bits, neg_bits;
  logic [ACC_W-1:0] pos_acc, neg_acc, pos_next, neg_next;
  logic             group_last, dot_end;

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    assign lane_tag[l] = '{en: lane_en[l], neg: w_neg[l], last: in_last};

    unary_scalable_mult #(.N_BITS(N_BITS), .USER_W($bits(unary_pkg::term_tag_t))) u_mult (
      .clk, .rst_n,
      .in_valid (in_valid),
      .in_ready (lane_ready[l]),
      .a        (x[l]),
      .b        (w[l]),
      .in_user  (lane_tag[l]),
      .out_valid(lane_out_valid[l]),
      .out_bit  (lane_out_bit[l]),
      .out_last (lane_out_last[l]),
      .out_user (lane_out_tag[l]),
      .res_valid(),
      .result   (),
      .res_user ()
    );
  end

  // All lanes are driven alike, so lane 0 speaks for all of them.
  assign in_ready   = lane_ready[0];
  assign group_last = lane_out_tag[0].last;
  assign dot_end    = lane_out_valid[0] && lane_out_last[0] && group_last;

  // Binary side: count this cycle's product bits of each sign.
  always_comb begin
    pos_bits = '0;
    neg_bits = '0;
    for (int l = 0; l < LANES; l++) begin
      if (lane_out_valid[l] && lane_out_bit[l] && lane_out_tag[l].en) begin
        if (lane_out_tag[l].neg) neg_bits = neg_bits + 1'b1;
        else                     pos_bits = pos_bits + 1'b1;
      end
    end
  end

  assign pos_next = pos_acc + ACC_W'(pos_bits);
  assign neg_next = neg_acc + ACC_W'(neg_bits);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pos_acc   <= '0;
      neg_acc   <= '0;
      pos_sum   <= '0;
      neg_sum   <= '0;
      dot       <= '0;
      dot_valid <= 1'b0;
    end else begin
      dot_valid <= dot_end;
      if (dot_end) begin
        pos_sum <= pos_next;
        neg_sum <= neg_next;
        dot     <= $signed({1'b0, pos_next}) - $signed({1'b0, neg_next});
        pos_acc <= '0;
        neg_acc <= '0;
      end else begin
        pos_acc <= pos_next;
        neg_acc <= neg_next;
      end
    end
  end

  a_lanes_in_step: assert property (@(posedge clk) disable iff (!rst_n)
    (lane_ready == {LANES{lane_ready[0]}}) &&
    (lane_out_valid == {LANES{lane_out_valid[0]}}));

endmodule
