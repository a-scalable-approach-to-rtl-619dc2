// tb_unary_neuron: end-to-end test of the hybrid binary-unary neuron at a
// reduced size (n = 4, 3 lanes, up to 64 terms) so that many dot products
// fit in a short run.
//
// Forty dot products of random length (1 to 20 terms) with random inputs,
// weights and weight signs are fed as groups of LANES terms, the last group
// partly disabled where the length is not a multiple of LANES, with random
// bubbles on `in_valid`. Each `dot` must equal the sum of the signed
// reference products, `pos_sum` / `neg_sum` the sums of the positive- and
// negative-weight products, and `dot_valid` must follow the last group's
// acceptance by 2^(n+1)+1 cycles. The run counts, and requires at least
// once: a group accepted while products are streaming out (pipelining), a
// group held back by `in_ready`, a disabled lane, a negative and a positive
// result, a product changed by error compensation, and a dot product whose
// first group entered before the previous result came out.
module tb_unary_neuron;
  import unary_ref_pkg::*;

  localparam int unsigned N     = 4;
  localparam int unsigned L     = 3;
  localparam int unsigned MAXT  = 64;
  localparam int unsigned ACC_W = N + $clog2(MAXT);
  localparam int unsigned NDOTS = 40;

  logic                    clk = 1'b0, rst_n = 1'b0;
  logic                    in_valid = 1'b0, in_ready, in_last = 1'b0, dot_valid;
  logic [L-1:0][N-1:0]     x = '0, w = '0;
  logic [L-1:0]            w_neg = '0, lane_en = '0;
  logic signed [ACC_W:0]   dot;
  logic [ACC_W-1:0]        pos_sum, neg_sum;
  int                      checks = 0, failures = 0;

  unary_neuron #(.N_BITS(N), .LANES(L), .MAX_TERMS(MAXT)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct {
    logic [L-1:0][N-1:0] x, w;
    logic [L-1:0]        neg, en;
    logic                last;
  } group_t;
  typedef struct { int pos; int neg; } exp_t;

  group_t groups[$];
  exp_t   exps[$];
  int     n_pipelined = 0, n_waits = 0, n_disabled = 0, n_negres = 0, n_posres = 0;
  int     n_comp = 0, n_overlap_dots = 0;

  // Build the stimulus and the expected sums.
  initial begin
    for (int d = 0; d < NDOTS; d++) begin
      int len, pos, neg;
      len = (d == 0) ? 1 : $urandom_range(20, 1);
      pos = 0; neg = 0;
      for (int g = 0; g * L < len; g++) begin
        group_t gr;
        gr.last = ((g + 1) * L >= len);
        for (int l = 0; l < L; l++) begin
          int xv, wv, p;
          xv = $urandom_range((1 << N) - 1);
          wv = $urandom_range((1 << N) - 1);
          gr.x[l] = N'(xv); gr.w[l] = N'(wv);
          gr.neg[l] = ($urandom_range(1) == 1);
          if (d % 5 == 1) gr.neg[l] = 1'b1;       // some all-negative dot products
          gr.en[l] = (g * L + l < len);
          p = ref_scalable_mult(xv, wv, N);
          if (gr.en[l]) begin
            if (p != (xv >> (N / 2)) * (wv >> (N / 2))) n_comp++;
            if (gr.neg[l]) neg += p; else pos += p;
          end else begin
            n_disabled++;
          end
        end
        groups.push_back(gr);
      end
      exps.push_back('{pos: pos, neg: neg});
    end
  end

  // Driver with the same handshake bookkeeping as the multiplier test.
  int cycle = 0, last_accept_cycle[$];
  int dots_done = 0, dots_started = 0;

  initial begin
    bit pending, cur_v, prev_last;
    group_t cur;
    pending = 1'b0; cur_v = 1'b0; prev_last = 1'b1;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    while (dots_done < NDOTS) begin
      @(negedge clk);
      cycle++;
      // result side
      if (dot_valid) begin
        exp_t e;
        int lac;
        e = exps.pop_front();
        lac = last_accept_cycle.pop_front();
        checks++;
        if (int'(pos_sum) != e.pos || int'(neg_sum) != e.neg || int'(dot) != e.pos - e.neg ||
            cycle - lac != (2 << N) + 1) begin
          failures++;
          $display("FAIL dot %0d: dot=%0d pos=%0d neg=%0d expected %0d (%0d - %0d) latency %0d",
                   dots_done, dot, pos_sum, neg_sum, e.pos - e.neg, e.pos, e.neg, cycle - lac);
        end
        if (dot < 0) n_negres++;
        if (dot > 0) n_posres++;
        if (dots_started > dots_done + 1) n_overlap_dots++;
        dots_done++;
      end
      // input side
      if (pending) begin
        if (cur.last) last_accept_cycle.push_back(cycle - 1);
        if (dut.lane_out_valid[0]) n_pipelined++;
        if (prev_last) dots_started++;
        prev_last = cur.last;
      end
      if (pending || !cur_v) begin
        cur_v = 1'b0;
        if (groups.size() > 0 && $urandom_range(4) != 0) begin
          cur = groups.pop_front();
          cur_v = 1'b1;
        end
      end else if (!in_ready) begin
        n_waits++;
      end
      in_valid = cur_v;
      x = cur.x; w = cur.w; w_neg = cur.neg; lane_en = cur.en; in_last = cur.last;
      pending = cur_v && in_ready;
    end
    $display("pipelined=%0d waits=%0d disabled-lanes=%0d neg-results=%0d pos-results=%0d compensated=%0d overlapping-dots=%0d",
             n_pipelined, n_waits, n_disabled, n_negres, n_posres, n_comp, n_overlap_dots);
    checks++;
    if (n_pipelined == 0 || n_waits == 0 || n_disabled == 0 || n_negres == 0 ||
        n_posres == 0 || n_comp == 0 || n_overlap_dots == 0) begin
      failures++;
      $display("FAIL: a mechanism was never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
