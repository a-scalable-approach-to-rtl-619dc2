// tb_unary_neuron_full: the neuron at its default size (n = 8, so 256-bit
// streams; 6 lanes; accumulators sized for 2048 terms) computing full
// 2048-term dot products, the inner dimension of the [2048 x 2048] x
// [2048 x 128] matrix product used to evaluate the method.
//   1. random 8-bit inputs and weights with random signs;
//   2. all inputs and weights at 255, all positive (largest possible sum,
//      checks that the accumulators do not overflow);
//   3. the same with all weights negative (most negative sum).
// Each result must match the sum of reference products exactly and arrive
// 2^9+1 cycles after the last group is accepted; 2048 terms take
// ceil(2048/6) = 342 groups of 256 cycles each. The mean absolute error of
// the random dot product against the exact real-valued sum is printed.
module tb_unary_neuron_full;
  import unary_ref_pkg::*;

  localparam int unsigned N     = unary_pkg::N_BITS;
  localparam int unsigned L     = unary_pkg::LANES;
  localparam int unsigned T     = unary_pkg::MAX_TERMS;
  localparam int unsigned ACC_W = N + $clog2(T);

  logic                    clk = 1'b0, rst_n = 1'b0;
  logic                    in_valid = 1'b0, in_ready, in_last = 1'b0, dot_valid;
  logic [L-1:0][N-1:0]     x = '0, w = '0;
  logic [L-1:0]            w_neg = '0, lane_en = '0;
  logic signed [ACC_W:0]   dot;
  logic [ACC_W-1:0]        pos_sum, neg_sum;
  int                      checks = 0, failures = 0;

  unary_neuron dut (.*);

  always #5 clk = ~clk;

  localparam int unsigned GROUPS = (T + L - 1) / L;

  initial begin
    repeat (3 * (GROUPS + 4) * (1 << N)) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cycle, last_acc;
    real exact, abs_err_sum;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    cycle = 0;
    for (int test = 0; test < 3; test++) begin
      longint pos, neg;
      int g;
      pos = 0; neg = 0; exact = 0.0; g = 0;
      while (g < GROUPS) begin
        @(negedge clk);
        cycle++;
        in_valid = 1'b1;
        in_last  = (g == GROUPS - 1);
        for (int l = 0; l < L; l++) begin
          int xv, wv, p;
          bit ng;
          if (test == 0) begin
            xv = $urandom_range(255); wv = $urandom_range(255); ng = ($urandom_range(1) == 1);
          end else begin
            xv = 255; wv = 255; ng = (test == 2);
          end
          x[l] = N'(xv); w[l] = N'(wv); w_neg[l] = ng;
          lane_en[l] = (g * L + l < T);
          if (lane_en[l]) begin
            p = ref_scalable_mult(xv, wv, N);
            if (ng) begin neg += p; exact -= real'(xv * wv) / 256.0; end
            else    begin pos += p; exact += real'(xv * wv) / 256.0; end
          end
        end
        // hold until accepted
        while (!in_ready) begin
          @(negedge clk);
          cycle++;
        end
        if (in_last) last_acc = cycle;
        g++;
        @(posedge clk);
        #1;
        in_valid = 1'b0;
      end
      // wait for the result
      while (!dot_valid) begin
        @(negedge clk);
        cycle++;
      end
      checks++;
      if (longint'(pos_sum) != pos || longint'(neg_sum) != neg || longint'(dot) != pos - neg ||
          cycle - last_acc != (2 << N) + 1) begin
        failures++;
        $display("FAIL test %0d: dot=%0d pos=%0d neg=%0d expected %0d - %0d, latency %0d", test,
                 dot, pos_sum, neg_sum, pos, neg, cycle - last_acc);
      end
      abs_err_sum = (real'(dot) > exact) ? real'(dot) - exact : exact - real'(dot);
      $display("test %0d: dot=%0d (units of 2^-%0d), exact %f, |error| %f over %0d terms",
               test, dot, N, exact, abs_err_sum, T);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
