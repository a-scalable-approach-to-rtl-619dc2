// tb_matrix_workload: a slice of the matrix dot-product evaluation,
// C = A . B with A of size [R x 2048] and B of size [2048 x C] (the paper's
// matrices are [2048 x 2048] and [2048 x 128]; here R = C = 2, so four full
// 2048-term dot products per size). Elements of A are random unsigned n-bit
// values, elements of B random n-bit magnitudes with random signs, fed to the
// neuron six terms at a time. This is run for n = 4, 6 and 8 (n = 8 being
// the default neuron).
// Each element of C must equal the sum of the reference products exactly.
// The printed error is the mean, over all products, of the absolute
// difference between the element and the exact real-valued dot product,
// divided by the number of terms and by 2^n (an error per term, as a
// percentage of one product's full scale). Also printed is the mean absolute
// error of the individual products against their exact values a*b/2^n.
module tb_matrix_workload;
  import unary_ref_pkg::*;

  localparam int unsigned L = 6;
  localparam int unsigned K = 2048;
  localparam int unsigned R = 2;
  localparam int unsigned C = 2;
  localparam int unsigned G = (K + L - 1) / L;

  logic clk = 1'b0, rst_n = 1'b0;
  int   checks = 0, failures = 0;

  always #5 clk = ~clk;

  initial begin
    repeat ((R * C + 2) * (G + 4) * 256 + (R * C + 2) * (G + 4) * 80) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Shared stimulus bus, widest size; narrower neurons take the low bits.
  logic [2:0]           valid = '0;
  logic [2:0]           ready, dvalid;
  logic [L-1:0][7:0]    x = '0, w = '0;
  logic [L-1:0]         w_neg = '0, lane_en = '0;
  logic                 in_last = 1'b0;
  logic [L-1:0][3:0]    x4, w4;
  logic [L-1:0][5:0]    x6, w6;
  logic signed [15:0]   dot4;
  logic signed [17:0]   dot6;
  logic signed [19:0]   dot8;

  for (genvar l = 0; l < L; l++) begin : g_slice
    assign x4[l] = x[l][3:0];
    assign w4[l] = w[l][3:0];
    assign x6[l] = x[l][5:0];
    assign w6[l] = w[l][5:0];
  end

  unary_neuron #(.N_BITS(4)) dut4 (
    .clk, .rst_n, .in_valid(valid[0]), .in_ready(ready[0]), .x(x4), .w(w4), .w_neg, .lane_en,
    .in_last, .dot_valid(dvalid[0]), .dot(dot4), .pos_sum(), .neg_sum());
  unary_neuron #(.N_BITS(6)) dut6 (
    .clk, .rst_n, .in_valid(valid[1]), .in_ready(ready[1]), .x(x6), .w(w6), .w_neg, .lane_en,
    .in_last, .dot_valid(dvalid[1]), .dot(dot6), .pos_sum(), .neg_sum());
  unary_neuron dut8 (
    .clk, .rst_n, .in_valid(valid[2]), .in_ready(ready[2]), .x, .w, .w_neg, .lane_en,
    .in_last, .dot_valid(dvalid[2]), .dot(dot8), .pos_sum(), .neg_sum());

  int a_m[R][K];
  int b_m[K][C];
  bit b_neg[K][C];

  task automatic run_size(input int sel, input int n);
    real err_sum, prod_err;
    err_sum = 0.0; prod_err = 0.0;
    for (int i = 0; i < R; i++) begin
      for (int j = 0; j < C; j++) begin
        longint expv;
        real exact;
        int got;
        expv = 0; exact = 0.0;
        for (int g = 0; g < G; g++) begin
          @(negedge clk);
          for (int l = 0; l < L; l++) begin
            int k;
            k = g * L + l;
            lane_en[l] = (k < K);
            if (k < K) begin
              int xa, wb, p;
              xa = a_m[i][k] % (1 << n);
              wb = b_m[k][j] % (1 << n);
              x[l] = 8'(xa); w[l] = 8'(wb); w_neg[l] = b_neg[k][j];
              p = ref_scalable_mult(xa, wb, n);
              expv += b_neg[k][j] ? -p : p;
              exact += (b_neg[k][j] ? -1.0 : 1.0) * real'(xa * wb) / real'(1 << n);
              prod_err += (real'(p) > real'(xa * wb) / real'(1 << n)) ?
                          real'(p) - real'(xa * wb) / real'(1 << n) :
                          real'(xa * wb) / real'(1 << n) - real'(p);
            end else begin
              x[l] = '0; w[l] = '0; w_neg[l] = 1'b0;
            end
          end
          in_last = (g == G - 1);
          valid[sel] = 1'b1;
          while (!ready[sel]) @(negedge clk);
          @(posedge clk);
          #1 valid[sel] = 1'b0;
        end
        while (!dvalid[sel]) @(negedge clk);
        got = (sel == 0) ? int'(dot4) : (sel == 1) ? int'(dot6) : int'(dot8);
        checks++;
        if (longint'(got) != expv) begin
          failures++;
          $display("FAIL n=%0d C[%0d][%0d] = %0d, expected %0d", n, i, j, got, expv);
        end
        err_sum += (real'(got) > exact) ? real'(got) - exact : exact - real'(got);
      end
    end
    begin
      real mae, sobol;
      mae = 100.0 * err_sum / real'(R * C) / real'(K) / real'(1 << n);
      sobol = (n == 4) ? 6.44 : (n == 6) ? 2.16 : 1.59;
      $display("n=%0d: [%0dx%0d].[%0dx%0d], error of C per term %0.3f %%, mean product error %0.3f %% (of 2^n)",
               n, R, K, K, C, mae, 100.0 * prod_err / real'(R * C * K) / real'(1 << n));
      checks++;
      if (mae >= sobol) begin
        failures++;
        $display("FAIL n=%0d error %0.3f %% not below the Sobol figure %0.2f %%", n, mae, sobol);
      end
    end
  endtask

  initial begin
    for (int i = 0; i < R; i++)
      for (int k = 0; k < K; k++) a_m[i][k] = $urandom_range(255);
    for (int k = 0; k < K; k++)
      for (int j = 0; j < C; j++) begin
        b_m[k][j] = $urandom_range(255);
        b_neg[k][j] = ($urandom_range(1) == 1);
      end
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    run_size(0, 4);
    run_size(1, 6);
    run_size(2, 8);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
