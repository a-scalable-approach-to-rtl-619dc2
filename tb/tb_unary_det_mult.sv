// tb_unary_det_mult: exhaustive check of the clock-division multiplier at
// W = 3 (64-cycle sweeps). All 64 (a, b) pairs are multiplied back to back,
// each new `start` given in the previous product's `last` cycle. For each
// product the AND stream must hold exactly a*b ones over exactly 2^(2W)
// cycles, `result` must be a*b, and `done` must come 2^(2W)+1 cycles after
// `start`. A second instance with a preset of 4 must return a*b + 4.
module tb_unary_det_mult;
  localparam int unsigned W = 3;
  localparam int unsigned S = 1 << (2 * W);
  localparam int unsigned NPAIRS = 1 << (2 * W);

  logic           clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic [W-1:0]   a = '0, b = '0, a_q, b_q;
  logic           busy, and_bit, last, done;
  logic [2*W-1:0] acc_final, result;
  logic           busy_p, and_p, last_p, done_p;
  logic [W-1:0]   a_qp, b_qp;
  logic [2*W-1:0] acc_final_p, result_p;
  int             checks = 0, failures = 0;

  unary_det_mult #(.W(W)) dut (.*);
  unary_det_mult #(.W(W), .PRESET(6'd4)) dut_p (
    .clk, .rst_n, .start, .a, .b, .a_q(a_qp), .b_q(b_qp), .busy(busy_p),
    .and_bit(and_p), .last(last_p), .acc_final(acc_final_p), .result(result_p), .done(done_p)
  );

  always #5 clk = ~clk;

  initial begin
    repeat (S * (NPAIRS + 4)) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int k, ones, cycle, start_cycle, cur, n_done;
    int expq[$];
    int startq[$];
    k = 0; ones = 0; cycle = 0; cur = 0; n_done = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    while (n_done < NPAIRS) begin
      @(negedge clk);
      cycle++;
      if (busy) begin
        ones += int'(and_bit);
        start_cycle++;
      end
      if (last) begin
        checks++;
        if (ones != cur || start_cycle != S || acc_final != (2*W)'(cur)) begin
          failures++;
          $display("FAIL stream: expected %0d ones in %0d cycles, got %0d in %0d", cur, S,
                   ones, start_cycle);
        end
      end
      if (done) begin
        int e, s;
        e = expq.pop_front();
        s = startq.pop_front();
        checks++;
        if (result != (2*W)'(e) || result_p != (2*W)'(e + 4) || cycle - s != S + 1) begin
          failures++;
          $display("FAIL result=%0d preset=%0d expected=%0d latency=%0d", result, result_p,
                   e, cycle - s);
        end
        n_done++;
      end
      start = 1'b0;
      if (k < NPAIRS && (!busy || last)) begin
        start = 1'b1;
        a = W'(k % (1 << W));
        b = W'(k / (1 << W));
        cur = (k % (1 << W)) * (k / (1 << W));
        expq.push_back(cur);
        startq.push_back(cycle);
        ones = 0; start_cycle = 0;
        k++;
      end
    end
    checks++;
    if (cycle > NPAIRS * S + 4) begin
      failures++;
      $display("FAIL: %0d products took %0d cycles, not back to back", NPAIRS, cycle);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
