// tb_clkdiv_counter: the series counter pair at W = 3 must visit
// (lo, hi) = (t mod 8, t div 8) in cycle t of a 64-cycle sweep, raise
// `lo_wrap` when lo = 7 and `last` only in the final cycle, hold while `en`
// is low and return to zero on `clear`.
module tb_clkdiv_counter;
  localparam int unsigned W = 3;
  localparam int unsigned S = 1 << (2 * W);

  logic         clk = 1'b0, rst_n = 1'b0, clear = 1'b0, en = 1'b0;
  logic [W-1:0] cnt_lo, cnt_hi;
  logic         lo_wrap, last;
  int           checks = 0, failures = 0;

  clkdiv_counter #(.W(W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_state(int t);
    checks++;
    if (cnt_lo != W'(t % (1 << W)) || cnt_hi != W'((t / (1 << W)) % (1 << W)) ||
        lo_wrap != (en && (t % (1 << W)) == (1 << W) - 1) ||
        last != ((t % S) == S - 1)) begin
      failures++;
      $display("FAIL t=%0d lo=%0d hi=%0d wrap=%0b last=%0b", t, cnt_lo, cnt_hi, lo_wrap, last);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk); clear = 1'b1;
    @(negedge clk); clear = 1'b0; en = 1'b1;
    for (int t = 0; t < S + 5; t++) begin
      expect_state(t);
      @(negedge clk);
      if (t == 20) begin
        en = 1'b0;
        repeat (3) begin
          checks++;
          if (cnt_lo != W'(21 % 8) || cnt_hi != W'(21 / 8)) begin
            failures++; $display("FAIL: counters moved while disabled");
          end
          @(negedge clk);
        end
        en = 1'b1;
      end
    end
    clear = 1'b1;
    @(negedge clk); clear = 1'b0;
    expect_state(0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
