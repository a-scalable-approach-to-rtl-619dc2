// tb_error_estimator: stage one at H = 3 (64-cycle sweeps). For random
// operand halves, run back to back, Inv(A') must equal
// round(A_L * B_H / 8) and Inv(B') round(B_L * A_H / 8), both at the `last`
// cycle (combinational) and in the registered outputs after `done`, which
// must come 2^(2H)+1 cycles after `start`. The stored high halves must be
// those loaded.
module tb_error_estimator;
  localparam int unsigned H = 3;
  localparam int unsigned Q = 1 << H;
  localparam int unsigned S = Q * Q;
  localparam int unsigned NOPS = 300;

  logic         clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic [H-1:0] a_hi = '0, a_lo = '0, b_hi = '0, b_lo = '0;
  logic [H-1:0] a_hi_q, b_hi_q, inv_a_final, inv_b_final, inv_a, inv_b;
  logic         busy, last, done;
  int           checks = 0, failures = 0;

  error_estimator #(.H(H)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (S * (NOPS + 4)) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct {int ia; int ib; int ah; int bh; int cyc;} exp_t;

  initial begin
    int k, cycle, n_done;
    exp_t q[$];
    exp_t cur, e;
    k = 0; cycle = 0; n_done = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    while (n_done < NOPS) begin
      @(negedge clk);
      cycle++;
      if (last) begin
        checks++;
        if (inv_a_final != H'(cur.ia) || inv_b_final != H'(cur.ib) ||
            a_hi_q != H'(cur.ah) || b_hi_q != H'(cur.bh)) begin
          failures++;
          $display("FAIL final inv_a=%0d/%0d inv_b=%0d/%0d", inv_a_final, cur.ia,
                   inv_b_final, cur.ib);
        end
      end
      if (done) begin
        e = q.pop_front();
        checks++;
        if (inv_a != H'(e.ia) || inv_b != H'(e.ib) || cycle - e.cyc != S + 1) begin
          failures++;
          $display("FAIL inv_a=%0d/%0d inv_b=%0d/%0d latency=%0d", inv_a, e.ia, inv_b, e.ib,
                   cycle - e.cyc);
        end
        n_done++;
      end
      start = 1'b0;
      if (k < NOPS && (!busy || last)) begin
        int al, ah, bl, bh;
        // first 64 operations sweep corner values, then random
        if (k < 16) begin
          al = ((k % 2) != 0) ? Q - 1 : 0; ah = ((k / 2 % 2) != 0) ? Q - 1 : 0;
          bl = ((k / 4 % 2) != 0) ? Q - 1 : 0; bh = ((k / 8 % 2) != 0) ? Q - 1 : 0;
        end else begin
          al = $urandom_range(Q - 1); ah = $urandom_range(Q - 1);
          bl = $urandom_range(Q - 1); bh = $urandom_range(Q - 1);
        end
        a_lo = H'(al); a_hi = H'(ah); b_lo = H'(bl); b_hi = H'(bh);
        start = 1'b1;
        cur.ia = (al * bh + Q / 2) / Q;
        cur.ib = (bl * ah + Q / 2) / Q;
        cur.ah = ah; cur.bh = bh; cur.cyc = cycle;
        q.push_back(cur);
        k++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
