// tb_main_multiplier: stage two at H = 3 (64-bit output streams). For random
// A', B' and Inv counts no larger than the other operand (as stage one
// delivers them), run back to back, every bit of the output stream is
// compared with a model of the compensated product: in cycle (row, col)
//   A bit = (A' > col) or (col == A' and row < Inv(A'))
//   B bit = (B' > row) or (row == B' and col < Inv(B'))
// and the count must be A'*B' + Inv(A') + Inv(B'), reported 2^(2H)+1
// cycles after `start`. The first products are the worked example of the
// paper scaled to H = 2 bits of each half (A = 5/16, B = 15/16 -> 5/16).
module tb_main_multiplier;
  localparam int unsigned H = 3;
  localparam int unsigned Q = 1 << H;
  localparam int unsigned S = Q * Q;
  localparam int unsigned NOPS = 200;

  logic           clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic [H-1:0]   a_hi = '0, b_hi = '0, inv_a = '0, inv_b = '0;
  logic           busy, out_bit, last, done;
  logic [2*H-1:0] count_final, result;
  int             checks = 0, failures = 0;

  main_multiplier #(.H(H)) dut (.*);

  // H = 2 instance for the paper's 16-bit example.
  logic           start2 = 1'b0, busy2, bit2, last2, done2;
  logic [3:0]     cf2, res2;
  main_multiplier #(.H(2)) dut2 (
    .clk, .rst_n, .start(start2), .a_hi(2'd1), .b_hi(2'd3), .inv_a(2'd1), .inv_b(2'd1),
    .busy(busy2), .out_bit(bit2), .last(last2), .count_final(cf2), .result(res2), .done(done2)
  );

  always #5 clk = ~clk;

  initial begin
    repeat (S * (NOPS + 4) + 100) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct {int ah; int bh; int ia; int ib; int cyc;} op_t;

  initial begin
    // paper example: expected stream 1100 1000 1000 1000
    logic [15:0] stream2;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk); start2 = 1'b1;
    @(negedge clk); start2 = 1'b0;
    for (int t = 0; t < 16; t++) begin
      stream2[15 - t] = bit2;
      @(negedge clk);
    end
    checks++;
    if (stream2 != 16'b1100_1000_1000_1000 || res2 != 4'd5) begin
      failures++;
      $display("FAIL paper example stream=%b count=%0d", stream2, res2);
    end
  end

  initial begin
    int k, cycle, n_done, pos;
    op_t q[$];
    op_t cur, e;
    k = 0; cycle = 0; n_done = 0; pos = 0;
    repeat (2) @(posedge clk);
    while (!rst_n) @(posedge clk);
    while (n_done < NOPS) begin
      @(negedge clk);
      cycle++;
      if (busy) begin
        int row, col;
        logic ea, eb;
        row = pos / Q; col = pos % Q;
        ea = (cur.ah > col) || (col == cur.ah && row < cur.ia);
        eb = (cur.bh > row) || (row == cur.bh && col < cur.ib);
        checks++;
        if (out_bit != (ea & eb) || last != (pos == S - 1)) begin
          failures++;
          $display("FAIL bit op A'=%0d B'=%0d inv=%0d,%0d row=%0d col=%0d got %0b", cur.ah,
                   cur.bh, cur.ia, cur.ib, row, col, out_bit);
        end
        pos++;
      end
      if (done) begin
        e = q.pop_front();
        checks++;
        if (result != (2*H)'(e.ah * e.bh + e.ia + e.ib) || cycle - e.cyc != S + 1) begin
          failures++;
          $display("FAIL count=%0d expected %0d latency %0d", result,
                   e.ah * e.bh + e.ia + e.ib, cycle - e.cyc);
        end
        n_done++;
      end
      start = 1'b0;
      if (k < NOPS && (!busy || last)) begin
        cur.ah = (k == 0) ? Q - 1 : $urandom_range(Q - 1);
        cur.bh = (k == 0) ? Q - 1 : $urandom_range(Q - 1);
        cur.ia = (k == 0) ? Q - 1 : $urandom_range(cur.bh);
        cur.ib = (k == 0) ? Q - 1 : $urandom_range(cur.ah);
        cur.cyc = cycle;
        a_hi = H'(cur.ah); b_hi = H'(cur.bh); inv_a = H'(cur.ia); inv_b = H'(cur.ib);
        start = 1'b1;
        q.push_back(cur);
        pos = 0;
        k++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
