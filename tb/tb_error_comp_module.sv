// tb_error_comp_module: the compensation module at H = 3, driven by a
// counter sweep modelled in the testbench (column = fast counter, row =
// slow counter). For every pair of downscaled operands (A', B') and
// random Inv counts, A's stream must be flipped exactly at column A' in rows
// 0 .. Inv(A')-1 and B's exactly in row B' at columns 0 .. Inv(B')-1, and
// nowhere else.
module tb_error_comp_module;
  localparam int unsigned H = 3;
  localparam int unsigned Q = 1 << H;

  logic         clk = 1'b0, rst_n = 1'b0, start = 1'b0, en = 1'b0, lo_wrap = 1'b0;
  logic         a_bit = 1'b0, b_bit = 1'b0;
  logic [H-1:0] inv_a_in = '0, inv_b_in = '0;
  logic         sel_a, sel_b, a_out, b_out;
  int           checks = 0, failures = 0, flips_a = 0, flips_b = 0;

  error_comp_module #(.H(H)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (Q * Q * Q * Q * 3 + Q * Q * 8) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int ah = 0; ah < Q; ah++) begin
      for (int bh = 0; bh < Q; bh++) begin
        for (int rep = 0; rep < 3; rep++) begin
          int ia, ib;
          logic exp_a, exp_b;
          ia = (rep == 0) ? bh : $urandom_range(Q - 1);
          ib = (rep == 0) ? ah : $urandom_range(Q - 1);
          @(negedge clk);
          en = 1'b0; start = 1'b1; inv_a_in = H'(ia); inv_b_in = H'(ib);
          @(negedge clk);
          start = 1'b0; en = 1'b1;
          for (int row = 0; row < Q; row++) begin
            for (int col = 0; col < Q; col++) begin
              a_bit   = (ah > col);
              b_bit   = (bh > row);
              lo_wrap = (col == Q - 1);
              #1;
              exp_a = (col == ah) && (row < ia);
              exp_b = (row == bh) && (col < ib);
              checks++;
              if (sel_a != exp_a || sel_b != exp_b ||
                  a_out != (a_bit ^ exp_a) || b_out != (b_bit ^ exp_b)) begin
                failures++;
                $display("FAIL A'=%0d B'=%0d inv=%0d,%0d row=%0d col=%0d sel=%0b%0b", ah, bh,
                         ia, ib, row, col, sel_a, sel_b);
              end
              flips_a += int'(sel_a);
              flips_b += int'(sel_b);
              @(negedge clk);
            end
          end
          en = 1'b0;
        end
      end
    end
    checks++;
    if (flips_a == 0 || flips_b == 0) begin
      failures++;
      $display("FAIL: no flips seen");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
