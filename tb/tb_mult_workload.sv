// tb_mult_workload: the exhaustive multiplication evaluation. For stream
// lengths 2^4, 2^6 and 2^8 (n = 4, 6, 8; n = 8 is the default size) every
// pair of n-bit operands is multiplied, back to back, and each count is
// compared with:
//   * the compensated-product formula (must match exactly),
//   * the best approximation round(a*b / 2^n) (error at most 2 output bits).
// It prints the mean absolute error, as a percentage of the full scale 2^n,
// and how many products are off by 2. Each MAE must stay below that of the
// Sobol-sequence multipliers the method is compared with (5.93 %, 1.66 %,
// 0.4 %). For n = 4 it also prints the progressive accuracy: the error of
// the value estimated from only the first k = 10..16 output bits
// (ones * 2^n / k against the best approximation).
module tb_mult_workload;
  import unary_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  int   checks = 0, failures = 0;

  always #5 clk = ~clk;

  initial begin
    repeat (70000 * 256) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic       v4 = 1'b0, v6 = 1'b0, v8 = 1'b0;
  logic       r4, r6, r8, ov4, ov6, ov8, ob4, ob6, ob8, ol4, ol6, ol8, rv4, rv6, rv8;
  logic [3:0] a4 = '0, b4 = '0, res4;
  logic [5:0] a6 = '0, b6 = '0, res6;
  logic [7:0] a8 = '0, b8 = '0, res8;
  logic [15:0] u4 = '0, u6 = '0, u8 = '0, ou4, ou6, ou8, ru4, ru6, ru8;

  unary_scalable_mult #(.N_BITS(4), .USER_W(16)) dut4 (
    .clk, .rst_n, .in_valid(v4), .in_ready(r4), .a(a4), .b(b4), .in_user(u4),
    .out_valid(ov4), .out_bit(ob4), .out_last(ol4), .out_user(ou4),
    .res_valid(rv4), .result(res4), .res_user(ru4));
  unary_scalable_mult #(.N_BITS(6), .USER_W(16)) dut6 (
    .clk, .rst_n, .in_valid(v6), .in_ready(r6), .a(a6), .b(b6), .in_user(u6),
    .out_valid(ov6), .out_bit(ob6), .out_last(ol6), .out_user(ou6),
    .res_valid(rv6), .result(res6), .res_user(ru6));
  unary_scalable_mult #(.USER_W(16)) dut8 (
    .clk, .rst_n, .in_valid(v8), .in_ready(r8), .a(a8), .b(b8), .in_user(u8),
    .out_valid(ov8), .out_bit(ob8), .out_last(ol8), .out_user(ou8),
    .res_valid(rv8), .result(res8), .res_user(ru8));

  // Progressive accuracy for n = 4: ones seen in the first k bits.
  real prog_err[17];
  int  prog_ones;
  int  prog_pos;

  task automatic sweep(input int n);
    int total, sent, got, sum_abs, n_err2, max_err;
    bit pending;
    total = 1 << (2 * n);
    sent = 0; got = 0; sum_abs = 0; n_err2 = 0; max_err = 0; pending = 1'b0;
    while (got < total) begin
      logic rdy, rvl;
      int rres, id, a, b, e, opt, err;
      @(negedge clk);
      case (n)
        4: begin rdy = r4; rvl = rv4; rres = int'(res4); id = int'(ru4); end
        6: begin rdy = r6; rvl = rv6; rres = int'(res6); id = int'(ru6); end
        default: begin rdy = r8; rvl = rv8; rres = int'(res8); id = int'(ru8); end
      endcase
      if (n == 4 && ov4) begin
        a = int'(ou4) % 16; b = int'(ou4) / 16;
        prog_ones += int'(ob4);
        prog_pos++;
        if (prog_pos >= 10) begin
          real est;
          est = real'(prog_ones) * 16.0 / real'(prog_pos);
          opt = opt_mult(a, b, 4);
          prog_err[prog_pos] += (est > opt) ? est - opt : opt - est;
        end
        if (ol4) begin prog_ones = 0; prog_pos = 0; end
      end
      if (rvl) begin
        a = id % (1 << n); b = id / (1 << n);
        e = ref_scalable_mult(a, b, n);
        opt = opt_mult(a, b, n);
        err = abs_diff(rres, opt);
        checks++;
        if (rres != e || err > 2) begin
          failures++;
          $display("FAIL n=%0d a=%0d b=%0d result=%0d expected=%0d optimal=%0d", n, a, b, rres,
                   e, opt);
        end
        sum_abs += err;
        if (err == 2) n_err2++;
        if (err > max_err) max_err = err;
        got++;
      end
      if (pending) sent++;
      if (sent < total) begin
        case (n)
          4: begin v4 = 1'b1; a4 = 4'(sent % 16); b4 = 4'(sent / 16); u4 = 16'(sent); end
          6: begin v6 = 1'b1; a6 = 6'(sent % 64); b6 = 6'(sent / 64); u6 = 16'(sent); end
          default: begin v8 = 1'b1; a8 = 8'(sent % 256); b8 = 8'(sent / 256); u8 = 16'(sent); end
        endcase
        pending = rdy;
      end else begin
        case (n)
          4: v4 = 1'b0;
          6: v6 = 1'b0;
          default: v8 = 1'b0;
        endcase
        pending = 1'b0;
      end
    end
    begin
      real mae, sobol;
      mae = 100.0 * real'(sum_abs) / real'(total) / real'(1 << n);
      sobol = (n == 4) ? 5.93 : (n == 6) ? 1.66 : 0.4;
      $display("n=%0d (2^%0d-bit streams): %0d products, MAE %0.3f %%, max error %0d, off by 2: %0d",
               n, n, total, mae, max_err, n_err2);
      checks++;
      if (mae >= sobol) begin
        failures++;
        $display("FAIL n=%0d MAE %0.3f %% not below the Sobol multiplier's %0.2f %%", n, mae, sobol);
      end
    end
  endtask

  initial begin
    for (int k = 0; k <= 16; k++) prog_err[k] = 0.0;
    prog_ones = 0; prog_pos = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    fork
      sweep(4);
      sweep(6);
      sweep(8);
    join
    for (int k = 10; k <= 16; k++)
      $display("n=4 progressive: first %0d output bits, MAE %0.2f %%", k,
               100.0 * prog_err[k] / 256.0 / 16.0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
