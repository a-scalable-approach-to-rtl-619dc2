// tb_unary_scalable_mult: the complete two-stage multiplier.
//   * n = 4: all 256 operand pairs, streamed back to back. Each count must
//     equal the compensated-product formula, stay within 2 of the best
//     approximation round(a*b/16), match the number of ones in its output
//     stream, and carry its own sideband tag.
//   * n = 8 (default size): 150 random pairs with random idle gaps.
// Timing: a new pair must be accepted every 2^n cycles while the pipeline
// is full, and each result must appear 2^(n+1)+1 cycles after its pair was
// accepted. The test also counts how often stage one and stage two hold
// different operations at once (pipelining), how often a pair had to wait
// for `in_ready`, and how often compensation added 1s; each must happen.
module tb_unary_scalable_mult;
  import unary_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  int   checks = 0, failures = 0;

  always #5 clk = ~clk;

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- n = 4 ----------------
  localparam int unsigned N4 = 4;
  logic          v4 = 1'b0, r4, ob4, ov4, ol4, rv4;
  logic [N4-1:0] a4 = '0, b4 = '0, res4;
  logic [15:0]   u4 = '0, ou4, ru4;

  unary_scalable_mult #(.N_BITS(N4), .USER_W(16)) dut4 (
    .clk, .rst_n, .in_valid(v4), .in_ready(r4), .a(a4), .b(b4), .in_user(u4),
    .out_valid(ov4), .out_bit(ob4), .out_last(ol4), .out_user(ou4),
    .res_valid(rv4), .result(res4), .res_user(ru4)
  );

  // ---------------- n = 8 ----------------
  localparam int unsigned N8 = 8;
  logic          v8 = 1'b0, r8, ob8, ov8, ol8, rv8;
  logic [N8-1:0] a8 = '0, b8 = '0, res8;
  logic [15:0]   u8 = '0, ou8, ru8;

  unary_scalable_mult #(.USER_W(16)) dut8 (
    .clk, .rst_n, .in_valid(v8), .in_ready(r8), .a(a8), .b(b8), .in_user(u8),
    .out_valid(ov8), .out_bit(ob8), .out_last(ol8), .out_user(ou8),
    .res_valid(rv8), .result(res8), .res_user(ru8)
  );

  int done4 = 0, done8 = 0, waits = 0, overlap = 0, comp_ops = 0, err2 = 0;

  task automatic run_stream(input int n, input int nops, input bit gaps, ref int done_cnt);
    int k, cycle, ones, stream_len, last_accept;
    bit pending, cur_v, busy_at_accept;
    int acc_cyc[int];
    int ea[int];
    int eb[int];
    k = 0; cycle = 0; ones = 0; stream_len = 0; last_accept = -1;
    pending = 1'b0; cur_v = 1'b0; busy_at_accept = 1'b0;
    while (done_cnt < nops) begin
      logic rdy, ovl, obit, olast, rvl;
      logic [15:0] ouser, ruser;
      int rres;
      @(negedge clk);
      cycle++;
      if (n == 4) begin
        rdy = r4; ovl = ov4; obit = ob4; olast = ol4; ouser = ou4; rvl = rv4; rres = res4; ruser = ru4;
      end else begin
        rdy = r8; ovl = ov8; obit = ob8; olast = ol8; ouser = ou8; rvl = rv8; rres = res8; ruser = ru8;
      end
      if (ovl) begin
        ones += int'(obit);
        stream_len++;
        if (olast) begin
          int id, expv;
          id = int'(ouser);
          expv = ref_scalable_mult(ea[id], eb[id], n);
          checks++;
          if (ones != expv || stream_len != (1 << n)) begin
            failures++;
            $display("FAIL n=%0d stream of op %0d: %0d ones in %0d bits, expected %0d", n, id,
                     ones, stream_len, expv);
          end
          ones = 0; stream_len = 0;
        end
      end
      if (rvl) begin
        int id, expv, opt;
        id = int'(ruser);
        expv = ref_scalable_mult(ea[id], eb[id], n);
        opt = opt_mult(ea[id], eb[id], n);
        checks++;
        if (rres != expv || abs_diff(rres, opt) > 2 || cycle - acc_cyc[id] != (2 << n) + 1) begin
          failures++;
          $display("FAIL n=%0d a=%0d b=%0d result=%0d expected=%0d optimal=%0d latency=%0d", n,
                   ea[id], eb[id], rres, expv, opt, cycle - acc_cyc[id]);
        end
        if (abs_diff(rres, opt) == 2) err2++;
        if (expv != (ea[id] >> (n / 2)) * (eb[id] >> (n / 2))) comp_ops++;
        done_cnt++;
      end
      // Handshake of the edge that just passed: the pair on the bus was
      // taken if valid and ready were both high before that edge.
      if (pending) begin
        acc_cyc[k] = cycle - 1;
        if (last_accept >= 0 && !gaps) begin
          checks++;
          if (cycle - 1 - last_accept != (1 << n)) begin
            failures++;
            $display("FAIL n=%0d accept interval %0d", n, cycle - 1 - last_accept);
          end
        end
        if (busy_at_accept) overlap++;
        last_accept = cycle - 1;
        k++;
      end
      // Drive: a new pair (or a bubble) once the bus is free.
      if (pending || !cur_v) begin
        cur_v = 1'b0;
        if (k < nops && !(gaps && $urandom_range(3) == 0)) begin
          int av, bv;
          if (n == 4) begin
            av = k % 16; bv = k / 16;
          end else begin
            av = (k == 0) ? 5 << 4 | 5 : $urandom_range(255);
            bv = (k == 0) ? 15 << 4 | 15 : $urandom_range(255);
          end
          ea[k] = av; eb[k] = bv;
          cur_v = 1'b1;
          if (n == 4) begin a4 = N4'(av); b4 = N4'(bv); u4 = 16'(k); end
          else        begin a8 = N8'(av); b8 = N8'(bv); u8 = 16'(k); end
        end
      end else if (!rdy) begin
        waits++;
      end
      if (n == 4) v4 = cur_v; else v8 = cur_v;
      pending = cur_v && rdy;
      busy_at_accept = ovl;
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    fork
      run_stream(4, 256, 1'b0, done4);
      run_stream(8, 150, 1'b1, done8);
    join
    $display("pipelined accepts=%0d waits for ready=%0d compensated ops=%0d error-of-2 ops=%0d",
             overlap, waits, comp_ops, err2);
    checks++;
    if (overlap == 0 || waits == 0 || comp_ops == 0) begin
      failures++;
      $display("FAIL: a mechanism was never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
