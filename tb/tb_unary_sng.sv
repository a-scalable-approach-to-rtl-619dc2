// tb_unary_sng: exhaustive check of the thermometer generator at W = 4.
// For every operand and every counter value the output must equal
// (operand > counter); the register must keep its value while `load` is low
// and a full counter sweep must produce exactly `operand` ones.
module tb_unary_sng;
  localparam int unsigned W = 4;

  logic         clk = 1'b0, rst_n = 1'b0, load = 1'b0;
  logic [W-1:0] din = '0, cnt = '0, value;
  logic         bit_o;
  int           checks = 0, failures = 0;

  unary_sng #(.W(W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ones;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int v = 0; v < (1 << W); v++) begin
      @(negedge clk); load = 1'b1; din = W'(v);
      @(negedge clk); load = 1'b0; din = W'(v + 5);   // must be ignored
      ones = 0;
      for (int c = 0; c < (1 << W); c++) begin
        cnt = W'(c);
        #1;
        checks++;
        if (bit_o !== (v > c)) begin
          failures++;
          $display("FAIL value=%0d cnt=%0d bit=%0b", v, c, bit_o);
        end
        ones += int'(bit_o);
      end
      checks++;
      if (ones != v || value != W'(v)) begin
        failures++;
        $display("FAIL value=%0d ones=%0d stored=%0d", v, ones, value);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
