// unary_sng: unary (thermometer-code) bit-stream generator.
//
// An operand register is compared with a counter; the output bit is 1 while
// the stored value is greater than the counter. With the counter stepping
// through 0 .. 2^W-1 the stream is value ones followed by zeros, so it
// represents value / 2^W. This is the register / comparator / counter
// generator of the paper; the counter itself is kept outside so that one
// counter can feed many generators (as the neuron diagram allows).
//
// Interface: `load` writes `din` into the register at the clock edge;
// `bit_o` is combinational in `cnt` and the stored `value`.
// Reset clears the register (a choice of this design; the paper gives no
// reset behaviour).
module unary_sng #(
  parameter int unsigned W = unary_pkg::N_BITS
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         load,
  input  logic [W-1:0] din,
  input  logic [W-1:0] cnt,
  output logic [W-1:0] value,
  output logic         bit_o
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    value <= '0;
    else if (load) value <= din;
  end

  assign bit_o = (value > cnt);

endmodule
