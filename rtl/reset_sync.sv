// reset_sync -- asynchronous-assert, synchronous-release reset for one clock
// domain. The design runs four ADC clock domains; each gets its own copy so
// that every domain leaves reset on an edge of its own clock. Two flip-flops
// deep, so the reset is released on the second rising edge of clk after
// rst_in falls. This helper is a choice of this design; the paper does not
// discuss reset.
module reset_sync (
  input  logic clk,
  input  logic rst_in,    // asynchronous, active high
  output logic rst_out    // active high, released synchronously
);
  logic [1:0] sr;
  always_ff @(posedge clk or posedge rst_in)
    if (rst_in) sr <= 2'b11;
    else        sr <= {sr[0], 1'b0};
  assign rst_out = sr[1];
endmodule
