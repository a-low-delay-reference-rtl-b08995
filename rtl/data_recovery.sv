// data_recovery -- ADC sample capture for one channel.
//
// The ADC word is captured on the rising edge of its own recovered clock
// (the input register that an FPGA would place in the I/O block), retimed by
// a second register and converted to a signed two's-complement sample. When
// OFFSET_BINARY is set the ADC delivers offset-binary codes and the MSB is
// inverted; otherwise the code is already two's complement. out_valid rises
// two edges after reset is released and then stays high: the ADC delivers a
// sample on every clock, so every clock carries a new sample.
//
// Latency: 2 clocks from adc_data to sample.
// The paper only names this block; the capture registers and the code
// conversion are this design's choice of the simplest circuit that turns the
// ADC output into signed samples.
module data_recovery #(
  parameter int ADC_W         = rt_pkg::ADC_W,
  parameter bit OFFSET_BINARY = 1'b1
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic [ADC_W-1:0]        adc_data,
  output logic signed [ADC_W-1:0] sample,
  output logic                    out_valid
);
  logic [ADC_W-1:0] cap;
  logic [1:0]       vpipe;

  always_ff @(posedge clk) begin
    cap    <= adc_data;
    sample <= OFFSET_BINARY ? $signed({~cap[ADC_W-1], cap[ADC_W-2:0]}) : $signed(cap);
  end

  always_ff @(posedge clk)
    if (rst) vpipe <= '0;
    else     vpipe <= {vpipe[0], 1'b1};

  assign out_valid = vpipe[1];
endmodule
