// fir_filter -- low-pass FIR filter applied to an I/Q stream.
//
// The same real coefficients filter I and Q, so the filter changes the
// amplitude of a slowly varying vector only through its DC gain and leaves
// its phase alone. The coefficients are integers with a power-of-two sum;
// the output is sum(COEF[k] * x[n-k]) shifted right by SHIFT with rounding
// (add half, arithmetic shift) and saturated to the IQ width, so with
// sum(COEF) == 2^SHIFT the DC gain is exactly one.
//
// Interface: one I/Q sample per clock while in_valid. out_valid is in_valid
// delayed one clock. Latency: 1 clock (direct form; the newest sample enters
// the sum in the same clock it is registered).
// The paper names two FIR filters, a channel filter and a narrower reference
// filter ("FIR filter2"), but gives no coefficients. The defaults here are
// this design's choice: a 5-tap binomial kernel [1 4 6 4 1]/16. The narrow
// filter instance uses the 9-tap binomial kernel, sum 256.
module fir_filter #(
  parameter int NTAPS = 5,
  parameter int COEF_W = 10,
  parameter logic signed [COEF_W-1:0] COEF [NTAPS] = '{10'sd1, 10'sd4, 10'sd6, 10'sd4, 10'sd1},
  parameter int SHIFT = 4,
  parameter int IQ_W  = rt_pkg::IQ_W
) (
  input  logic                   clk,
  input  logic                   rst,
  input  logic signed [IQ_W-1:0] i_in,
  input  logic signed [IQ_W-1:0] q_in,
  input  logic                   in_valid,
  output logic signed [IQ_W-1:0] i_out,
  output logic signed [IQ_W-1:0] q_out,
  output logic                   out_valid
);
  localparam int SUM_W = IQ_W + COEF_W + $clog2(NTAPS) + 1;

  logic signed [IQ_W-1:0]  di [NTAPS];     // di[0] is the newest sample
  logic signed [IQ_W-1:0]  dq [NTAPS];
  logic signed [SUM_W-1:0] si, sq;

  always_comb begin
    si = SUM_W'(COEF[0] * i_in);
    sq = SUM_W'(COEF[0] * q_in);
    for (int k = 1; k < NTAPS; k++) begin
      si += SUM_W'(COEF[k] * di[k-1]);
      sq += SUM_W'(COEF[k] * dq[k-1]);
    end
  end

  function automatic logic signed [IQ_W-1:0] rnd(input logic signed [SUM_W-1:0] a);
    logic signed [SUM_W-1:0] r;
    r = (a + (SUM_W'(1) <<< (SHIFT - 1))) >>> SHIFT;
    return rt_pkg::sat_iq(64'(r));
  endfunction

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int k = 0; k < NTAPS; k++) begin
        di[k] <= '0;
        dq[k] <= '0;
      end
      i_out     <= '0;
      q_out     <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        di[0] <= i_in;
        dq[0] <= q_in;
        for (int k = 1; k < NTAPS; k++) begin
          di[k] <= di[k-1];
          dq[k] <= dq[k-1];
        end
        i_out <= rnd(si);
        q_out <= rnd(sq);
      end
    end
  end
endmodule
