// non_iq_demod -- non-IQ demodulation of one IF channel.
//
// The intermediate frequency is chosen so that M IF periods fit exactly in
// N samples (f_IF = f_s * M / N, with M and N coprime and M/N not 1/4).
// Over a sliding window of the last N samples
//     I =  (2/N) * sum x[n] * cos(2*pi*M*n/N)
//     Q = -(2/N) * sum x[n] * sin(2*pi*M*n/N)
// so an input A*cos(2*pi*M*n/N + phi) gives I + jQ = A*exp(j*phi), in ADC
// units. Because the coefficients repeat with period N, the window sum is
// kept by recursion, acc += c[n mod N] * (x[n] - x[n-N]); with integer
// coefficients this is exact and does not drift. The phase index n mod N
// counts samples from reset, so channels reset together share one phase
// reference.
//
// Interface: one sample per clock while in_valid; out_valid follows one
// clock after the sample that completes the first full window.
// Latency: 1 clock. The coefficients, computed at elaboration, are
// round((2/N) * cos|sin * 2^CF).
// The paper names the method; N = 7, M = 2 (a 30 MHz IF at 105 MHz) and all
// widths are choices of this design.
module non_iq_demod #(
  parameter int N     = 7,
  parameter int M     = 2,
  parameter int X_W   = rt_pkg::ADC_W,
  parameter int CF    = 16,             // fraction bits of the coefficients
  parameter int IQ_W  = rt_pkg::IQ_W
) (
  input  logic                   clk,
  input  logic                   rst,
  input  logic signed [X_W-1:0]  x,
  input  logic                   in_valid,
  output logic signed [IQ_W-1:0] i_out,
  output logic signed [IQ_W-1:0] q_out,
  output logic                   out_valid
);
  localparam int CW   = CF + 1;                 // |c| < 2/N * 2^CF <= 2^CF
  localparam int ACCW = X_W + 1 + CW + $clog2(N) + 1;
  typedef logic signed [CW-1:0] coef_arr_t [N];

  function automatic coef_arr_t gen_coef(input bit sine);
    coef_arr_t c;
    real pi, v;
    pi = 3.14159265358979323846;
    for (int k = 0; k < N; k++) begin
      v = (2.0 / N) * (sine ? -$sin(2.0 * pi * M * k / N) : $cos(2.0 * pi * M * k / N));
      c[k] = CW'($rtoi($floor(v * (2.0 ** CF) + 0.5)));
    end
    return c;
  endfunction

  localparam coef_arr_t COS_C = gen_coef(1'b0);
  localparam coef_arr_t SIN_C = gen_coef(1'b1);

  logic signed [X_W-1:0]  hist [N];             // last N samples
  logic [$clog2(N)-1:0]   ph;                   // n mod N
  logic [$clog2(N+1)-1:0] fill;
  logic signed [ACCW-1:0] acc_i, acc_q, acc_i_nx, acc_q_nx;
  logic signed [X_W:0]    dx;

  always_comb begin
    dx       = (X_W+1)'(x) - (X_W+1)'(hist[N-1]);
    acc_i_nx = acc_i + ACCW'(COS_C[ph] * dx);
    acc_q_nx = acc_q + ACCW'(SIN_C[ph] * dx);
  end

  function automatic logic signed [IQ_W-1:0] rnd(input logic signed [ACCW-1:0] a);
    logic signed [ACCW-1:0] r;
    r = (a + (ACCW'(1) <<< (CF - 1))) >>> CF;
    return rt_pkg::sat_iq(64'(r));
  endfunction

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int k = 0; k < N; k++) hist[k] <= '0;
      ph        <= '0;
      fill      <= '0;
      acc_i     <= '0;
      acc_q     <= '0;
      i_out     <= '0;
      q_out     <= '0;
      out_valid <= 1'b0;
    end else if (in_valid) begin
      hist[0] <= x;
      for (int k = 1; k < N; k++) hist[k] <= hist[k-1];
      ph        <= (ph == $clog2(N)'(N - 1)) ? '0 : ph + 1'b1;
      if (fill != ($clog2(N+1))'(N)) fill <= fill + 1'b1;
      acc_i     <= acc_i_nx;
      acc_q     <= acc_q_nx;
      i_out     <= rnd(acc_i_nx);
      q_out     <= rnd(acc_q_nx);
      out_valid <= (fill >= ($clog2(N+1))'(N - 1));
    end else begin
      out_valid <= 1'b0;
    end
  end
endmodule
