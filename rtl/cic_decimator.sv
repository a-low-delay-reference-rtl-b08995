// cic_decimator -- decimating cascaded integrator-comb filter for I/Q.
//
// Averages the reference vector over a long window so that the amplitude
// used to normalise the tracking product is free of sample noise.
// NST integrators run at the input rate; every R-th input sample the
// combs (differential delay 1) run once and produce one output. The filter
// response is the NST-fold convolution of an R-sample boxcar, DC gain R^NST;
// R is a power of two, so the gain is removed exactly by a rounding right
// shift of NST*log2(R) bits and the output is an average in input units.
// Integrators are wide enough (IN_W + NST*log2(R) bits) that two's
// complement wrap-around cancels in the combs.
//
// Interface: one sample per clock while in_valid. Decimation phase is
// counted from reset: the output taken after input sample m*R + R-1 covers
// samples up to and including it, and appears with out_valid one clock
// after that sample was presented.
// The paper names a CIC filter after "FIR filter2" to obtain the average
// reference amplitude; NST = 3 and R = 64 are this design's choice.
module cic_decimator #(
  parameter int IN_W = rt_pkg::IQ_W,
  parameter int NST  = 3,
  parameter int R    = 64
) (
  input  logic                   clk,
  input  logic                   rst,
  input  logic signed [IN_W-1:0] i_in,
  input  logic signed [IN_W-1:0] q_in,
  input  logic                   in_valid,
  output logic signed [IN_W-1:0] i_out,
  output logic signed [IN_W-1:0] q_out,
  output logic                   out_valid
);
  localparam int LR = $clog2(R);
  localparam int GW = IN_W + NST * LR;

  typedef logic signed [GW-1:0] stage_t [NST];

  stage_t integ_i, integ_q, integ_i_nx, integ_q_nx;
  stage_t dly_i, dly_q, comb_i, comb_q;
  logic [LR-1:0] phase;

  always_comb begin
    integ_i_nx[0] = integ_i[0] + GW'(i_in);
    integ_q_nx[0] = integ_q[0] + GW'(q_in);
    for (int k = 1; k < NST; k++) begin
      integ_i_nx[k] = integ_i[k] + integ_i_nx[k-1];
      integ_q_nx[k] = integ_q[k] + integ_q_nx[k-1];
    end
    comb_i[0] = integ_i_nx[NST-1] - dly_i[0];
    comb_q[0] = integ_q_nx[NST-1] - dly_q[0];
    for (int k = 1; k < NST; k++) begin
      comb_i[k] = comb_i[k-1] - dly_i[k];
      comb_q[k] = comb_q[k-1] - dly_q[k];
    end
  end

  function automatic logic signed [IN_W-1:0] scale(input logic signed [GW-1:0] a);
    logic signed [GW:0] r;
    r = ((GW+1)'(a) + ((GW+1)'(1) <<< (NST * LR - 1))) >>> (NST * LR);
    return IN_W'(r);
  endfunction

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int k = 0; k < NST; k++) begin
        integ_i[k] <= '0; integ_q[k] <= '0;
        dly_i[k]   <= '0; dly_q[k]   <= '0;
      end
      phase     <= '0;
      i_out     <= '0;
      q_out     <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      if (in_valid) begin
        integ_i <= integ_i_nx;
        integ_q <= integ_q_nx;
        phase   <= phase + 1'b1;
        if (phase == LR'(R - 1)) begin
          dly_i[0] <= integ_i_nx[NST-1];
          dly_q[0] <= integ_q_nx[NST-1];
          for (int k = 1; k < NST; k++) begin
            dly_i[k] <= comb_i[k-1];
            dly_q[k] <= comb_q[k-1];
          end
          i_out     <= scale(comb_i[NST-1]);
          q_out     <= scale(comb_q[NST-1]);
          out_valid <= 1'b1;
        end
      end
    end
  end
endmodule
