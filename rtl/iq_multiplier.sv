// iq_multiplier -- point-by-point complex multiplication of one channel by
// the reference vector ("Multiplication").
//
// out = meas * u = (a + jb)(c + jd) = (ac - bd) + j(ad + bc), with u in fixed
// point with UNIT_FRAC fraction bits, so the product is shifted back by
// UNIT_FRAC with rounding (add half, arithmetic shift) and saturated. With
// u = conj(ref)/A_avg this subtracts the reference phase from the channel
// phase on every sample, without first converting either to polar form.
//
// Pipeline, one stage per clock (4 clocks from meas to out):
//   1. register meas
//   2. the four real products (u is taken here: u belongs to the meas
//      sample presented one clock earlier, because the reference vector
//      itself comes out of a one-clock register in ref_iq)
//   3. sum and difference
//   4. round, saturate, register out
// The four-cycle latency and the complex multiplication follow the paper;
// the stage split, the widths and the rounding are this design's choice.
module iq_multiplier #(
  parameter int IQ_W      = rt_pkg::IQ_W,
  parameter int UNIT_FRAC = rt_pkg::UNIT_FRAC
) (
  input  logic                   clk,
  input  logic                   rst,
  input  logic signed [IQ_W-1:0] meas_i,
  input  logic signed [IQ_W-1:0] meas_q,
  input  logic                   meas_valid,
  input  logic signed [IQ_W-1:0] u_i,
  input  logic signed [IQ_W-1:0] u_q,
  output logic signed [IQ_W-1:0] out_i,
  output logic signed [IQ_W-1:0] out_q,
  output logic                   out_valid
);
  localparam int PW = 2 * IQ_W;
  localparam int SW = PW + 1;

  logic signed [IQ_W-1:0] a, b;
  logic signed [PW-1:0]   p_ac, p_bd, p_ad, p_bc;
  logic signed [SW-1:0]   re, im;
  logic [2:0]             v;

  function automatic logic signed [IQ_W-1:0] rnd(input logic signed [SW-1:0] x);
    logic signed [SW-1:0] r;
    r = (x + (SW'(1) <<< (UNIT_FRAC - 1))) >>> UNIT_FRAC;
    return rt_pkg::sat_iq(64'(r));
  endfunction

  always_ff @(posedge clk) begin
    // stage 1
    a    <= meas_i;
    b    <= meas_q;
    // stage 2
    p_ac <= a * u_i;
    p_bd <= b * u_q;
    p_ad <= a * u_q;
    p_bc <= b * u_i;
    // stage 3
    re   <= SW'(p_ac) - SW'(p_bd);
    im   <= SW'(p_ad) + SW'(p_bc);
    // stage 4
    out_i <= rnd(re);
    out_q <= rnd(im);
  end

  always_ff @(posedge clk)
    if (rst) {out_valid, v} <= '0;
    else     {out_valid, v} <= {v, meas_valid};
endmodule
