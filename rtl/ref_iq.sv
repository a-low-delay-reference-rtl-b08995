// ref_iq -- the reference vector that removes the reference phase from every
// channel ("REF I Q" with its on/off switch).
//
// By Euler's formula, multiplying a channel vector A_m*exp(j*phi_m) by the
// conjugate reference A_r*exp(-j*phi_r) = I_r - j*Q_r subtracts the
// reference phase; dividing by the average reference amplitude A_avg then
// brings the gain back to about one. This block forms, for every reference
// sample,
//     u = (I_r - j*Q_r) * recip / 2^RECIP_SH,  recip = 2^(RECIP_SH+UNIT_FRAC) / A_avg
// which is (I_r - j*Q_r) / A_avg as a fixed-point number with UNIT_FRAC
// fraction bits (about 1.0 == 2^UNIT_FRAC), rounded and saturated. recip is
// refreshed by a serial divider each time a new average amplitude arrives
// from the amplitude/phase solver; before the first one arrives the vector
// is zero and ready is low.
// The switch: with track_en low the block outputs exactly 1 + j0, so the
// multipliers pass every channel through unchanged with the same latency.
//
// Interface: ref_i/ref_q/ref_valid at the sample rate; u_i/u_q/u_valid
// follow one clock later (registered). amp/amp_valid at the averaged rate.
// Follows the paper: conjugation by negation, scaling by the reciprocal of
// the averaged amplitude, a switch that turns tracking on or off. This
// design's choices: the reciprocal form, the word widths, the zero output
// before the first average, and applying the switch here.
module ref_iq #(
  parameter int IQ_W      = rt_pkg::IQ_W,
  parameter int AMP_W     = rt_pkg::AMP_W,
  parameter int UNIT_FRAC = rt_pkg::UNIT_FRAC,
  parameter int RECIP_SH  = 17,
  parameter int RW        = 26
) (
  input  logic                   clk,
  input  logic                   rst,
  input  logic                   track_en,
  input  logic signed [IQ_W-1:0] ref_i,
  input  logic signed [IQ_W-1:0] ref_q,
  input  logic                   ref_valid,
  input  logic [AMP_W-1:0]       amp,
  input  logic                   amp_valid,
  output logic signed [IQ_W-1:0] u_i,
  output logic signed [IQ_W-1:0] u_q,
  output logic                   u_valid,
  output logic                   ready,
  output logic [RW-1:0]          recip
);
  localparam int PW = IQ_W + RW + 1;

  logic                   div_done, div_busy;
  logic [RW-1:0]          div_q;
  logic signed [PW-1:0]   pi_, pq_;

  recip_divider #(.AMP_W(AMP_W), .NUM_SH(RECIP_SH + UNIT_FRAC), .RW(RW)) u_div (
    .clk, .rst, .start(amp_valid), .amp,
    .recip(div_q), .done(div_done), .busy(div_busy)
  );

  assign pi_ = PW'(ref_i) * $signed({1'b0, recip});
  assign pq_ = -(PW'(ref_q) * $signed({1'b0, recip}));

  function automatic logic signed [IQ_W-1:0] rnd(input logic signed [PW-1:0] a);
    logic signed [PW-1:0] r;
    r = (a + (PW'(1) <<< (RECIP_SH - 1))) >>> RECIP_SH;
    return rt_pkg::sat_iq(64'(r));
  endfunction

  always_ff @(posedge clk) begin
    if (rst) begin
      recip   <= '0;
      ready   <= 1'b0;
      u_i     <= '0;
      u_q     <= '0;
      u_valid <= 1'b0;
    end else begin
      if (div_done) begin
        recip <= div_q;
        ready <= 1'b1;
      end
      u_valid <= ref_valid;
      if (ref_valid) begin
        if (!track_en) begin
          u_i <= IQ_W'(1) <<< UNIT_FRAC;
          u_q <= '0;
        end else if (!ready) begin
          u_i <= '0;
          u_q <= '0;
        end else begin
          u_i <= rnd(pi_);
          u_q <= rnd(pq_);
        end
      end
    end
  end
endmodule
