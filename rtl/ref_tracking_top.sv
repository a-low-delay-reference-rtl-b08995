// ref_tracking_top -- eight-channel LLRF receiver with low-delay reference
// tracking.
//
// Every channel is sampled by one half of a dual-channel ADC and runs in the
// clock of that ADC: data recovery, non-IQ demodulation to I/Q and a FIR
// low-pass. A dual-clock data buffer per channel then brings all eight
// channels into the clock of the reference ADC (ADC3), where they are read
// together, one sample of every channel per clock. Channel AC6 carries the
// reference from the master oscillator; its I/Q, conjugated and divided by
// its own long-term average amplitude, multiplies every other channel point
// by point, which subtracts the reference phase (and with it the drift of
// the clock and LO distribution that all channels share) within four clocks.
// The average amplitude comes from a second, slow branch off the reference
// demodulator: FIR filter2, a decimating CIC and a CORDIC that also reports
// the reference amplitude and phase ("REF power state"). track_en switches
// the tracking off, in which case the channels pass through unchanged with
// the same latency.
//
// Clocks: adc_clk[d] is the buffered clock of ADC d, which samples channels
// 2d and 2d+1. All outputs except buf_overflow are in adc_clk[REF_ADC];
// buf_overflow[c] is in the clock of channel c's ADC. rst is asynchronous
// and is released separately in each domain. track_en must be synchronous
// to adc_clk[REF_ADC].
// Latency: from the buffer read to iq_out, 1 clock of buffer output register
// plus 4 clocks of multiplication; AC6's own I/Q is delayed to stay aligned
// with the other channels.
// From the paper: the block structure (eight channels, four ADCs, buffers
// written in the ADC clock and read in the reference clock, the reference
// branch through FIR filter2, CIC and amplitude/phase solution, the switch,
// the complex multiplication). This design's choices: all widths and filter
// constants, the read rule (all buffers non-empty) and the reset scheme.
module ref_tracking_top
  import rt_pkg::*;
#(
  parameter int NIQ_N   = 7,      // non-IQ: N samples ...
  parameter int NIQ_M   = 2,      // ... span M IF periods
  parameter int CIC_R   = 64,
  parameter int CIC_NST = 3,
  parameter int BUF_DEPTH = 16
) (
  input  logic [NADC-1:0]        adc_clk,
  input  logic                   rst,
  input  logic [ADC_W-1:0]       adc_data [NCH],
  input  logic                   track_en,
  output iq_t                    iq_out [NCH],
  output logic                   iq_valid,
  output logic [AMP_W-1:0]       ref_amp,
  output logic signed [PH_W-1:0] ref_phase,
  output logic                   ref_state_valid,
  output logic                   track_ready,
  output logic [NCH-1:0]         buf_overflow
);
  localparam int REF_ADC = REF_CH / 2;
  localparam int NTAP2   = 9;
  localparam logic signed [9:0] COEF2 [NTAP2] =
    '{10'sd1, 10'sd8, 10'sd28, 10'sd56, 10'sd70, 10'sd56, 10'sd28, 10'sd8, 10'sd1};

  logic            rclk;
  logic [NADC-1:0] drst;
  assign rclk = adc_clk[REF_ADC];

  for (genvar d = 0; d < NADC; d++) begin : g_rst
    reset_sync u_rs (.clk(adc_clk[d]), .rst_in(rst), .rst_out(drst[d]));
  end

  // ---------------- per-channel front end, in each ADC's clock ----------
  logic signed [ADC_W-1:0] smp   [NCH];
  logic [NCH-1:0]          smp_v;
  iq_t                     dem   [NCH];
  logic [NCH-1:0]          dem_v;
  iq_t                     fil   [NCH];
  logic [NCH-1:0]          fil_v;
  iq_t                     rdw   [NCH];
  logic [NCH-1:0]          rd_v, empty;
  logic                    rd_en;

  for (genvar c = 0; c < NCH; c++) begin : g_ch
    localparam int D = c / 2;

    data_recovery u_rec (
      .clk(adc_clk[D]), .rst(drst[D]), .adc_data(adc_data[c]),
      .sample(smp[c]), .out_valid(smp_v[c])
    );

    non_iq_demod #(.N(NIQ_N), .M(NIQ_M)) u_dem (
      .clk(adc_clk[D]), .rst(drst[D]), .x(smp[c]), .in_valid(smp_v[c]),
      .i_out(dem[c].i), .q_out(dem[c].q), .out_valid(dem_v[c])
    );

    fir_filter u_fir (
      .clk(adc_clk[D]), .rst(drst[D]),
      .i_in(dem[c].i), .q_in(dem[c].q), .in_valid(dem_v[c]),
      .i_out(fil[c].i), .q_out(fil[c].q), .out_valid(fil_v[c])
    );

    data_buffer #(.W($bits(iq_t)), .DEPTH(BUF_DEPTH)) u_buf (
      .wr_clk(adc_clk[D]), .wr_rst(drst[D]), .wr_en(fil_v[c]), .wr_data(fil[c]),
      .full(), .overflow(buf_overflow[c]),
      .rd_clk(rclk), .rd_rst(drst[REF_ADC]), .rd_en(rd_en),
      .rd_data(rdw[c]), .rd_valid(rd_v[c]), .empty(empty[c])
    );
  end

  // all channels are read together, so sample k of every channel leaves
  // the buffers in the same clock
  assign rd_en = ~|empty;

  // ---------------- reference averaging branch, in the reference clock ----
  logic signed [IQ_W-1:0] f2_i, f2_q, cic_i, cic_q;
  logic                   f2_v, cic_v, cordic_busy;

  fir_filter #(.NTAPS(NTAP2), .COEF_W(10), .COEF(COEF2), .SHIFT(8)) u_fir2 (
    .clk(rclk), .rst(drst[REF_ADC]),
    .i_in(dem[REF_CH].i), .q_in(dem[REF_CH].q), .in_valid(dem_v[REF_CH]),
    .i_out(f2_i), .q_out(f2_q), .out_valid(f2_v)
  );

  cic_decimator #(.NST(CIC_NST), .R(CIC_R)) u_cic (
    .clk(rclk), .rst(drst[REF_ADC]),
    .i_in(f2_i), .q_in(f2_q), .in_valid(f2_v),
    .i_out(cic_i), .q_out(cic_q), .out_valid(cic_v)
  );

  cordic_amp_phase u_aphi (
    .clk(rclk), .rst(drst[REF_ADC]),
    .i_in(cic_i), .q_in(cic_q), .in_valid(cic_v),
    .amp(ref_amp), .phase(ref_phase), .out_valid(ref_state_valid),
    .busy(cordic_busy)
  );

  // ---------------- tracking: reference vector and multiplications ----------
  logic signed [IQ_W-1:0] u_i, u_q;
  logic                   u_v;
  logic [25:0]            recip;
  logic [NCH-1:0]         mul_v;

  ref_iq u_ref (
    .clk(rclk), .rst(drst[REF_ADC]), .track_en,
    .ref_i(rdw[REF_CH].i), .ref_q(rdw[REF_CH].q), .ref_valid(rd_v[REF_CH]),
    .amp(ref_amp), .amp_valid(ref_state_valid),
    .u_i, .u_q, .u_valid(u_v), .ready(track_ready), .recip
  );

  for (genvar c = 0; c < NCH; c++) begin : g_mul
    if (c == REF_CH) begin : g_ref
      // the reference channel's own vector, delayed to line up with the others
      iq_t        dly [4];
      logic [3:0] dv;
      always_ff @(posedge rclk) begin
        dly[0] <= rdw[c];
        for (int k = 1; k < 4; k++) dly[k] <= dly[k-1];
      end
      always_ff @(posedge rclk)
        if (drst[REF_ADC]) dv <= '0;
        else               dv <= {dv[2:0], rd_v[c]};
      assign iq_out[c] = dly[3];
      assign mul_v[c]  = dv[3];
    end else begin : g_trk
      iq_multiplier u_mul (
        .clk(rclk), .rst(drst[REF_ADC]),
        .meas_i(rdw[c].i), .meas_q(rdw[c].q), .meas_valid(rd_v[c]),
        .u_i, .u_q,
        .out_i(iq_out[c].i), .out_q(iq_out[c].q), .out_valid(mul_v[c])
      );
    end
  end

  assign iq_valid = mul_v[0];

  // every channel is read in the same clock, so all valids agree
  a_aligned: assert property (@(posedge rclk) disable iff (drst[REF_ADC])
                              (&mul_v) || !(|mul_v))
    else $error("ref_tracking_top: output channels out of step");
endmodule
