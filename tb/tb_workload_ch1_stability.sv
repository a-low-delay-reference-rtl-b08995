// tb_workload_ch1_stability -- the stability experiment in miniature.
//
// The same synchronisation signal, split in two, drives the reference
// channel AC6 and channel CH1 (AC1) at about 5105 ADC units. Each copy gets
// its own independent noise (standing for the two receive chains), and
// both share a slow phase drift (standing for the clock and LO
// distribution). CH1's output is recorded for a window of samples with
// tracking off, then for an equally long window with tracking on, with the
// same drift rate. In each window it computes the RMS of the phase (degrees)
// and of the amplitude (percent of the mean).
// Expected behaviour of the method:
//   * tracking removes the common drift, so the phase RMS must fall, here
//     to less than half;
//   * tracking multiplies the reference's own amplitude noise into the
//     channel, so the amplitude RMS must rise, here by at least 20%.
// The window is far shorter than an hour, so the drift is made
// correspondingly faster.
module tb_workload_ch1_stability;
  import rt_pkg::*;
  localparam real PI = 3.14159265358979323846;
  localparam real HALF = 1000.0 / 105.0 / 2.0;   // ns
  localparam int  N = 7, M = 2, CH = 1, WIN = 20000;

  logic [NADC-1:0]  adc_clk = '0;
  logic             rst = 0;
  logic [ADC_W-1:0] adc_data [NCH];
  logic             track_en;
  iq_t              iq_out [NCH];
  logic             iq_valid, ref_state_valid, track_ready;
  logic [AMP_W-1:0] ref_amp;
  logic signed [PH_W-1:0] ref_phase;
  logic [NCH-1:0]   buf_overflow;

  ref_tracking_top dut (.adc_clk, .rst, .adc_data, .track_en, .iq_out, .iq_valid,
                        .ref_amp, .ref_phase, .ref_state_valid, .track_ready, .buf_overflow);

  int checks = 0, failures = 0;
  real drift = 0.0;

  for (genvar d = 0; d < NADC; d++) begin : g_clk
    initial begin
      #(0.37 + 1.9 * d);
      forever #(HALF) adc_clk[d] = ~adc_clk[d];
    end
  end

  // approximately Gaussian noise of the given sigma: sum of 12 uniforms
  function automatic real gnoise(input real sigma);
    real s;
    s = 0.0;
    for (int k = 0; k < 12; k++) s += $urandom_range(0, 65535) / 65536.0;
    return (s - 6.0) * sigma;
  endfunction

  for (genvar c = 0; c < NCH; c++) begin : g_adc
    int n = 0;
    logic [ADC_W-1:0] code;
    assign adc_data[c] = code;
    always @(posedge adc_clk[c/2]) begin
      real v;
      if (c == CH || c == REF_CH)
        v = 5105.0 * $cos(2.0 * PI * M * n / N + (drift + (c == CH ? 30.0 : 0.0)) * PI / 180.0)
            + gnoise(4.0);      // sigma 4 codes per receive chain
      else
        v = gnoise(4.0);
      code <= 16'($rtoi($floor(v + 0.5)) + 32768);
      n++;
    end
  end

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic measure(output real ph_rms, output real amp_rms_pct);
    real sp, spp, sa, saa, p, a, p0;
    sp = 0; spp = 0; sa = 0; saa = 0; p0 = 0;
    for (int k = 0; k < WIN; k++) begin
      @(negedge adc_clk[REF_CH/2]);
      while (!iq_valid) @(negedge adc_clk[REF_CH/2]);
      drift += 0.3 / WIN;                 // 0.3 degree per window
      p = $atan2(real'(iq_out[CH].q), real'(iq_out[CH].i)) * 180.0 / PI;
      if (k == 0) p0 = p;
      p = p - p0;
      while (p > 180.0) p -= 360.0;
      while (p < -180.0) p += 360.0;
      a = $sqrt(real'(iq_out[CH].i) ** 2 + real'(iq_out[CH].q) ** 2);
      sp += p; spp += p * p; sa += a; saa += a * a;
    end
    ph_rms = $sqrt(spp / WIN - (sp / WIN) ** 2);
    amp_rms_pct = 100.0 * $sqrt(saa / WIN - (sa / WIN) ** 2) / (sa / WIN);
  endtask

  initial begin
    real p_off, a_off, p_on, a_on;
    track_en = 0;
    #1 rst = 1;
    #60 rst = 0;
    @(negedge adc_clk[REF_CH/2]);
    while (!track_ready) @(negedge adc_clk[REF_CH/2]);
    repeat (500) @(negedge adc_clk[REF_CH/2]);
    measure(p_off, a_off);
    track_en = 1;
    repeat (20) @(negedge adc_clk[REF_CH/2]);
    measure(p_on, a_on);
    $display("CH%0d tracking off: phase RMS %f deg, amplitude RMS %f %%", CH, p_off, a_off);
    $display("CH%0d tracking on : phase RMS %f deg, amplitude RMS %f %%", CH, p_on, a_on);
    checks++;
    if (!(p_on < 0.5 * p_off)) begin failures++; $display("phase RMS did not fall"); end
    checks++;
    if (!(a_on > 1.2 * a_off)) begin failures++; $display("amplitude RMS did not rise"); end
    checks++;
    if (buf_overflow != '0) begin failures++; $display("buffer overflow"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
