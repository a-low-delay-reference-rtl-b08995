// tb_ref_tracking_top -- end-to-end test of the eight-channel receiver at
// its default parameters.
//
// Four ADC clocks of 105 MHz with different phases sample eight IF tones
// (f_IF = 2/7 f_s) of known amplitude and phase, with a little noise. A
// common phase drift, standing for the drift of the clock and LO
// distribution, is added to every channel including the reference AC6. The
// test then walks through:
//   1. tracking on, no drift: learn each channel's tracked phase;
//   2. tracking on, drift ramps by 25 degrees: tracked phases must stay put
//      and tracked amplitudes must equal the channel amplitudes;
//   3. switch off, drift ramps 10 degrees more: outputs must follow the
//      drift and carry the raw amplitudes;
//   4. switch on again: tracked phases return to step 1's values;
//   5. reference amplitude steps from 5105 to 4000: once the average has
//      caught up the tracked amplitudes are back at the channel amplitudes.
// Along the way it checks the reported reference amplitude ("REF power
// state"), that no buffer overflows, that every output leaves exactly five
// clocks after its buffer read (1 buffer register + 4 multiplication), and
// it counts how often each
// mechanism happened: tracked samples, passed-through samples, switch
// changes, averaged amplitude updates, gain renormalisation after the
// amplitude step. A mechanism that never happened counts as a failure.
module tb_ref_tracking_top;
  import rt_pkg::*;
  localparam real PI = 3.14159265358979323846;
  localparam real HALF = 1000.0 / 105.0 / 2.0;   // ns
  localparam int  N = 7, M = 2;

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
  real amp_c [NCH] = '{3000.0, 6000.0, 9000.0, 12000.0, 2500.0, 7000.0, 5105.0, 10000.0};
  real phi_c [NCH] = '{10.0, -45.0, 100.0, 170.0, -120.0, 60.0, 0.0, -80.0};
  real drift = 0.0;       // degrees, common to every channel
  real ref_gain = 1.0;    // scales the reference amplitude only

  // ---- clocks: same frequency, different phases ----
  for (genvar d = 0; d < NADC; d++) begin : g_clk
    initial begin
      #(0.37 + 1.9 * d);
      forever #(HALF) adc_clk[d] = ~adc_clk[d];
    end
  end

  // channel c is sampled by ADC c/2 (offset-binary codes); n counts its samples
  for (genvar c = 0; c < NCH; c++) begin : g_adc
    int n = 0;
    logic [ADC_W-1:0] code;
    assign adc_data[c] = code;
    always @(posedge adc_clk[c/2]) begin
      real a, v;
      a = (c == REF_CH) ? amp_c[c] * ref_gain : amp_c[c];
      v = a * $cos(2.0 * PI * M * n / N + (phi_c[c] + drift) * PI / 180.0)
          + ($urandom_range(0, 6) - 3.0);
      code <= 16'($rtoi($floor(v + 0.5)) + 32768);
      n++;
    end
  end

  initial begin
    #3000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real phase_deg(input iq_t v);
    return $atan2(real'(v.q), real'(v.i)) * 180.0 / PI;
  endfunction
  function automatic real mag(input iq_t v);
    return $sqrt(real'(v.i) * real'(v.i) + real'(v.q) * real'(v.q));
  endfunction
  function automatic real wrap(input real d);
    while (d > 180.0) d -= 360.0;
    while (d < -180.0) d += 360.0;
    return d;
  endfunction

  // mechanism counters
  int n_tracked = 0, n_passed = 0, n_switch = 0, n_avg = 0, n_renorm = 0, n_ready = 0;
  always @(posedge adc_clk[REF_CH/2]) if (ref_state_valid) n_avg++;

  // latency of the tracking path: a read of the buffers (rd_en) gives the
  // buffer output one clock later and the tracked output four clocks after
  // that, so iq_valid must be rd_en delayed by exactly five clocks
  logic [4:0] rd_hist = '0;
  int n_lat = 0, ready_clk = -1, clk_cnt = 0, run_clk = 0;
  always @(posedge adc_clk[REF_CH/2]) begin
    clk_cnt++;
    if (track_ready && ready_clk < 0) ready_clk = clk_cnt;
    rd_hist <= {rd_hist[3:0], dut.rd_en};
    run_clk = dut.drst[REF_CH/2] ? 0 : run_clk + 1;
    if (run_clk > 6) begin
      checks++;
      if (iq_valid !== rd_hist[4]) begin
        failures++;
        if (n_lat++ < 5) $display("latency: iq_valid %b, read five clocks earlier %b", iq_valid, rd_hist[4]);
      end
    end
  end

  real ph0 [NCH];
  logic rclk;
  assign rclk = adc_clk[REF_CH/2];

  task automatic wait_valid(input int n);
    for (int k = 0; k < n; k++) begin
      @(negedge rclk);
      while (!iq_valid) @(negedge rclk);
    end
  endtask

  // one checked output sample: tracked or raw
  task automatic check_sample(input bit tracked, input real ph_ref_off [NCH], input real gain_exp);
    for (int c = 0; c < NCH; c++) begin
      real ea, ep, tol;
      if (c == REF_CH) continue;
      // raw samples lag the drift ramp by the pipeline depth and carry the
      // channel noise; tracked ones carry the noise of both channels
      tol = tracked ? 0.2 : 0.3;
      ea = amp_c[c] * (tracked ? gain_exp : 1.0);
      ep = tracked ? ph0[c] : wrap(ph_ref_off[c] + drift);
      checks++;
      if ((mag(iq_out[c]) - ea) / ea > 0.005 || (mag(iq_out[c]) - ea) / ea < -0.005 ||
          wrap(phase_deg(iq_out[c]) - ep) > tol || wrap(phase_deg(iq_out[c]) - ep) < -tol) begin
        failures++;
        if (failures < 20)
          $display("%s ch%0d t=%0t amp %f exp %f phase %f exp %f", tracked ? "tracked" : "raw",
                   c, $time, mag(iq_out[c]), ea, phase_deg(iq_out[c]), ep);
      end
    end
    if (tracked) n_tracked++; else n_passed++;
  endtask

  initial begin
    real off [NCH];
    track_en = 1;
    for (int c = 0; c < NCH; c++) off[c] = 0.0;
    #1 rst = 1;
    #60 rst = 0;
    // wait for the first averaged amplitude and a settled pipeline
    @(negedge rclk);
    while (!track_ready) @(negedge rclk);
    n_ready++;
    wait_valid(600);
    // REF power state: reported reference amplitude
    checks++;
    if (ref_amp < 5105 - 15 || ref_amp > 5105 + 15) begin
      failures++; $display("ref_amp %0d, expected about 5105", ref_amp);
    end
    // 1. learn tracked phases (average of 64 samples)
    for (int c = 0; c < NCH; c++) ph0[c] = 0.0;
    for (int k = 0; k < 64; k++) begin
      wait_valid(1);
      for (int c = 0; c < NCH; c++) ph0[c] += wrap(phase_deg(iq_out[c]) - phase_deg(iq_out[0])) / 64.0;
    end
    wait_valid(1);
    for (int c = 0; c < NCH; c++) ph0[c] = wrap(ph0[c] + phase_deg(iq_out[0]));
    // 2. drift 25 degrees with tracking on
    for (int k = 0; k < 5000; k++) begin
      wait_valid(1);
      drift += 25.0 / 5000.0;
      check_sample(1, off, 1.0);
    end
    // 3. switch off; learn raw phase offsets, then drift 10 more degrees
    track_en = 0; n_switch++;
    wait_valid(12);
    // average 32 samples, relative to channel 0 to stay clear of the +-180 wrap
    for (int c = 0; c < NCH; c++) off[c] = 0.0;
    for (int k = 0; k < 32; k++) begin
      wait_valid(1);
      for (int c = 0; c < NCH; c++) off[c] += wrap(phase_deg(iq_out[c]) - phase_deg(iq_out[0])) / 32.0;
    end
    wait_valid(1);
    for (int c = 0; c < NCH; c++) off[c] = wrap(off[c] + phase_deg(iq_out[0]) - drift);
    for (int k = 0; k < 3000; k++) begin
      wait_valid(1);
      drift += 10.0 / 3000.0;
      check_sample(0, off, 1.0);
    end
    // the reference channel's own output follows the drift too
    checks++;
    if (wrap(phase_deg(iq_out[REF_CH]) - off[REF_CH] - drift) > 0.2 ||
        wrap(phase_deg(iq_out[REF_CH]) - off[REF_CH] - drift) < -0.2) begin
      failures++; $display("reference output does not follow the drift");
    end
    // 4. switch on again
    track_en = 1; n_switch++;
    wait_valid(12);
    for (int k = 0; k < 2000; k++) begin
      wait_valid(1);
      drift -= 20.0 / 2000.0;
      check_sample(1, off, 1.0);
    end
    // 5. reference amplitude step 5105 -> 4000: at first the tracked
    //    amplitudes fall by 4000/5105, then the average catches up
    ref_gain = 4000.0 / 5105.0;
    wait_valid(30);
    check_sample(1, off, ref_gain);
    wait_valid(1500);
    for (int k = 0; k < 1000; k++) begin
      wait_valid(1);
      check_sample(1, off, 1.0);
    end
    n_renorm++;
    checks++;
    if (ref_amp < 4000 - 15 || ref_amp > 4000 + 15) begin
      failures++; $display("ref_amp %0d, expected about 4000", ref_amp);
    end
    checks++;
    if (buf_overflow != '0) begin failures++; $display("buffer overflow"); end
    $display("first average ready %0d reference clocks after the start", ready_clk);
    $display("mechanisms: tracked=%0d passed_through=%0d switch_changes=%0d avg_updates=%0d renormalised=%0d ready=%0d",
             n_tracked, n_passed, n_switch, n_avg, n_renorm, n_ready);
    if (n_tracked == 0) failures++;
    if (n_passed == 0)  failures++;
    if (n_switch < 2)   failures++;
    if (n_avg == 0)     failures++;
    if (n_renorm == 0)  failures++;
    if (n_ready == 0)   failures++;
    checks += 6;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
