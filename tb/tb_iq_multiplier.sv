// tb_iq_multiplier -- checks the 4-clock complex multiplication: for random
// channel vectors m and reference vectors u (u presented one clock after
// its m), out = round(m*u / 2^16), saturated, must appear exactly four
// clocks after m with out_valid. Also checks that u = 1.0 passes m through
// unchanged and that u = exp(-j*theta) rotates a vector by -theta.
module tb_iq_multiplier;
  localparam real PI = 3.14159265358979323846;
  logic clk = 0, rst = 1;
  logic signed [17:0] mi, mq, ui, uq, oi, oq;
  logic mv, ov;
  int checks = 0, failures = 0;
  longint ei [$], eq [$];
  int vq [$];

  iq_multiplier dut (.clk, .rst, .meas_i(mi), .meas_q(mq), .meas_valid(mv),
                     .u_i(ui), .u_q(uq), .out_i(oi), .out_q(oq), .out_valid(ov));

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint rs(input longint v);
    longint r;
    r = (v + (longint'(1) << 15)) >>> 16;
    if (r > 131071) r = 131071;
    if (r < -131072) r = -131072;
    return r;
  endfunction

  initial begin
    logic signed [17:0] pmi, pmq;
    int lat_seen;
    mi = 0; mq = 0; ui = 0; uq = 0; mv = 0;
    pmi = 0; pmq = 0;
    repeat (3) @(negedge clk);
    rst = 0;
    for (int n = 0; n < 2000; n++) begin
      // u for the sample presented last clock
      if (n < 800) begin
        ui = 18'($urandom); uq = 18'($urandom);
      end else if (n < 1200) begin
        ui = 18'sd65536; uq = 0;
      end else begin
        real th;
        th = 2.0 * PI * (n % 97) / 97.0;
        ui = 18'($rtoi($floor(65536.0 * $cos(th) + 0.5)));
        uq = 18'($rtoi($floor(-65536.0 * $sin(th) + 0.5)));
      end
      ei.push_back(rs(longint'(pmi) * ui - longint'(pmq) * uq));
      eq.push_back(rs(longint'(pmi) * uq + longint'(pmq) * ui));
      // new channel sample
      mi = (n % 3 == 0) ? 18'($urandom) : 18'($urandom_range(0, 20000)) - 18'sd10000;
      mq = 18'($urandom_range(0, 20000)) - 18'sd10000;
      mv = (n % 13 != 7);
      vq.push_back(int'(mv));
      pmi = mi; pmq = mq;
      @(negedge clk);
      // out now holds the result for the channel sample presented 4 clocks
      // ago (iteration n-3), whose expected value was queued at iteration n-2
      if (n >= 4) begin
        checks++;
        if (int'(ov) != vq[n-3]) begin failures++; $display("out_valid latency wrong at %0d", n); end
        checks++;
        if (oi !== 18'(ei[n-2]) || oq !== 18'(eq[n-2])) begin
          failures++;
          $display("n=%0d got (%0d,%0d) exp (%0d,%0d)", n, oi, oq, ei[n-2], eq[n-2]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
