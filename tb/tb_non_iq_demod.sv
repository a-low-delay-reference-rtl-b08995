// tb_non_iq_demod -- checks the non-IQ demodulator against a direct window
// sum computed in real arithmetic, and checks that a clean IF tone of
// amplitude A and phase phi gives I + jQ = A*exp(j*phi). Also checks the
// one-clock latency and that out_valid rises after the first N samples.
module tb_non_iq_demod;
  localparam int N = 7, M = 2;
  localparam real PI = 3.14159265358979323846;
  logic clk = 0, rst = 1;
  logic signed [15:0] x;
  logic in_valid;
  logic signed [17:0] io, qo;
  logic ov;
  int checks = 0, failures = 0;
  int xs [$];

  non_iq_demod #(.N(N), .M(M)) dut (.clk, .rst, .x, .in_valid, .i_out(io), .q_out(qo), .out_valid(ov));

  always #5 clk = ~clk;

  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real fabs(input real v);
    return v < 0.0 ? -v : v;
  endfunction

  task automatic check_window(input int n, input real tolerance);
    real ei, eq;
    ei = 0.0; eq = 0.0;
    for (int k = 0; k < N; k++) begin
      ei += (2.0 / N) * xs[n-k] * $cos(2.0 * PI * M * (n-k) / N);
      eq -= (2.0 / N) * xs[n-k] * $sin(2.0 * PI * M * (n-k) / N);
    end
    checks++;
    if (fabs(io - ei) > tolerance || fabs(qo - eq) > tolerance) begin
      failures++;
      $display("n=%0d got (%0d,%0d) exp (%f,%f)", n, io, qo, ei, eq);
    end
  endtask

  initial begin
    real amp, phi;
    int n;
    x = 0; in_valid = 0;
    repeat (3) @(negedge clk);
    rst = 0;
    n = 0;
    // phase 1: random samples, every sample valid
    for (int s = 0; s < 300; s++) begin
      x = 16'($urandom);
      in_valid = 1;
      xs.push_back(int'(x));
      @(negedge clk);
      checks++;
      if (ov !== (n >= N-1)) begin
        failures++;
        $display("out_valid wrong at n=%0d", n);
      end
      if (n >= N-1) check_window(n, 2.5);
      n++;
    end
    // phase 2: tones of known amplitude and phase, with gaps in in_valid
    for (int t = 0; t < 6; t++) begin
      amp = 1000.0 + 4000.0 * t;
      phi = -PI + 1.1 * t;
      for (int s = 0; s < 40; s++) begin
        x = 16'($rtoi($floor(amp * $cos(2.0 * PI * M * n / N + phi) + 0.5)));
        in_valid = 1;
        xs.push_back(int'(x));
        @(negedge clk);
        check_window(n, 2.5);
        if (s >= N) begin
          checks++;
          if (fabs(io - amp * $cos(phi)) > 3.0 || fabs(qo - amp * $sin(phi)) > 3.0) begin
            failures++;
            $display("tone A=%f phi=%f got (%0d,%0d)", amp, phi, io, qo);
          end
        end
        n++;
        if (s % 9 == 4) begin
          in_valid = 0;
          x = 16'($urandom);
          @(negedge clk);
          checks++;
          if (ov !== 1'b0) begin failures++; $display("valid without input"); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
