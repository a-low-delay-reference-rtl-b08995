// tb_cordic_amp_phase -- checks amplitude and phase of random vectors in
// all four quadrants (and on the axes) against sqrt and atan2 in real
// arithmetic: amplitude within 3 LSB, phase within 8 LSB of 2*pi/2^18
// (0.011 degree). Checks the ITER+2 = 18 clock latency and that a vector
// offered while busy is ignored.
module tb_cordic_amp_phase;
  localparam real PI = 3.14159265358979323846;
  logic clk = 0, rst = 1;
  logic signed [17:0] ii, qi;
  logic iv, ov, busy;
  logic [17:0] amp;
  logic signed [17:0] ph;
  int checks = 0, failures = 0;

  cordic_amp_phase dut (.clk, .rst, .i_in(ii), .q_in(qi), .in_valid(iv),
                        .amp, .phase(ph), .out_valid(ov), .busy);

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real ea, ep, dp;
    int lat, nout;
    real li, lq;
    ii = 0; qi = 0; iv = 0;
    repeat (3) @(negedge clk);
    rst = 0;
    for (int t = 0; t < 300; t++) begin
      case (t)
        0: begin ii = 18'sd5000;  qi = 18'sd0;    end
        1: begin ii = -18'sd5000; qi = 18'sd0;    end
        2: begin ii = 18'sd0;     qi = 18'sd7000; end
        3: begin ii = 18'sd0;     qi = -18'sd7000; end
        4: begin ii = -18'sd131072; qi = -18'sd131072; end
        default: begin
          ii = 18'($urandom_range(0, 262143));
          qi = 18'($urandom_range(0, 262143));
          if (t % 3 == 0) begin ii = ii >>> 6; qi = qi >>> 6; end
        end
      endcase
      iv = 1;
      li = real'(ii); lq = real'(qi);
      @(negedge clk);
      iv = 0;
      // a second vector while busy must be ignored
      ii = 18'sd99; qi = 18'sd99; iv = (t % 2 == 0);
      @(negedge clk);
      iv = 0;
      ii = 0; qi = 0;
      lat = 2;
      while (!ov && lat < 100) begin @(negedge clk); lat++; end
      checks++;
      if (lat != 18) begin failures++; $display("latency %0d", lat); end
      case (t)
        0: begin ea = 5000.0; ep = 0.0; end
        1: begin ea = 5000.0; ep = PI; end
        2: begin ea = 7000.0; ep = PI / 2; end
        3: begin ea = 7000.0; ep = -PI / 2; end
        4: begin ea = 131072.0 * $sqrt(2.0); ep = -3.0 * PI / 4; end
        default: begin ea = $sqrt(li * li + lq * lq); ep = $atan2(lq, li); end
      endcase
      checks++;
      begin
        dp = ph * PI / 131072.0 - ep;
        while (dp > PI) dp -= 2 * PI;
        while (dp < -PI) dp += 2 * PI;
        if (amp - ea > 3.0 || ea - amp > 3.0 || dp * 131072.0 / PI > 8.0 || dp * 131072.0 / PI < -8.0) begin
          failures++;
          $display("t=%0d amp %0d exp %f phase %0d exp %f", t, amp, ea, ph, ep * 131072.0 / PI);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
