// tb_data_recovery -- checks ADC word capture: the offset-binary code must
// come out as the two's-complement sample two clocks later, and out_valid
// must rise exactly two clocks after reset is released.
module tb_data_recovery;
  logic clk = 0, rst = 1;
  logic [15:0] adc;
  logic signed [15:0] smp;
  logic vld;
  int checks = 0, failures = 0;
  logic [15:0] hist [$];

  data_recovery dut (.clk, .rst, .adc_data(adc), .sample(smp), .out_valid(vld));

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc;
    adc = 16'h8000;
    repeat (3) @(negedge clk);
    rst = 0;
    cyc = 0;
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      // valid timing: low for the first clock after reset, high from the second
      checks++;
      if (vld !== (n >= 1)) begin
        failures++;
        $display("valid wrong at n=%0d: %b", n, vld);
      end
      if (hist.size() >= 2) begin
        logic signed [15:0] exp_s;
        exp_s = $signed(hist[hist.size()-2] - 16'h8000);
        checks++;
        if (smp !== exp_s) begin
          failures++;
          $display("sample mismatch n=%0d code=%h got %0d exp %0d", n, hist[hist.size()-2], smp, exp_s);
        end
      end
      adc = (n % 50 == 0) ? 16'hFFFF : (n % 50 == 1) ? 16'h0000 : 16'($urandom);
      hist.push_back(adc);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
