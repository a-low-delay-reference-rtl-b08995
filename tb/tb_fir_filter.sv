// tb_fir_filter -- checks the channel FIR filter at its default kernel [1 4 6 4 1]/16:
// every output must equal the convolution of the inputs with the kernel,
// rounded (floor of sum/2^SHIFT + 1/2) and saturated, one clock after the
// input; gaps in in_valid must hold the filter state; and a constant input
// must come out unchanged (unity DC gain).
module tb_fir_filter;
  localparam int NT = 5;
  localparam int SH = 4;
  localparam logic signed [9:0] C [NT] = '{10'sd1, 10'sd4, 10'sd6, 10'sd4, 10'sd1};
  logic clk = 0, rst = 1;
  logic signed [17:0] ii, qi, io, qo;
  logic iv, ov;
  int checks = 0, failures = 0;
  int hi [$], hq [$];

  fir_filter dut (.clk, .rst, .i_in(ii), .q_in(qi), .in_valid(iv), .i_out(io), .q_out(qo), .out_valid(ov));

  always #5 clk = ~clk;

  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int expect_out(ref int h [$]);
    longint s;
    s = 0;
    for (int k = 0; k < NT; k++)
      if (h.size() - 1 - k >= 0) s += longint'(C[k]) * h[h.size()-1-k];
    s = (s + (longint'(1) << (SH-1))) >>> SH;
    if (s > 131071) s = 131071;
    if (s < -131072) s = -131072;
    return int'(s);
  endfunction

  initial begin
    ii = 0; qi = 0; iv = 0;
    repeat (3) @(negedge clk);
    rst = 0;
    for (int n = 0; n < 600; n++) begin
      iv = (n % 7 != 3);
      if (n < 400) begin
        ii = 18'($urandom); qi = 18'($urandom);
      end else begin
        ii = 18'sd12345; qi = -18'sd54321;
      end
      if (iv) begin hi.push_back(int'(ii)); hq.push_back(int'(qi)); end
      @(negedge clk);
      checks++;
      if (ov !== iv) begin failures++; $display("valid wrong n=%0d", n); end
      if (iv) begin
        checks++;
        if (io !== 18'(expect_out(hi)) || qo !== 18'(expect_out(hq))) begin
          failures++;
          $display("n=%0d got (%0d,%0d) exp (%0d,%0d)", n, io, qo, expect_out(hi), expect_out(hq));
        end
        if (n > 420) begin
          checks++;
          if (io !== 18'sd12345 || qo !== -18'sd54321) begin failures++; $display("DC gain not one"); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
