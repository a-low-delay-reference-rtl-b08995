// tb_cic_decimator -- checks the decimating CIC (R = 64, 3 stages) against
// its impulse response: the response h is built in the testbench as the
// three-fold convolution of a 64-sample boxcar, and every output must equal
// floor(sum(h[k] * x[m*R + R-1 - k]) / R^3 + 1/2). One output must appear
// for every R inputs, one clock after the R-th input.
module tb_cic_decimator;
  localparam int R = 64, NST = 3, HL = NST * (R - 1) + 1;
  logic clk = 0, rst = 1;
  logic signed [17:0] ii, qi, io, qo;
  logic iv, ov;
  int checks = 0, failures = 0;
  int hi [$], hq [$];
  longint h [HL];
  int nout;

  cic_decimator #(.NST(NST), .R(R)) dut (.clk, .rst, .i_in(ii), .q_in(qi), .in_valid(iv),
                                         .i_out(io), .q_out(qo), .out_valid(ov));

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint expect_out(ref int x [$]);
    longint s;
    int last;
    s = 0;
    last = x.size() - 1;
    for (int k = 0; k < HL; k++)
      if (last - k >= 0) s += h[k] * x[last - k];
    return (s + (longint'(1) << (NST * 6 - 1))) >>> (NST * 6);
  endfunction

  initial begin
    longint b [HL];
    int nin;
    // impulse response: boxcar convolved with itself NST times
    for (int k = 0; k < HL; k++) h[k] = (k < R) ? 1 : 0;
    for (int s = 1; s < NST; s++) begin
      for (int k = 0; k < HL; k++) begin
        b[k] = 0;
        for (int j = 0; j < R; j++) if (k - j >= 0) b[k] += h[k-j];
      end
      h = b;
    end
    ii = 0; qi = 0; iv = 0; nout = 0; nin = 0;
    repeat (3) @(negedge clk);
    rst = 0;
    for (int n = 0; n < 40 * R; n++) begin
      iv = (n % 11 != 5);
      if (n < 20 * R) begin
        ii = 18'($urandom); qi = 18'($urandom);
      end else begin     // a slow full-scale tone
        ii = 18'($rtoi(131000.0 * $cos(n * 0.01)));
        qi = 18'($rtoi(131000.0 * $sin(n * 0.01)));
      end
      if (iv) begin hi.push_back(int'(ii)); hq.push_back(int'(qi)); nin++; end
      @(negedge clk);
      checks++;
      if (ov !== (iv && nin % R == 0)) begin
        failures++;
        $display("out_valid wrong at input %0d", nin);
      end
      if (ov) begin
        nout++;
        checks++;
        if (io !== 18'(expect_out(hi)) || qo !== 18'(expect_out(hq))) begin
          failures++;
          $display("out %0d got (%0d,%0d) exp (%0d,%0d)", nout, io, qo, expect_out(hi), expect_out(hq));
        end
      end
    end
    checks++;
    if (nout < 30) begin failures++; $display("too few outputs %0d", nout); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
