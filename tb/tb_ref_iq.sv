// tb_ref_iq -- checks the reference vector block: zero output and ready low
// before the first average amplitude; after an amplitude A arrives, recip
// must equal floor(2^33/A) (saturated to 26 bits) and every output must be
// round((I_r - jQ_r) * recip / 2^17), one clock after the reference sample,
// which is close to 2^16 * conj(ref)/A; with the switch off the output must
// be exactly 1.0 + j0 (2^16, 0).
module tb_ref_iq;
  localparam real PI = 3.14159265358979323846;
  logic clk = 0, rst = 1;
  logic track_en;
  logic signed [17:0] ri, rq, ui, uq;
  logic rv, av, uv, ready;
  logic [17:0] amp;
  logic [25:0] recip;
  int checks = 0, failures = 0;

  ref_iq dut (.clk, .rst, .track_en, .ref_i(ri), .ref_q(rq), .ref_valid(rv),
              .amp, .amp_valid(av), .u_i(ui), .u_q(uq), .u_valid(uv), .ready, .recip);

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint rnd17(input longint v);
    longint r;
    r = (v + (longint'(1) << 16)) >>> 17;
    if (r > 131071) r = 131071;
    if (r < -131072) r = -131072;
    return r;
  endfunction

  task automatic drive_refs(input int n, input longint rc, input bit en, input real a,
                            input bit unit = 1'b1);
    for (int k = 0; k < n; k++) begin
      real ph;
      ph = 2.0 * PI * $urandom_range(0, 9999) / 10000.0;
      ri = 18'($rtoi(a * $cos(ph)));
      rq = 18'($rtoi(a * $sin(ph)));
      rv = (k % 5 != 2);
      @(negedge clk);
      checks++;
      if (uv !== rv) begin failures++; $display("u_valid timing"); end
      if (rv) begin
        longint ei, eq;
        if (!en) begin ei = 65536; eq = 0; end
        else if (rc < 0) begin ei = 0; eq = 0; end
        else begin
          ei = rnd17(longint'(ri) * rc);
          eq = rnd17(-(longint'(rq) * rc));
        end
        checks++;
        if (ui !== 18'(ei) || uq !== 18'(eq)) begin
          failures++;
          $display("ref (%0d,%0d) got (%0d,%0d) exp (%0d,%0d)", ri, rq, ui, uq, ei, eq);
        end
        if (en && rc >= 0 && unit) begin
          // close to the ideal unit vector conj(ref)/A * 2^16
          real di, dq;
          di = ui - 65536.0 * ri / a;
          dq = uq + 65536.0 * rq / a;
          checks++;
          if (di * di + dq * dq > 100.0) begin failures++; $display("not a unit vector a=%f ref (%0d,%0d) u (%0d,%0d)", a, ri, rq, ui, uq); end
        end
      end
    end
    rv = 0;
  endtask

  task automatic load_amp(input int a);
    @(negedge clk);
    amp = 18'(a); av = 1;
    @(negedge clk);
    av = 0;
    repeat (40) @(negedge clk);
  endtask

  initial begin
    longint exp_r;
    track_en = 1; ri = 0; rq = 0; rv = 0; amp = 0; av = 0;
    repeat (3) @(negedge clk);
    rst = 0;
    checks++;
    if (ready) begin failures++; $display("ready before amplitude"); end
    drive_refs(20, -1, 1, 5105.0);
    for (int t = 0; t < 6; t++) begin
      int a;
      case (t)
        0: a = 5105;
        1: a = 130000;
        2: a = 300;
        3: a = 40;          // reciprocal saturates
        4: a = 0;           // saturates too
        default: a = 20000;
      endcase
      load_amp(a);
      exp_r = (a == 0) ? 64'h3FFFFFF : (longint'(1) << 33) / longint'(a);
      if (exp_r > 64'h3FFFFFF) exp_r = 64'h3FFFFFF;
      checks++;
      if (!ready || recip !== 26'(exp_r)) begin
        failures++;
        $display("A=%0d recip %0d exp %0d", a, recip, exp_r);
      end
      drive_refs(60, exp_r, 1, (a > 40) ? real'(a) : 5000.0, a > 40);
    end
    // switch off: exactly one
    track_en = 0;
    drive_refs(60, exp_r, 0, 20000.0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
