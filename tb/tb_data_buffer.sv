// tb_data_buffer -- checks the dual-clock FIFO with unrelated write and read
// clocks (10 ns and 13 ns, then 13 ns and 7 ns): every word written while
// not full must be read back once, in order, with rd_valid one read clock
// after rd_en; a burst of writes with no reads must fill the buffer after
// exactly DEPTH words, raise full and the sticky overflow flag, and drop the
// extra words; empty must rise once everything has been read.
module tb_data_buffer;
  localparam int W = 36, DEPTH = 16;
  logic wclk = 0, rclk = 0, wrst = 1, rrst = 1;
  logic we, re, full, ovf, rv, empty;
  logic [W-1:0] wd, rd;
  int checks = 0, failures = 0;
  logic [W-1:0] q [$];
  int wper = 5, rper = 6;
  bit reading = 1;

  data_buffer #(.W(W), .DEPTH(DEPTH)) dut (
    .wr_clk(wclk), .wr_rst(wrst), .wr_en(we), .wr_data(wd), .full, .overflow(ovf),
    .rd_clk(rclk), .rd_rst(rrst), .rd_en(re), .rd_data(rd), .rd_valid(rv), .empty);

  always #(wper) wclk = ~wclk;
  always #(rper) rclk = ~rclk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reader: pops whenever not empty (and reading allowed); checks order
  logic re_d;
  always @(negedge rclk) begin
    re = reading && !empty && !rrst;
  end
  always @(posedge rclk) begin
    re_d <= re && !empty;
    if (rv) begin
      checks++;
      if (q.size() == 0) begin failures++; $display("read with nothing written"); end
      else begin
        logic [W-1:0] e;
        e = q.pop_front();
        if (rd !== e) begin failures++; $display("data %h exp %h", rd, e); end
      end
    end
  end
  always @(negedge rclk) if (!rrst) begin
    checks++;
    if (rv !== re_d) begin failures++; $display("rd_valid timing"); end
  end

  task automatic write_words(input int n, input int gap_mod);
    for (int k = 0; k < n; k++) begin
      @(negedge wclk);
      we = ($urandom_range(0, gap_mod) == 0) || gap_mod == 0;
      wd = {4'($urandom), 32'($urandom)};
      #0;
      if (we && !full) q.push_back(wd);
    end
    @(negedge wclk); we = 0;
  endtask

  initial begin
    we = 0; wd = 0; re = 0;
    repeat (4) @(negedge wclk);
    wrst = 0;
    repeat (4) @(negedge rclk);
    rrst = 0;
    // reader slower than writer, writes with gaps
    write_words(500, 2);
    repeat (100) @(negedge rclk);
    checks++;
    if (q.size() != 0 || !empty) begin failures++; $display("not drained: %0d left", q.size()); end
    // overflow: stop reading, write DEPTH + 5 words back to back
    reading = 0;
    repeat (5) @(negedge rclk);
    for (int k = 0; k < DEPTH + 5; k++) begin
      @(negedge wclk);
      checks++;
      if (full !== (k >= DEPTH)) begin failures++; $display("full wrong after %0d writes", k); end
      we = 1; wd = W'(k);
      #0;
      if (!full) q.push_back(wd);
    end
    @(negedge wclk); we = 0;
    @(negedge wclk);
    checks++;
    if (!ovf) begin failures++; $display("overflow flag not set"); end
    checks++;
    if (q.size() != DEPTH) begin failures++; $display("kept %0d words", q.size()); end
    reading = 1;
    repeat (40) @(negedge rclk);
    checks++;
    if (q.size() != 0) begin failures++; $display("overflow data not drained"); end
    // fast reader, slow writer
    wper = 13; rper = 7;
    write_words(300, 0);
    repeat (60) @(negedge rclk);
    checks++;
    if (q.size() != 0 || !empty) begin failures++; $display("second run not drained"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
