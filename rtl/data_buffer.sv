// data_buffer -- dual-clock FIFO that carries one channel's I/Q samples from
// the clock of its own ADC into the common processing clock.
//
// Each ADC has its own recovered clock, while the tracking multiplication
// needs the samples of every channel side by side in one clock. Each
// channel therefore writes its filtered samples into this buffer with its
// ADC clock and all channels are read together with the reference ADC's
// clock. The write and read pointers are kept in Gray code and passed to the
// other side through two-flop synchronisers, so the full and empty flags are
// safe across the crossing (full may be seen late by the reader side and
// empty late by the writer side, never early). A write into a full buffer
// is dropped and sets the sticky overflow flag.
//
// Interface: wr_en/wr_data in wr_clk; rd_en/rd_data in rd_clk. rd_data is
// registered: the word popped by rd_en appears on the next rd_clk edge
// together with rd_valid. DEPTH must be a power of two.
// The paper prints "Data buffer" with a write and a read clock; the Gray-code
// FIFO and its depth of 16 are this design's choice.
module data_buffer #(
  parameter int W     = 2 * rt_pkg::IQ_W,
  parameter int DEPTH = 16
) (
  input  logic         wr_clk,
  input  logic         wr_rst,
  input  logic         wr_en,
  input  logic [W-1:0] wr_data,
  output logic         full,
  output logic         overflow,
  input  logic         rd_clk,
  input  logic         rd_rst,
  input  logic         rd_en,
  output logic [W-1:0] rd_data,
  output logic         rd_valid,
  output logic         empty
);
  localparam int AW = $clog2(DEPTH);

  logic [W-1:0] mem [DEPTH];
  logic [AW:0]  wbin, wgray, rbin, rgray;
  logic [AW:0]  wgray_r1, wgray_r2;     // write pointer in rd_clk
  logic [AW:0]  rgray_w1, rgray_w2;     // read pointer in wr_clk
  logic [AW:0]  wbin_nx, rbin_nx;

  function automatic logic [AW:0] bin2gray(input logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  // ---- write side ----
  assign full    = (wgray == {~rgray_w2[AW:AW-1], rgray_w2[AW-2:0]});
  assign wbin_nx = wbin + (AW+1)'(wr_en && !full);

  always_ff @(posedge wr_clk)
    if (wr_en && !full) mem[wbin[AW-1:0]] <= wr_data;

  always_ff @(posedge wr_clk) begin
    if (wr_rst) begin
      wbin     <= '0;
      wgray    <= '0;
      rgray_w1 <= '0;
      rgray_w2 <= '0;
      overflow <= 1'b0;
    end else begin
      wbin     <= wbin_nx;
      wgray    <= bin2gray(wbin_nx);
      rgray_w1 <= rgray;
      rgray_w2 <= rgray_w1;
      if (wr_en && full) overflow <= 1'b1;
    end
  end

  // ---- read side ----
  assign empty   = (rgray == wgray_r2);
  assign rbin_nx = rbin + (AW+1)'(rd_en && !empty);

  always_ff @(posedge rd_clk) begin
    if (rd_rst) begin
      rbin     <= '0;
      rgray    <= '0;
      wgray_r1 <= '0;
      wgray_r2 <= '0;
      rd_valid <= 1'b0;
      rd_data  <= '0;
    end else begin
      rbin     <= rbin_nx;
      rgray    <= bin2gray(rbin_nx);
      wgray_r1 <= wgray;
      wgray_r2 <= wgray_r1;
      rd_valid <= rd_en && !empty;
      if (rd_en && !empty) rd_data <= mem[rbin[AW-1:0]];
    end
  end

  // a read of an empty buffer is a protocol error of the reader
  a_no_underflow: assert property (@(posedge rd_clk) disable iff (rd_rst) !(rd_en && empty))
    else $error("data_buffer: read while empty");
endmodule
