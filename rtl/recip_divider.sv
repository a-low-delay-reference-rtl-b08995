// recip_divider -- sequential reciprocal of the averaged reference amplitude.
//
// Computes recip = floor(2^NUM_SH / amp) by restoring long division, one
// quotient bit per clock (NUM_SH+1 clocks), and saturates the result to
// RW bits; amp == 0 also gives the saturated value. The reciprocal turns
// the division by the average amplitude into a multiplication on the
// sample-rate path, and it needs refreshing only once per averaged
// reference value, so a slow serial divider suffices.
//
// Interface: start loads amp when not busy (ignored while busy); done
// pulses with the new recip, which is held until the next division ends.
// This helper is this design's way of "dividing by the average"; the paper
// does not say how the division is done.
module recip_divider #(
  parameter int AMP_W  = rt_pkg::AMP_W,
  parameter int NUM_SH = 33,
  parameter int RW     = 26
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             start,
  input  logic [AMP_W-1:0] amp,
  output logic [RW-1:0]    recip,
  output logic             done,
  output logic             busy
);
  localparam int QW = NUM_SH + 1;

  logic [AMP_W-1:0]        div;
  logic [AMP_W-1:0]        rem;
  logic [AMP_W:0]          rem_sh, rem_nx;
  logic [QW-1:0]           quo, quo_nx;
  logic [$clog2(QW+1)-1:0] bitn;              // numerator bit being brought down

  // the numerator is a single one at bit NUM_SH
  assign rem_sh = {rem[AMP_W-1:0], (bitn == ($clog2(QW+1))'(NUM_SH))};

  always_comb begin
    if (rem_sh >= {1'b0, div} && div != '0) begin
      rem_nx = rem_sh - {1'b0, div};
      quo_nx = {quo[QW-2:0], 1'b1};
    end else begin
      rem_nx = rem_sh;
      quo_nx = {quo[QW-2:0], 1'b0};
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      div <= '0; rem <= '0; quo <= '0; bitn <= '0;
      busy <= 1'b0; done <= 1'b0; recip <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          div  <= amp;
          rem  <= '0;
          quo  <= '0;
          bitn <= ($clog2(QW+1))'(NUM_SH);
          busy <= 1'b1;
        end
      end else begin
        rem <= rem_nx[AMP_W-1:0];
        quo <= quo_nx;
        if (bitn == '0) begin
          busy <= 1'b0;
          done <= 1'b1;
          if (div == '0 || quo_nx[QW-1:RW] != '0) recip <= '1;
          else                                    recip <= quo_nx[RW-1:0];
        end else begin
          bitn <= bitn - 1'b1;
        end
      end
    end
  end
endmodule
