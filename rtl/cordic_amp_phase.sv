// cordic_amp_phase -- amplitude and phase of the averaged reference vector
// ("A&phi solution" / "REF power state").
//
// A vectoring CORDIC rotates (I, Q) onto the positive I axis in ITER
// micro-rotations by +-atan(2^-k), summing the rotation angles; the final
// I is the magnitude times the CORDIC gain 1.6468, which is removed by one
// multiplication with round(0.60725 * 2^16). The
// vector is carried with G = 8 extra fraction bits so that the truncating
// shifts do not limit the accuracy of small vectors. A vector in the left half
// plane is first turned by pi (both components negated) so that the
// iteration converges for all four quadrants.
//
// Interface: in_valid loads one vector when the block is idle (a vector
// offered while busy is ignored; the averaged reference arrives only every
// R clocks, far slower than the iteration). amp is unsigned in input units,
// phase is signed with +-2^(PH_W-1) == +-pi. out_valid pulses for one clock
// ITER+2 clocks after in_valid.
// The paper quotes about 16 clock cycles for a CORDIC demodulation and says
// the averaged reference amplitude divides out the reference gain; this
// sequential CORDIC with ITER = 16 iterations is this design's realisation.
// It is off the low-delay path: its latency only delays the amplitude update.
module cordic_amp_phase #(
  parameter int IN_W  = rt_pkg::IQ_W,
  parameter int AMP_W = rt_pkg::AMP_W,
  parameter int PH_W  = rt_pkg::PH_W,
  parameter int ITER  = 16
) (
  input  logic                   clk,
  input  logic                   rst,
  input  logic signed [IN_W-1:0] i_in,
  input  logic signed [IN_W-1:0] q_in,
  input  logic                   in_valid,
  output logic [AMP_W-1:0]       amp,
  output logic signed [PH_W-1:0] phase,
  output logic                   out_valid,
  output logic                   busy
);
  localparam int G  = 8;                         // fraction guard bits
  localparam int XW = IN_W + 3 + G;              // room for gain 1.65, sign, guard
  localparam int KQ = 39797;                     // round(0.6072529350 * 2^16)
  typedef logic signed [PH_W-1:0] atan_arr_t [ITER];

  function automatic atan_arr_t gen_atan();
    atan_arr_t a;
    real pi;
    pi = 3.14159265358979323846;
    for (int k = 0; k < ITER; k++)
      a[k] = PH_W'($rtoi($floor($atan(2.0 ** (-k)) / pi * (2.0 ** (PH_W - 1)) + 0.5)));
    return a;
  endfunction
  localparam atan_arr_t ATAN = gen_atan();

  logic signed [XW-1:0]    x, y;
  logic signed [PH_W-1:0]  z;
  logic [$clog2(ITER+1)-1:0] k;
  logic                    run, fin;
  logic [XW+17:0]          prod;

  assign busy = run | fin;
  assign prod = (XW+18)'(unsigned'(x)) * (XW+18)'(KQ) + ((XW+18)'(1) << (15 + G));

  always_ff @(posedge clk) begin
    if (rst) begin
      x <= '0; y <= '0; z <= '0; k <= '0;
      run <= 1'b0; fin <= 1'b0;
      amp <= '0; phase <= '0; out_valid <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      if (!run && !fin) begin
        if (in_valid) begin
          if (i_in < 0) begin
            x <= -(XW'(i_in) <<< G);
            y <= -(XW'(q_in) <<< G);
            z <= PH_W'(1) <<< (PH_W - 1);        // pi
          end else begin
            x <= XW'(i_in) <<< G;
            y <= XW'(q_in) <<< G;
            z <= '0;
          end
          k   <= '0;
          run <= 1'b1;
        end
      end else if (run) begin
        if (y < 0) begin
          x <= x - (y >>> k);
          y <= y + (x >>> k);
          z <= z - ATAN[k[$clog2(ITER)-1:0]];
        end else begin
          x <= x + (y >>> k);
          y <= y - (x >>> k);
          z <= z + ATAN[k[$clog2(ITER)-1:0]];
        end
        if (k == ($clog2(ITER+1))'(ITER - 1)) begin
          run <= 1'b0;
          fin <= 1'b1;
        end
        k <= k + 1'b1;
      end else begin
        fin       <= 1'b0;
        amp       <= AMP_W'(prod >> (16 + G));
        phase     <= z;
        out_valid <= 1'b1;
      end
    end
  end
endmodule
