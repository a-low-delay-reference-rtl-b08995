// rt_pkg -- shared constants and types of the reference-tracking firmware.
//
// The eight receiver channels, the four dual-channel ADCs and the 105 MHz
// sample clock follow the paper; the sample and I/Q word widths are choices
// of this design (the paper prints no widths). An I/Q sample is carried as
// a packed struct so that a whole vector moves through buffers and
// pipeline registers as one word.
package rt_pkg;

  localparam int NCH      = 8;    // radio-frequency detection ports (paper)
  localparam int NADC     = 4;    // dual-channel ADCs (paper)
  localparam int REF_CH   = 6;    // AC6 carries the reference (paper, Fig. 2)
  localparam int VM_CH    = 7;    // AC7 carries the vector-modulator output
  localparam int CLK_MHZ  = 105;  // global sample clock (paper)

  localparam int ADC_W    = 16;   // ADC sample width (assumed)
  localparam int IQ_W     = 18;   // I and Q word width (assumed)
  localparam int UNIT_FRAC = 16;  // fraction bits of the scaled reference vector
  localparam int AMP_W    = 18;   // unsigned amplitude width
  localparam int PH_W     = 18;   // phase width, +-2^(PH_W-1) == +-pi

  typedef logic signed [IQ_W-1:0] iq_word_t;

  typedef struct packed {
    iq_word_t i;
    iq_word_t q;
  } iq_t;

  // saturate a wide signed value into an IQ word
  function automatic iq_word_t sat_iq(input logic signed [63:0] v);
    localparam logic signed [63:0] MAXV = 64'sd2 ** (IQ_W - 1) - 1;
    localparam logic signed [63:0] MINV = -(64'sd2 ** (IQ_W - 1));
    if (v > MAXV)      return iq_word_t'(MAXV);
    else if (v < MINV) return iq_word_t'(MINV);
    else               return iq_word_t'(v);
  endfunction

endpackage
