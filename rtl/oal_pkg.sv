// oal_pkg: types and constants shared by the channel-emulator RTL.
//
// The emulator applies a tapped-delay-line (TDL) channel to a stream of
// complex baseband samples: one coarse right shift for all paths, and an
// FIR filter whose taps set the delay (one tap = one sample period) and
// whose coefficients set the linear gain of each path.
//
// Numbers taken from the paper: 16-bit signed integers on the FPGA (so
// r = 15 fractional bits in a coefficient), 42 taps, at most 8 bits of
// shift, 200 MHz clock.  The register map and the reset state are this
// design's own choice.
package oal_pkg;

  // Width of one I or Q word (the FPGA's signed integer, DAC resolution).
  localparam int unsigned SAMPLE_W = 16;
  // Width of a tap coefficient b_i; r = COEF_W-1 fractional bits.
  localparam int unsigned COEF_W   = 16;
  localparam int unsigned COEF_FRAC = COEF_W - 1;  // r = 15
  // Default number of taps N and maximum coarse shift s.
  localparam int unsigned N_TAPS_DEFAULT    = 42;
  localparam int unsigned MAX_SHIFT_DEFAULT = 8;
  // Width of the shift-amount field (enough for 0..15).
  localparam int unsigned SHIFT_W = 4;

  // One complex sample.
  typedef struct packed {
    logic signed [SAMPLE_W-1:0] i;
    logic signed [SAMPLE_W-1:0] q;
  } iq_t;

  typedef logic signed [COEF_W-1:0] coef_t;

  // Control-register map (byte-free word addresses, 32-bit data).
  //   0x00 .. 0x7F : shadow coefficient b_i at address i (low 16 bits)
  //   0x80         : shadow coarse shift j (low SHIFT_W bits)
  //   0x81         : shadow control, bit 0 = FIR pass-through
  //   0x82         : commit: copy every shadow register into the active set
  localparam logic [7:0] REG_SHIFT  = 8'h80;
  localparam logic [7:0] REG_CTRL   = 8'h81;
  localparam logic [7:0] REG_COMMIT = 8'h82;

  // Largest positive coefficient: unit gain is approximated by 2^r - 1.
  localparam coef_t COEF_UNITY = coef_t'((1 << COEF_FRAC) - 1);

endpackage
