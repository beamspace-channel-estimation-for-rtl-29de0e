// beaches_pkg: fixed-point formats and types shared by the SURE-based
// denoiser (SBD) of the BEACHES beamspace channel estimator.
//
// Formats that follow the paper: beamspace entries are 10-bit two's
// complement numbers with 8 fraction bits (magnitude and phase alike), the
// noise-variance input is 16 bits with 15 fraction bits, and the reciprocal
// table has 512 entries of 12 bits with 2 fraction bits. A magnitude is never
// negative, so its sign bit is always zero and the 9 remaining bits are what
// the sort and scan units work on; 2^9 = 512 is exactly the table depth.
// The phase is carried untouched; it is taken here as scaled radians
// (units of pi), which is this design's choice.
package beaches_pkg;

  // Number of BS antennas (vector length) used as the default everywhere.
  localparam int unsigned B_DEFAULT  = 256;

  // Beamspace entry formats (10 bits, 8 fraction bits).
  localparam int unsigned MAG_W      = 10;
  localparam int unsigned MAG_FRAC   = 8;
  localparam int unsigned PH_W       = 10;
  // Magnitude bits without the (always zero) sign bit.
  localparam int unsigned XW         = MAG_W - 1;

  // Noise variance E0 in the scaled beamspace domain (E0/B of the antenna
  // domain, since the forward FFT scales by 1/B): 16 bits, 15 fraction bits.
  localparam int unsigned E0_W       = 16;
  localparam int unsigned E0_FRAC    = 15;

  // Reciprocal table: 512 entries, 12 bits with 2 fraction bits.
  localparam int unsigned RECIP_W    = 12;
  localparam int unsigned RECIP_FRAC = 2;
  localparam int unsigned LUT_DEPTH  = 1 << XW;

  // Fraction bits of the SURE terms before alignment.
  localparam int unsigned SQ_FRAC    = 2 * MAG_FRAC;                    // tau^2, S
  localparam int unsigned D_FRAC     = E0_FRAC + MAG_FRAC + RECIP_FRAC; // E0*tau*V
  localparam int unsigned A_SHIFT    = D_FRAC - SQ_FRAC;                // align S-terms
  localparam int unsigned K_SHIFT    = D_FRAC - E0_FRAC + 1;            // align 2*E0*(k-1)

  // One polar beamspace sample of the stream.
  typedef struct packed {
    logic [MAG_W-1:0] mag;
    logic [PH_W-1:0]  phase;
  } polar_t;

  // Content of one sort processing element. 'gen' tells which vector the
  // value belongs to; an entry whose gen differs from the vector currently
  // being loaded is stale and is being flushed toward the scan unit.
  typedef struct packed {
    logic          valid;
    logic          gen;
    logic [XW-1:0] val;
  } sort_entry_t;

endpackage
