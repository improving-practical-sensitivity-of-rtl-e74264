// Shared constants and types of the wake-up receiver digital base-band (DBB).
//
// The defaults describe the prototype configuration: a 31-bit m-sequence
// preamble (M = 31), 7-chip address spreading (K = 7) and 8-bit node
// addresses (L = 8), all Manchester coded, received at kappa = 4 times
// oversampling. Manchester coding doubles every length, oversampling
// multiplies the preamble by four, and the filter lengths are rounded up to
// the next power of two: 2*31*4 = 248 -> 256 PMF taps, 2*7 = 14 -> 16 AMF taps.
// The chips per address bit (14) and the preamble sample count (248) are the
// unrounded numbers; they set how often the AMF decides and how the test
// sequences are built.
package wur_pkg;

  // Oversampling factor of the front-end bit decisions.
  localparam int unsigned KAPPA        = 4;
  // Preamble: m-sequence length before Manchester coding.
  localparam int unsigned PRE_BITS     = 31;
  // Preamble samples at the oversampled rate (Manchester x2, oversampling x4).
  localparam int unsigned PRE_SAMPLES  = 2 * PRE_BITS * KAPPA;   // 248
  // PMF taps: PRE_SAMPLES rounded up to a power of two.
  localparam int unsigned PMF_TAPS     = 256;
  // Address spreading before Manchester coding, and chips per address bit.
  localparam int unsigned SPREAD_K     = 7;
  localparam int unsigned ADDR_CHIPS   = 2 * SPREAD_K;            // 14
  // AMF taps: ADDR_CHIPS rounded up to a power of two.
  localparam int unsigned AMF_TAPS     = 16;
  // Address bits (network of 2**L nodes).
  localparam int unsigned ADDR_BITS    = 8;

  // Controller states.
  typedef enum logic [1:0] {
    ST_IDLE   = 2'd0,  // not listening (sleep)
    ST_SEARCH = 2'd1,  // PMF armed, looking for a preamble
    ST_ADDR   = 2'd2   // synchronised: decimating, de-spreading, decoding
  } ctrl_state_e;

endpackage
