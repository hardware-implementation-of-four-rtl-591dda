// rc4_pkg: types and constants shared by the RC4 keystream hardware.
//
// RC4 keeps a 256-entry permutation of bytes (the S-box) and a 256-entry
// key array K[i] = key[i mod l]. Both sizes follow from the byte width of the
// algorithm (N = 256). The secret key of one co-processor is at most KEY_MAX
// bytes long; 16 is the upper end of the usual key lengths of RC4 (5..16).
package rc4_pkg;

  localparam int unsigned N       = 256;  // S-box and K-array entries
  localparam int unsigned KEY_MAX = 16;   // longest key of one core, bytes

  typedef logic [7:0] byte_t;             // one S-box entry, index or key byte
  typedef logic [4:0] keylen_t;           // key length 1..KEY_MAX

  // Phase of a dynamic KSA-PRGA core.
  typedef enum logic [1:0] {
    PH_IDLE      = 2'd0,  // waiting for start
    PH_KSA       = 2'd1,  // 128 clocks, two KSA iterations per clock
    PH_PRGA_INIT = 2'd2,  // one clock: i and j reset, no swap, prga_en set
    PH_PRGA      = 2'd3   // two keystream bytes per requested clock
  } phase_e;

endpackage
