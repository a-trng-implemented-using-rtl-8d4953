// trng_pkg: shared constants, types and helper functions of the SiRF PUF-TRNG.
//
// The TRNG keeps all of its soft data in one block RAM that is split into six
// equal regions of N words of 16 bits: DV_A, DV_B, DVD, DVD_c, DVD_cs and SF.
// Six regions of 2048 x 16 bit make the 24 KBytes of BRAM of the reference
// implementation; the sixth region (SF, 4096 bytes) is the one the TRNG adds to
// the stand-alone PUF. Every Phase 2 module talks to that RAM through two
// ports described by mem_req_t; read data returns one cycle after the request.
//
// Soft data (DVD_c, DVD_cs, SF) is signed fixed point with FRAC_BITS fraction
// bits (Q11.4 in a 16-bit word). The number of fraction bits is this design's
// choice; the reference only calls the values "fixed point".
package trng_pkg;

  // Fixed point format of the soft data.
  localparam int unsigned FRAC_BITS = 4;
  // Spread factors stay in +-64: 7 integer bits (with sign) plus the fraction.
  localparam int unsigned SF_BITS   = 7 + FRAC_BITS;

  // BRAM regions, in the order the base addresses are laid out.
  typedef enum logic [2:0] {
    REG_DVA   = 3'd0,
    REG_DVB   = 3'd1,
    REG_DVD   = 3'd2,
    REG_DVDC  = 3'd3,
    REG_DVDCS = 3'd4,
    REG_SF    = 3'd5
  } region_e;
  localparam int unsigned N_REGIONS = 6;

  // One RAM port request. Read data is valid the cycle after en && !we.
  typedef struct packed {
    logic        en;
    logic        we;
    logic [15:0] addr;
    logic [15:0] wdata;
  } mem_req_t;

  localparam mem_req_t MEM_IDLE = '{en: 1'b0, we: 1'b0, addr: '0, wdata: '0};

  // Phase of the whole TRNG, reported on the top's status output.
  typedef enum logic [2:0] {
    PH_IDLE    = 3'd0,
    PH_BOOT    = 3'd1,   // Phase 1 boot-strap: nonces only, DV discarded
    PH_DVGEN   = 3'd2,   // Phase 1 path timing with DV stored
    PH_DVDIFF  = 3'd3,   // Phase 2 modules, one after the other
    PH_GPEV    = 3'd4,
    PH_SF      = 3'd5,
    PH_BITGEN  = 3'd6
  } phase_e;

  // Base address of a region in a RAM of n-word regions.
  function automatic logic [15:0] region_base(region_e r, int unsigned n);
    return 16'(int'(r) * n);
  endfunction

  // Feedback taps (bit mask, bit i = x^(i+1)) of a primitive polynomial of
  // degree w, for the de Bruijn address generators of DVDiff. For w = 11 this
  // is x^11 + x^9 + 1.
  function automatic logic [15:0] prim_taps(int unsigned w);
    case (w)
      3:  return 16'h0006;  // x^3 + x^2 + 1
      4:  return 16'h000C;  // x^4 + x^3 + 1
      5:  return 16'h0014;  // x^5 + x^3 + 1
      6:  return 16'h0030;  // x^6 + x^5 + 1
      7:  return 16'h0060;  // x^7 + x^6 + 1
      8:  return 16'h00B8;  // x^8 + x^6 + x^5 + x^4 + 1
      9:  return 16'h0110;  // x^9 + x^5 + 1
      10: return 16'h0240;  // x^10 + x^7 + 1
      11: return 16'h0500;  // x^11 + x^9 + 1
      12: return 16'h0E08;  // x^12 + x^11 + x^10 + x^4 + 1
      default: return 16'h0500;
    endcase
  endfunction

  // One step of a w-bit de Bruijn counter: a Fibonacci LFSR on the
  // primitive polynomial above, extended so that it also visits the all-zero
  // state. It therefore walks through all 2^w values, and any value, 0
  // included, is a valid seed.
  function automatic logic [15:0] debruijn_next(logic [15:0] s, int unsigned w);
    logic [15:0] mask;
    logic        fb;
    logic        low_zero;
    mask     = prim_taps(w);
    fb       = ^(s & mask);
    // Bits below the top bit all zero: insert / leave the all-zero state.
    low_zero = ((s & ((16'(1) << (w - 1)) - 16'(1))) == 16'(0));
    fb       = fb ^ low_zero;
    return ((s << 1) | 16'(fb)) & ((16'(1) << w) - 16'(1));
  endfunction

  // One step of the 64-bit challenge LFSR, x^64 + x^63 + x^61 + x^60 + 1.
  function automatic logic [63:0] lfsr64_next(logic [63:0] s);
    return {s[62:0], s[63] ^ s[62] ^ s[60] ^ s[59]};
  endfunction

endpackage
