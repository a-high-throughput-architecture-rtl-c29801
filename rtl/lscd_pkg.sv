// lscd_pkg -- constants, types and small pure functions shared by the list
// successive-cancellation (LSCD) polar decoder.
//
// LLRs are kept in sign-magnitude form (sign bit + QLLR-1 magnitude bits),
// path metrics are unsigned and saturate at their maximum value.  The word
// sizes QLLR = 6 and QPM = 8 follow the quantisation used for the reported
// implementation; saturation and the sign-magnitude field layout are this
// design's choice.  Every bit of a code is classified as frozen, unreliable
// information (expanded into two paths) or reliable information (decided by
// its hard decision only); the two-bit encoding of that class is our own.
package lscd_pkg;

  localparam int QLLR = 6;                 // LLR width, sign + 5 magnitude bits
  localparam int QMAG = QLLR - 1;          // magnitude width
  localparam int QPM  = 8;                 // path-metric width

  typedef logic [QMAG-1:0] mag_t;
  typedef struct packed {
    logic sgn;                             // 1: negative (hard decision 1)
    mag_t mag;
  } llr_t;

  typedef logic [QPM-1:0] pm_t;

  // class of one bit of the code (content of the code-set ROM)
  typedef enum logic [1:0] {
    BIT_FRZ = 2'd0,                        // frozen bit, always 0
    BIT_URL = 2'd1,                        // unreliable information bit (expanded)
    BIT_RRL = 2'd2                         // reliable information bit (hard decision)
  } bit_class_e;

  // class of a single-unreliable-bit tuple (SUBT) handled by the LM module
  typedef enum logic [1:0] {
    TUP_SP2_FRZ = 2'd0,                    // only frozen bits: PMU only (1 cycle)
    TUP_SP2_RRL = 2'd1,                    // only reliable bits: PMU only (1 cycle)
    TUP_SP1     = 2'd2,                    // unreliable first bit, rest reliable (2 cycles)
    TUP_R1T     = 2'd3                     // one unreliable bit, rest frozen (3 cycles)
  } tuple_e;

  localparam mag_t MAG_MAX = '1;
  localparam pm_t  PM_MAX  = '1;

  function automatic mag_t mag_sat_add(mag_t a, mag_t b);
    logic [QMAG:0] s;
    s = {1'b0, a} + {1'b0, b};
    return s[QMAG] ? MAG_MAX : s[QMAG-1:0];
  endfunction

  function automatic pm_t pm_sat_add(pm_t a, pm_t b);
    logic [QPM:0] s;
    s = {1'b0, a} + {1'b0, b};
    return s[QPM] ? PM_MAX : s[QPM-1:0];
  endfunction

  // Polar transform x = u * F^{(x)t} of the low 2^t bits of a W-bit vector,
  // bit i of the vector holding u_i.  Bits at or above 2^t are returned 0.
  function automatic logic [63:0] polar_enc(logic [63:0] u, int t);
    logic [63:0] x;
    x = u;
    for (int s = 0; s < 6; s++) begin
      if (s < t) begin
        for (int i = 0; i < 64; i++) begin
          // for each pair (i, i + 2^s) inside a block of 2^(s+1): x_i ^= x_{i+2^s}
          if (((i >> s) & 1) == 0) x[i] = x[i] ^ x[i + (1 << s) < 64 ? i + (1 << s) : i];
        end
      end
    end
    for (int i = 0; i < 64; i++) if (i >= (1 << t)) x[i] = 1'b0;
    return x;
  endfunction

  function automatic int clog2i(int v);
    int r;
    r = 0;
    while ((1 << r) < v) r++;
    return r;
  endfunction

endpackage
