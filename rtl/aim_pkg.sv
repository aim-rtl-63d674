// aim_pkg: constants and size functions shared by the AIM multiplier.
//
// The operands are cut into 31-bit segments (digits). Each segment travels
// as a 32-bit word whose top bit is zero, so that signed 32-bit vector
// multipliers can be used. An AIE tile multiplies segments into 62-bit
// products and sums them in 80-bit accumulator lanes, 8 lanes wide. The PL
// side talks to the tiles over 128-bit streams (4 segments per beat) and to
// off-chip memory in 512-bit words. These widths are the ones the AIM
// architecture is built around; the helper functions derive the array shape
// from the operand width N and the tile size T (segments per tile edge):
//   NSEG = ceil(N/31), R = ceil(NSEG/T) tile rows, K = ceil((T+NSEG-1)/T)
//   column groups per row, G = R+K-1 output column groups.
package aim_pkg;

  localparam int unsigned SEG_W   = 31;   // segment (digit) width
  localparam int unsigned WORD_W  = 32;   // segment as sent, zero sign bit
  localparam int unsigned ACC_W   = 80;   // accumulator lane width
  localparam int unsigned LANES   = 8;    // accumulator lanes per tile
  localparam int unsigned PLIO_W  = 128;  // PL <-> AIE stream width
  localparam int unsigned SEGS_PER_BEAT = PLIO_W / WORD_W;  // 4
  localparam int unsigned DDR_W   = 512;  // off-chip word width

  // First carry step works on 4 digits (124 bits) per cycle.
  localparam int unsigned CP1_DIGITS = 4;
  localparam int unsigned CP1_SUM_W  = ACC_W + (CP1_DIGITS - 1) * SEG_W + 1;  // 174
  localparam int unsigned CP1_CARRY_W = CP1_SUM_W - CP1_DIGITS * SEG_W;       // 50
  // Second carry step works on 8 digits (248 bits) per cycle.
  localparam int unsigned CP2_DIGITS = 8;
  localparam int unsigned CP2_W      = CP2_DIGITS * SEG_W;                    // 248
  localparam int unsigned CP2_CARRY_W = CP1_CARRY_W + 1;                      // 51

  typedef logic [WORD_W-1:0]           word_t;
  typedef logic [PLIO_W-1:0]           plio_t;
  typedef logic [ACC_W-1:0]            acc_t;
  typedef logic [LANES-1:0][ACC_W-1:0] accv_t;   // one cascade / output vector

  function automatic int unsigned nseg(input int unsigned n);
    return (n + SEG_W - 1) / SEG_W;
  endfunction

  function automatic int unsigned rows(input int unsigned n, input int unsigned t);
    return (nseg(n) + t - 1) / t;
  endfunction

  function automatic int unsigned cols(input int unsigned n, input int unsigned t);
    return (t + nseg(n) - 1 + t - 1) / t;
  endfunction

  function automatic int unsigned groups(input int unsigned n, input int unsigned t);
    return rows(n, t) + cols(n, t) - 1;
  endfunction

endpackage
