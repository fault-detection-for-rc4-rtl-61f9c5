// rc4_pkg: constants, types and helper functions shared by the fault-detecting
// RC4 core and its three checkers.
//
// Each S-box element is stored as a 12-bit word: the 8-bit data byte in bits
// [11:4] and its 4-bit CRC residue in bits [3:0]. The residue is the remainder
// of d(x)*x^4 divided by g(x) = x^4 + x^3 + 1, computed here bit-serially as a
// zero-initialised LFSR. The divisor, the 12-bit element and the bit split
// [11:4]/[3:0] follow the paper; the LFSR formulation, the fault-injection
// bundle and the tap structs are this design's own.
package rc4_pkg;

  localparam int unsigned DW      = 8;           // data byte width
  localparam int unsigned CW      = 4;           // CRC width
  localparam int unsigned EW      = DW + CW;     // encoded S-box element width
  localparam int unsigned N       = 1 << DW;     // S-box entries (256)
  // Divisor x^4 + x^3 + 1 without its x^4 term.
  localparam logic [CW-1:0] CRC_POLY = 4'b1001;

  typedef logic [DW-1:0] byte_t;

  // CRC-encoded S-box element.
  typedef struct packed {
    byte_t           data;
    logic [CW-1:0]   crc;
  } selem_t;

  // Operands and result of one 8-bit addition, as seen by an addition checker.
  typedef struct packed {
    logic  valid;
    byte_t aug;
    byte_t add;
    byte_t sum;
  } add_tap_t;

  // Fault injection for test: each mask is XORed into the named signal in the
  // cycle it is applied. All zero means fault-free operation.
  typedef struct packed {
    byte_t          i_flip;     // output of the i counter
    byte_t          sum_a_flip; // adder A: j + S[i]
    byte_t          sum_b_flip; // adder B: (j + S[i]) + K in KSA, S[i] + S[j] in PRGA
    logic           s_en;       // flip bits of one stored S-box element
    byte_t          s_addr;
    logic [EW-1:0]  s_flip;
  } fault_inject_t;

  // Core state, exported for observation.
  // Core state: the kind of round in progress, set on the rising edge.
  typedef enum logic [2:0] {
    ST_IDLE      = 3'd0,
    ST_INIT      = 3'd1,   // S-box load, i = 0, j = 0
    ST_KSA       = 3'd2,
    ST_PRGA_INIT = 3'd3,   // j = 0, i = 1 (the clock lost before the first byte)
    ST_PRGA      = 3'd4,
    ST_HALT      = 3'd5
  } core_state_t;

  // Remainder of d(x) * x^4 mod (x^4 + x^3 + 1).
  function automatic logic [CW-1:0] crc4(input byte_t d);
    logic [CW-1:0] r;
    logic          fb;
    r = '0;
    for (int b = DW - 1; b >= 0; b--) begin
      fb = r[CW-1] ^ d[b];
      r  = {r[CW-2:0], 1'b0} ^ (fb ? CRC_POLY : '0);
    end
    return r;
  endfunction

  function automatic selem_t encode(input byte_t d);
    return '{data: d, crc: crc4(d)};
  endfunction

  // Parity of the bits at even positions (0, 2, 4, 6).
  function automatic logic par_even(input byte_t v);
    return ^(v & 8'h55);
  endfunction

  // Parity of the bits at odd positions (1, 3, 5, 7).
  function automatic logic par_odd(input byte_t v);
    return ^(v & 8'hAA);
  endfunction

  // Parity of the two nibble MSBs (bits 7 and 3).
  function automatic logic par_msb(input byte_t v);
    return ^(v & 8'h88);
  endfunction

endpackage
