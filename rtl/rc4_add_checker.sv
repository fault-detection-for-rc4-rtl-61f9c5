// rc4_add_checker: nibble parity-prediction check of one 8-bit addition
// sum = aug + add (mod 256).
//
// The parity of a sum equals the XOR of the parities of the two summands and
// of every carry entering a bit position of that sum. The checker rebuilds the
// carry chain c[k] (c[0] = carry-in = 0) from the two operands, predicts
//   p_lo = p(aug[3:0]) ^ p(add[3:0]) ^ c[0] ^ c[1] ^ c[2] ^ c[3]
//   p_hi = p(aug[7:4]) ^ p(add[7:4]) ^ c[4] ^ c[5] ^ c[6] ^ c[7]
// and compares both with the nibble parities of the `sum` it is given. Any
// error in `sum` that flips an odd number of bits in either nibble is caught.
//
// Interface and timing: `tap` carries the operands, the result and a valid
// bit; it is sampled on the RISING edge, the edge on which the core commits
// the sum, and no_fault reflects that addition until the next rising edge, so
// the core can still cancel the swap on the falling edge between. Reset sets
// no_fault high.
//
// Following the paper: nibble parity (two redundant bits per byte) with
// parity prediction from operand parities and carries, and the checker's
// inputs (augend, addend, summation). This design's own choices: the carries
// come from a carry chain inside the checker, since only the operands and the
// sum reach it; the carry terms are those entering each bit of the nibble (the
// paper's formula lists Cin and carries out of bits 0..3, which would also count
// the carry leaving the nibble). The rising-edge register follows the paper.
module rc4_add_checker
  import rc4_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  add_tap_t tap,
  output logic     no_fault
);

  logic [DW-1:0] c;
  logic        p_lo_pred, p_hi_pred, p_lo_sum, p_hi_sum;

  // Ripple carry chain: c[k] is the carry into bit k (the carry out of bit 7
  // is not part of a modulo-256 sum).
  assign c[0] = 1'b0;
  for (genvar k = 0; k < DW - 1; k++) begin : g_carry
    assign c[k+1] = (tap.aug[k] & tap.add[k]) | (c[k] & (tap.aug[k] ^ tap.add[k]));
  end

  assign p_lo_pred = ^tap.aug[3:0] ^ ^tap.add[3:0] ^ ^c[3:0];
  assign p_hi_pred = ^tap.aug[7:4] ^ ^tap.add[7:4] ^ ^c[7:4];
  assign p_lo_sum  = ^tap.sum[3:0];
  assign p_hi_sum  = ^tap.sum[7:4];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) no_fault <= 1'b1;
    else        no_fault <= !tap.valid ||
                            ((p_lo_pred == p_lo_sum) && (p_hi_pred == p_hi_sum));
  end

endmodule
