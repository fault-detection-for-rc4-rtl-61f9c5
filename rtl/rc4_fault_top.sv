// rc4_fault_top: RC4 core with concurrent fault detection.
//
// Three checkers watch the algorithm core while it runs and never stall it:
//   - the CRC checker verifies the 4-bit CRC carried by S[i] and S[j],
//   - two addition checkers verify the core's two adders by nibble parity
//     prediction (adder A: j + S[i]; adder B: + K[i] in KSA, S[i] + S[j] in
//     PRGA),
//   - the counter checker verifies the i counter every eight counts.
// Their registered no_fault outputs are ANDed and fed back to the core, which
// halts at the next clock edge when the AND is low and stays halted until the
// next `start`. The individual checker results are also brought out.
//
// Edges: the core adds on the rising edge and swaps on the falling edge. The
// addition checkers register on the rising edge, so an adder fault cancels the
// swap half a clock later; the CRC and counter checkers register on the falling
// edge, so their faults stop the round that would begin on the next rising
// edge. No checker adds a clock to the round.
//
// Interface: `start` (sampled on a rising edge) with `key`/`key_len` begins a
// key schedule; keystream bytes appear on `z` with `z_valid`, one per clock,
// from the falling edge 258 clocks after that rising edge. `fi` is the fault-injection bundle (all zero in normal use).
//
// Following the paper: the three checkers, their connections to the core and
// the AND gate feeding no_fault back. This design's own choices: two addition
// checker instances (one per adder), the fault-injection port and the observable
// per-checker outputs.
module rc4_fault_top
  import rc4_pkg::*;
#(
  parameter int unsigned KEY_BYTES_MAX = 16
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  input  logic [KEY_BYTES_MAX-1:0][7:0] key,
  input  logic [$clog2(KEY_BYTES_MAX+1)-1:0] key_len,
  input  fault_inject_t                 fi,
  output byte_t                         z,
  output logic                          z_valid,
  output core_state_t                   state,
  output logic                          halted,
  output logic                          no_fault,
  output logic                          crc_ok,
  output logic                          add_a_ok,
  output logic                          add_b_ok,
  output logic                          cnt_ok
);

  logic     init_round, i_valid, s_valid;
  byte_t    i_val;
  selem_t   s_i, s_j;
  add_tap_t tap_a, tap_b;

  rc4_core #(.KEY_BYTES_MAX(KEY_BYTES_MAX)) u_core (
    .clk, .rst_n, .start, .key, .key_len,
    .no_fault (no_fault),
    .fi       (fi),
    .state, .halted, .z, .z_valid,
    .init_round, .i_valid, .i_val, .s_valid, .s_i, .s_j, .tap_a, .tap_b
  );

  rc4_crc_checker u_crc (
    .clk, .rst_n, .valid(s_valid), .s_i, .s_j, .no_fault(crc_ok)
  );

  rc4_add_checker u_add_a (.clk, .rst_n, .tap(tap_a), .no_fault(add_a_ok));
  rc4_add_checker u_add_b (.clk, .rst_n, .tap(tap_b), .no_fault(add_b_ok));

  rc4_counter_checker u_cnt (
    .clk, .rst_n, .restart(init_round), .i_valid, .i_val, .no_fault(cnt_ok)
  );

  assign no_fault = crc_ok & add_a_ok & add_b_ok & cnt_ok;

endmodule
