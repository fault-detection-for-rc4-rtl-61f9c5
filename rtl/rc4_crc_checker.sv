// rc4_crc_checker: checks that the S[i] and S[j] elements read by the
// algorithm core still carry a valid CRC.
//
// A 256 x 4-bit CRC array holds crc4(n) for every byte value n. Two 256:1
// multiplexers select the entries addressed by the data fields S[i][11:4] and
// S[j][11:4]; two comparators, registered on the clock, compare them with the
// CRC fields S[i][3:0] and S[j][3:0]; an AND of the two comparator outputs
// gives no_fault. When `valid` is low the comparators register "equal".
//
// Interface and timing: the inputs are sampled on the FALLING clock edge, the
// edge on which the core swaps S[i] and S[j]; no_fault reflects that swap from
// then until the next falling edge. Reset sets no_fault high.
//
// Following the paper (its CRC block figure): the CRC array, the two 256:1
// multiplexers indexed by bits 11..4, the comparison with bits 3..0, the
// clocked comparators and the final AND. This design's own choices: the array
// is computed from the divisor when the design is elaborated rather than loaded,
// and the `valid` qualifier.
module rc4_crc_checker
  import rc4_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   valid,
  input  selem_t s_i,
  input  selem_t s_j,
  output logic   no_fault
);

  typedef logic [N-1:0][CW-1:0] crc_array_t;

  function automatic crc_array_t build_crc_array();
    crc_array_t a;
    for (int n = 0; n < N; n++) a[n] = crc4(byte_t'(n));
    return a;
  endfunction

  localparam crc_array_t CRC_ARRAY = build_crc_array();

  logic [CW-1:0] mux_i, mux_j;
  logic          ok_i_q, ok_j_q;

  assign mux_i = CRC_ARRAY[s_i.data];
  assign mux_j = CRC_ARRAY[s_j.data];

  always_ff @(negedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ok_i_q <= 1'b1;
      ok_j_q <= 1'b1;
    end else begin
      ok_i_q <= !valid || (mux_i == s_i.crc);
      ok_j_q <= !valid || (mux_j == s_j.crc);
    end
  end

  assign no_fault = ok_i_q & ok_j_q;

endmodule
