// rc4_core: the RC4 algorithm core - key scheduling (KSA) followed by
// keystream generation (PRGA) on a CRC-encoded S-box, one round per clock,
// each round split over the two clock edges.
//
// Algorithm. KSA, for i = 0..255:  j = j + S[i] + K[i];  swap(S[i], S[j])
// with K[i] = key[i mod key_len]. PRGA, per output byte:  i = i + 1;
// j = j + S[i];  swap(S[i], S[j]);  t = S[i] + S[j];  Z = S[t].
//
// Two-edge round. On the RISING edge of a round the additions are made: j is
// updated (and, in PRGA, t = S[i] + S[j_new] is computed from the values about
// to be swapped, which gives the same sum as after the swap). On the FALLING
// edge of the same clock S[i] and S[j] are swapped, the keystream byte
// Z = S[t] (after the swap) is registered and i is incremented. So one byte
// leaves per clock, and the i used by a round is set on the falling edge
// before it.
//
// Sequence. A `start` seen on a rising edge begins an initialisation round:
// j = 0 on that rising edge, and on its falling edge the S-box is loaded with
// the identity permutation and i = 0. 256 KSA rounds follow. Then one PRGA
// initialisation round (j = 0 on the rising edge, i = 1 on the falling edge),
// which is the clock lost before the first byte, and then PRGA rounds
// indefinitely. The i register therefore counts 0..255, 0, 1, 2, ... without a
// break, which is what the counter checker needs.
//
// Fault reaction. `no_fault`, the AND of the checkers, is sampled on both
// edges. Low on a rising edge: the round is not begun and the core enters HALT.
// Low on a falling edge: the swap, the increment of i and the keystream byte of
// that round are suppressed (HALT follows on the next rising edge). HALT lasts
// until the next `start`.
//
// Taps for the checkers. Adder A (j + S[i]) and adder B (+ K[i] in KSA,
// S[i] + S[j] in PRGA) are exported with their operands for the addition
// checkers, valid for the rising edge. S[i] and S[j] as swapped, and the i of
// the round, are exported for the CRC and counter checkers, valid for the
// falling edge. `init_round` marks the initialisation round.
//
// Timing. A `start` sampled on rising edge 0 gives the first keystream byte on
// `z`/`z_valid` from falling edge 258 (initialisation round, 256 KSA rounds,
// PRGA initialisation round, first PRGA round); then one byte per clock, each
// valid from a falling edge to the next.
//
// `fi` injects faults for test: XOR masks on the i counter output, on the two
// adder results, and on one stored S-box element.
//
// Following the paper: KSA and PRGA, the 12-bit CRC-encoded S-box, additions
// on the rising edge and swap plus keystream on the falling edge with one lost
// clock, the checker taps (S[i], S[j], augend/addend/summation, i), and
// stopping at the edge where a fault is reported. This design's own choices:
// computing t on the rising edge rather than the falling one, the one-edge
// parallel S-box initialisation, the key port, the two-adder arrangement and
// the fault-injection port.
module rc4_core
  import rc4_pkg::*;
#(
  parameter int unsigned KEY_BYTES_MAX = 16
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  input  logic [KEY_BYTES_MAX-1:0][7:0] key,      // key[0] is the first key byte
  input  logic [$clog2(KEY_BYTES_MAX+1)-1:0] key_len, // 1 .. KEY_BYTES_MAX
  input  logic                          no_fault,
  input  fault_inject_t                 fi,
  output core_state_t                   state,
  output logic                          halted,
  output byte_t                         z,
  output logic                          z_valid,
  // checker taps
  output logic                          init_round,
  output logic                          i_valid,
  output byte_t                         i_val,
  output logic                          s_valid,
  output selem_t                        s_i,
  output selem_t                        s_j,
  output add_tap_t                      tap_a,
  output add_tap_t                      tap_b
);

  localparam int unsigned KIW = $clog2(KEY_BYTES_MAX);

  // rising-edge registers
  core_state_t      state_q, state_d;
  byte_t            j_q, t_q;
  logic [KIW-1:0]   kidx_q;
  // falling-edge registers
  byte_t            i_q;
  byte_t            z_q;
  logic             z_valid_q;

  logic   add_ksa, add_prga;   // the round beginning at this rising edge
  logic   swap_now;            // the swap at this falling edge
  byte_t  i_use, k_byte, sum_a, j_ksa, j_new, t_new, z_new;
  selem_t si, sj_new, sj, st;

  assign i_use  = i_q ^ fi.i_flip;
  assign k_byte = key[kidx_q];

  // S-box reads: S[i], S[j_new] (rising edge), S[j] and S[t] (falling edge).

  // Adders, evaluated for the rising edge. Adder B is written as its two uses
  // so that S[j] never feeds the j address.
  assign sum_a = (j_q + si.data) ^ fi.sum_a_flip;
  assign j_ksa = (sum_a + k_byte) ^ fi.sum_b_flip;
  assign t_new = (si.data + sj_new.data) ^ fi.sum_b_flip;
  assign j_new = (state_d == ST_KSA) ? j_ksa : sum_a;

  // Next round, decided on the rising edge.
  always_comb begin
    state_d = state_q;
    if (start) state_d = ST_INIT;
    else begin
      unique case (state_q)
        ST_IDLE:      state_d = ST_IDLE;
        ST_INIT:      state_d = no_fault ? ST_KSA : ST_HALT;
        ST_KSA:       if (!no_fault) state_d = ST_HALT;
                      else if (i_q == '0) state_d = ST_PRGA_INIT;  // i wrapped: 256 rounds done
        ST_PRGA_INIT: state_d = no_fault ? ST_PRGA : ST_HALT;
        ST_PRGA:      if (!no_fault) state_d = ST_HALT;
        ST_HALT:      state_d = ST_HALT;
        default:      state_d = ST_IDLE;
      endcase
    end
  end

  assign add_ksa  = (state_d == ST_KSA);
  assign add_prga = (state_d == ST_PRGA);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= ST_IDLE;
      j_q     <= '0;
      t_q     <= '0;
      kidx_q  <= '0;
    end else begin
      state_q <= state_d;
      if (state_d == ST_INIT) begin
        j_q    <= '0;
        kidx_q <= '0;
      end else if (state_d == ST_PRGA_INIT) begin
        j_q <= '0;
      end else if (add_ksa) begin
        j_q    <= j_new;
        kidx_q <= (32'(kidx_q) + 1 >= 32'(key_len)) ? '0 : kidx_q + 1'b1;
      end else if (add_prga) begin
        j_q <= j_new;
        t_q <= t_new;
      end
    end
  end

  // The swap of this round, unless a checker has just reported a fault.
  assign swap_now = (state_q == ST_KSA || state_q == ST_PRGA) && no_fault;

  // Z = S[t] after the swap of this round.
  always_comb begin
    if (t_q == i_use)      z_new = sj.data;
    else if (t_q == j_q)   z_new = si.data;
    else                   z_new = st.data;
  end

  always_ff @(negedge clk or negedge rst_n) begin
    if (!rst_n) begin
      i_q       <= '0;
      z_q       <= '0;
      z_valid_q <= 1'b0;
    end else begin
      z_valid_q <= 1'b0;
      if (state_q == ST_INIT) begin
        i_q <= '0;
      end else if (state_q == ST_PRGA_INIT && no_fault) begin
        i_q <= i_q + 8'd1;
      end else if (swap_now) begin
        i_q <= i_q + 8'd1;
        if (state_q == ST_PRGA) begin
          z_q       <= z_new;
          z_valid_q <= 1'b1;
        end
      end
    end
  end

  rc4_sbox u_sbox (
    .clk       (clk),
    .init      (state_q == ST_INIT),
    .rd_a_addr (i_use),
    .rd_a      (si),
    .rd_b_addr (j_new),
    .rd_b      (sj_new),
    .rd_c_addr (j_q),
    .rd_c      (sj),
    .rd_d_addr (t_q),
    .rd_d      (st),
    .swap_en   (swap_now),
    .swap_a    (i_use),
    .swap_b    (j_q),
    .flip_en   (fi.s_en),
    .flip_addr (fi.s_addr),
    .flip_mask (fi.s_flip)
  );

  assign state      = state_q;
  assign halted     = (state_q == ST_HALT);
  assign z          = z_q;
  assign z_valid    = z_valid_q;

  assign init_round = (state_q == ST_INIT);
  assign i_valid    = swap_now || (state_q == ST_PRGA_INIT && no_fault);
  assign i_val      = i_use;
  assign s_valid    = swap_now;
  assign s_i        = si;
  assign s_j        = sj;
  assign tap_a      = '{valid: add_ksa || add_prga, aug: j_q, add: si.data, sum: sum_a};
  assign tap_b      = add_ksa ? '{valid: 1'b1, aug: sum_a, add: k_byte, sum: j_ksa}
                              : '{valid: add_prga, aug: si.data, add: sj_new.data, sum: t_new};

  // key_len must select at least one key byte and no more than the port holds.
  a_key_len: assert property (@(posedge clk) disable iff (!rst_n)
                              start |-> (key_len >= 1 && 32'(key_len) <= KEY_BYTES_MAX));

endmodule
