// rc4_sbox: the RC4 state array, 256 CRC-encoded 12-bit elements held in
// flip-flops.
//
// `init` loads the identity permutation, each element n stored as
// {n, crc4(n)}, so every element carries its own 4-bit CRC from the start.
// Four asynchronous read ports serve the core (S[i], S[j] before and after
// the j update, S[t]). A swap write exchanges two elements; when both addresses
// are equal the element is unchanged. The swap moves whole 12-bit words, so the
// CRC travels with its data byte. `flip_en` XORs `flip_mask` into one stored
// element after any swap of the same edge; it exists only to inject S-box
// faults in test.
//
// Timing: all writes (init, swap, flip) happen on the FALLING clock edge, the
// edge on which the core swaps; reads are combinational.
//
// Following the paper: the 12-bit encoded element (data in [11:4], CRC in
// [3:0]) kept in the algorithm's S-box, swapped on the falling edge. This
// design's own choices: flip-flop storage with combinational reads and a
// one-edge parallel initialisation.
module rc4_sbox
  import rc4_pkg::*;
(
  input  logic   clk,
  input  logic   init,
  input  byte_t  rd_a_addr,
  output selem_t rd_a,
  input  byte_t  rd_b_addr,
  output selem_t rd_b,
  input  byte_t  rd_c_addr,
  output selem_t rd_c,
  input  byte_t  rd_d_addr,
  output selem_t rd_d,
  input  logic   swap_en,
  input  byte_t  swap_a,
  input  byte_t  swap_b,
  input  logic   flip_en,
  input  byte_t  flip_addr,
  input  selem_t flip_mask
);

  selem_t mem [N];

  assign rd_a = mem[rd_a_addr];
  assign rd_b = mem[rd_b_addr];
  assign rd_c = mem[rd_c_addr];
  assign rd_d = mem[rd_d_addr];

  always_ff @(negedge clk) begin
    if (init) begin
      for (int n = 0; n < N; n++) mem[n] <= encode(byte_t'(n));
    end else begin
      if (swap_en) begin
        mem[swap_a] <= mem[swap_b];
        mem[swap_b] <= mem[swap_a];
      end
      if (flip_en) begin
        if (swap_en && flip_addr == swap_a)      mem[flip_addr] <= mem[swap_b] ^ flip_mask;
        else if (swap_en && flip_addr == swap_b) mem[flip_addr] <= mem[swap_a] ^ flip_mask;
        else                                     mem[flip_addr] <= mem[flip_addr] ^ flip_mask;
      end
    end
  end

endmodule
