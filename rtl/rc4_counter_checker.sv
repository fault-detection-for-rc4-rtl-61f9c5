// rc4_counter_checker: checks the i counter of the RC4 core from the parity
// patterns of eight consecutive binary counts.
//
// In any run of eight counts 8k .. 8k+7 the value v+4 differs from v
// (v = 8k .. 8k+3) only in bit 2. Hence
//   - the parity of the even bit positions (0,2,4,6) of v+4 is the complement
//     of that of v,
//   - the parity of the odd bit positions (1,3,5,7) of v+4 equals that of v,
//   - bit7 ^ bit3 (the two nibble MSBs) is the same for all eight values.
// The checker stores seven values in a buffer and, when the eighth arrives,
// tests the three rules on the whole window of eight. Its own 3-bit slot
// pointer, cleared by `restart`, decides where a window begins, so windows
// line up with multiples of 8 when the counter starts from 0.
//
// Interface and timing: one value is taken on each FALLING clock edge while
// `i_valid` is high (the core's i of the round being swapped); `restart` is
// also sampled on the falling edge. no_fault goes low for one clock, from the
// falling edge that takes the eighth value of a window that breaks a rule; it
// is high otherwise and after reset or restart.
//
// Following the paper: buffering eight consecutive counts, splitting them into
// two sets of four, the even-position, odd-position and nibble-MSB parities,
// and a decision on the falling edge of every eighth clock. Where the paper states that the odd
// position parities of the second set are the complement of the first, this
// design checks that they are equal, which is what correct counting produces;
// the slot pointer and the exact form of the MSB rule are this design's own.
module rc4_counter_checker
  import rc4_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  restart,
  input  logic  i_valid,
  input  byte_t i_val,
  output logic  no_fault
);

  byte_t      buffer [7];
  logic [2:0] slot;
  byte_t      win [8];
  logic       window_ok;

  always_comb begin
    for (int m = 0; m < 7; m++) win[m] = buffer[m];
    win[7] = i_val;
    window_ok = 1'b1;
    for (int m = 0; m < 4; m++) begin
      if (par_even(win[m+4]) == par_even(win[m])) window_ok = 1'b0;
      if (par_odd(win[m+4])  != par_odd(win[m]))  window_ok = 1'b0;
    end
    for (int m = 1; m < 8; m++)
      if (par_msb(win[m]) != par_msb(win[0])) window_ok = 1'b0;
  end

  always_ff @(negedge clk or negedge rst_n) begin
    if (!rst_n) begin
      slot     <= '0;
      no_fault <= 1'b1;
      for (int m = 0; m < 7; m++) buffer[m] <= '0;
    end else if (restart) begin
      slot     <= '0;
      no_fault <= 1'b1;
    end else if (i_valid) begin
      if (slot != 3'd7) buffer[slot] <= i_val;
      slot     <= slot + 3'd1;
      no_fault <= (slot == 3'd7) ? window_ok : 1'b1;
    end else begin
      no_fault <= 1'b1;
    end
  end

endmodule
