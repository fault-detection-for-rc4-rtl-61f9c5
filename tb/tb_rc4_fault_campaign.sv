// tb_rc4_fault_campaign: system-level fault-coverage campaign on the complete
// design at its default parameters.
// For each of the three guarded quantities, every nonzero 8-bit error pattern
// (255 of them) is injected once into a running PRGA, each on a fresh key
// schedule:
//   - the data byte of one stored S-box element (caught, if at all, by the CRC
//     checker when the element is next swapped),
//   - the result of adder A, j + S[i], for one clock (addition checker),
//   - the i counter output for one clock (counter checker).
// The bench predicts each outcome independently: CRC by polynomial long
// division, adder by nibble parity of the pattern, counter by the three
// counting rules. It checks that the design halts exactly when a checker
// should see the fault, and that it was the expected checker. It prints the
// detected counts per number of flipped bits.
module tb_rc4_fault_campaign;
  import rc4_pkg::*;

  logic             clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic [15:0][7:0] key = '0;
  logic [4:0]       key_len = 5'd16;
  fault_inject_t    fi = '0;
  byte_t            z;
  logic             z_valid, halted, no_fault, crc_ok, add_a_ok, add_b_ok, cnt_ok;
  core_state_t      state;
  int               checks = 0, failures = 0;
  int               det [3][9];
  logic             seen_crc, seen_add, seen_cnt;
  // published detected counts by flipped-bit count, for comparison only
  int               pub [3][9] = '{'{0, 8, 21, 56, 70, 56, 0, 8, 0},
                                   '{0, 8, 16, 56, 32, 56, 16, 8, 0},
                                   '{0, 8, 20, 56, 55, 56, 20, 8, 1}};
  string            name [3] = '{"S-box data / CRC checker", "adder A / addition checker",
                                 "i counter / counter checker"};

  always #5 clk = ~clk;

  rc4_fault_top dut (
    .clk, .rst_n, .start, .key, .key_len, .fi, .z, .z_valid, .state, .halted,
    .no_fault, .crc_ok, .add_a_ok, .add_b_ok, .cnt_ok
  );

  always @(posedge clk) if (rst_n) begin
    if (start) begin seen_crc <= 1'b0; seen_add <= 1'b0; seen_cnt <= 1'b0; end
    else begin
      if (!crc_ok)                seen_crc <= 1'b1;
      if (!add_a_ok || !add_b_ok) seen_add <= 1'b1;
      if (!cnt_ok)                seen_cnt <= 1'b1;
    end
  end

  function automatic logic [3:0] ref_crc(input logic [7:0] d);
    logic [11:0] r;
    r = {d, 4'b0000};
    for (int b = 11; b >= 4; b--) if (r[b]) r = r ^ (12'b1_1001 << (b - 4));
    return r[3:0];
  endfunction

  // a single wrong count breaks a rule unless the pattern is even on both the
  // even and the odd bit positions and keeps bit7 ^ bit3
  function automatic logic cnt_sees(input byte_t e);
    return ($countones(e & 8'h55) % 2 == 1) || ($countones(e & 8'hAA) % 2 == 1) ||
           (e[7] != e[3]);
  endfunction

  task automatic start_prga(input int extra);
    @(negedge clk);
    for (int a = 0; a < 16; a++) key[a] = byte_t'($urandom_range(0, 255));
    start = 1'b1;
    @(negedge clk) start = 1'b0;
    repeat (258 + extra) @(negedge clk);
  endtask

  task automatic inject(input fault_inject_t f);
    @(posedge clk); #1 fi = f;
    @(posedge clk); #1 fi = '0;
  endtask

  // wait, then compare the outcome with the prediction
  task automatic judge(input int kind, input byte_t e, input logic expect_det, input int wait_cycles);
    repeat (wait_cycles) @(posedge clk);
    #1;
    checks++;
    if (halted !== expect_det) begin
      failures++;
      if (failures < 10) $display("kind %0d pattern %h: halted=%b expected %b", kind, e, halted, expect_det);
    end
    if (halted) begin
      det[kind][$countones(e)]++;
      checks++;
      case (kind)
        0: if (!seen_crc || seen_add || seen_cnt) failures++;
        1: if (!seen_add || seen_crc || seen_cnt) failures++;
        default: if (!seen_cnt || seen_crc || seen_add) failures++;
      endcase
    end
  endtask

  initial begin
    #40000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    fault_inject_t f;
    byte_t         e;
    int            tot;
    for (int k = 0; k < 3; k++) for (int w = 0; w < 9; w++) det[k][w] = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;

    for (int p = 1; p < 256; p++) begin
      e = byte_t'(p);
      // S-box element: flip data bits of an element; it is swapped within 256 rounds
      start_prga(p % 7);
      f = '0; f.s_en = 1'b1; f.s_addr = byte_t'($urandom_range(0, 255)); f.s_flip = selem_t'({e, 4'h0});
      inject(f);
      judge(0, e, 1'b1 && (ref_crc(e) != 4'h0), 300);
      // adder A
      start_prga(p % 5);
      f = '0; f.sum_a_flip = e;
      inject(f);
      judge(1, e, ($countones(e[3:0]) % 2 == 1) || ($countones(e[7:4]) % 2 == 1), 4);
      // i counter
      start_prga(p % 11);
      f = '0; f.i_flip = e;
      inject(f);
      judge(2, e, cnt_sees(e), 10);
    end

    for (int k = 0; k < 3; k++) begin
      $display("%s: detected by flipped-bit count (this design / published)", name[k]);
      tot = 0;
      for (int w = 1; w < 9; w++) begin
        $display("  %0d bits: %0d / %0d", w, det[k][w], pub[k][w]);
        tot += det[k][w];
      end
      $display("  total %0d of 255", tot);
    end
    // totals expected from the codes themselves
    checks += 3;
    if (det[0][1] + det[0][2] + det[0][3] + det[0][4] + det[0][5] + det[0][6] + det[0][7] + det[0][8] != 240) failures++;
    if (det[1][1] + det[1][2] + det[1][3] + det[1][4] + det[1][5] + det[1][6] + det[1][7] + det[1][8] != 192) failures++;
    if (det[2][1] + det[2][2] + det[2][3] + det[2][4] + det[2][5] + det[2][6] + det[2][7] + det[2][8] != 224) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
