// tb_rc4_fault_top: end-to-end test of the fault-detecting RC4 design at its
// default parameters.
// 1. Fault-free: keys of 5 and 16 bytes, 3000 keystream bytes (the i counter
//    wraps eleven times), compared with a reference model written here, one
//    byte on every clock; no checker may report a fault.
// 2. Fault campaigns, each on a fresh key schedule, each expected to be caught
//    by one particular checker and to halt the core:
//      S-box data bit flip and CRC bit flip -> CRC checker (when read),
//      adder A and adder B result flips, in KSA and PRGA -> addition checkers,
//      i counter output flips, in KSA and PRGA -> counter checker (at the end
//      of the eight-count window).
//    After every halt a new start must give the correct keystream again.
// 3. A two-bit flip within one nibble of adder A, which nibble parity cannot
//    see, must go unreported.
// Each mechanism is counted; one that never happened counts as a failure.
module tb_rc4_fault_top;
  import rc4_pkg::*;

  logic             clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic [15:0][7:0] key = '0;
  logic [4:0]       key_len = 5'd16;
  fault_inject_t    fi = '0;
  byte_t            z;
  logic             z_valid, halted, no_fault, crc_ok, add_a_ok, add_b_ok, cnt_ok;
  core_state_t      state;
  int               checks = 0, failures = 0;
  int               cycle = 0;
  // mechanism counters
  int n_ksa = 0, n_prga_bytes = 0, n_crc = 0, n_add_a = 0, n_add_b = 0, n_cnt = 0;
  int n_halt = 0, n_restart = 0, n_undetected = 0;
  // flags seen since the last start
  logic seen_crc, seen_add_a, seen_add_b, seen_cnt;

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  rc4_fault_top dut (
    .clk, .rst_n, .start, .key, .key_len, .fi, .z, .z_valid, .state, .halted,
    .no_fault, .crc_ok, .add_a_ok, .add_b_ok, .cnt_ok
  );

  always @(posedge clk) if (rst_n) begin
    if (start) begin seen_crc <= 1'b0; seen_add_a <= 1'b0; seen_add_b <= 1'b0; seen_cnt <= 1'b0; end
    else begin
      if (!crc_ok)   seen_crc   <= 1'b1;
      if (!add_a_ok) seen_add_a <= 1'b1;
      if (!add_b_ok) seen_add_b <= 1'b1;
      if (!cnt_ok)   seen_cnt   <= 1'b1;
    end
  end

  function automatic void rc4_ref(input logic [15:0][7:0] k, input int klen, input int n,
                                  ref byte_t ks []);
    byte_t s [256];
    byte_t tmp;
    int    i, j;
    for (int a = 0; a < 256; a++) s[a] = byte_t'(a);
    j = 0;
    for (i = 0; i < 256; i++) begin
      j = (j + int'(s[i]) + int'(k[i % klen])) % 256;
      tmp = s[i]; s[i] = s[j]; s[j] = tmp;
    end
    ks = new [n];
    i = 0; j = 0;
    for (int c = 0; c < n; c++) begin
      i = (i + 1) % 256;
      j = (j + int'(s[i])) % 256;
      tmp = s[i]; s[i] = s[j]; s[j] = tmp;
      ks[c] = s[(int'(s[i]) + int'(s[j])) % 256];
    end
  endfunction

  task automatic do_start(input logic [15:0][7:0] k, input int klen);
    @(negedge clk);
    if (halted) n_restart++;
    key = k; key_len = 5'(klen); start = 1'b1;
    @(negedge clk);
    start = 1'b0;
  endtask

  // full run without faults: n keystream bytes checked against the model
  task automatic clean_run(input logic [15:0][7:0] k, input int klen, input int n);
    byte_t ks [];
    int    got, first_cycle;
    rc4_ref(k, klen, n, ks);
    do_start(k, klen);
    repeat (257) @(negedge clk);
    checks++; if (state !== ST_PRGA_INIT) failures++;
    n_ksa++;
    got = 0;
    while (got < n) begin
      @(posedge clk); #1;
      if (!no_fault) begin
        failures++;
        if (failures < 10) $display("false alarm crc=%b a=%b b=%b cnt=%b", crc_ok, add_a_ok, add_b_ok, cnt_ok);
      end
      if (z_valid) begin
        checks++;
        if (z !== ks[got]) begin
          failures++;
          if (failures < 10) $display("byte %0d: %h expected %h", got, z, ks[got]);
        end
        if (got == 0) first_cycle = cycle;
        got++; n_prga_bytes++;
      end
    end
    // the checkers cost no throughput: one byte on every clock
    checks++;
    if (cycle - first_cycle != n - 1) begin
      failures++;
      $display("%0d bytes took %0d clocks", n, cycle - first_cycle + 1);
    end
  endtask

  // wait for a halt; check which checker reported it and how fast
  task automatic expect_halt(input string what, input int max_cycles, input int which);
    int waited;
    waited = 0;
    while (!halted && waited < max_cycles) begin @(posedge clk); #1; waited++; end
    checks++;
    if (!halted) begin
      failures++;
      $display("%s: no halt within %0d cycles", what, max_cycles);
      return;
    end
    n_halt++;
    checks++;
    case (which)
      0: if (!seen_crc   || seen_add_a || seen_add_b || seen_cnt) failures++; else n_crc++;
      1: if (!seen_add_a || seen_crc   || seen_add_b || seen_cnt) failures++; else n_add_a++;
      2: if (!seen_add_b || seen_crc   || seen_add_a || seen_cnt) failures++; else n_add_b++;
      3: if (!seen_cnt   || seen_crc   || seen_add_a || seen_add_b) failures++; else n_cnt++;
      default: ;
    endcase
    // the core stays halted and emits nothing
    repeat (10) begin
      @(posedge clk); #1;
      checks++; if (!halted || z_valid) failures++;
    end
  endtask

  // fault injection for one clock, from just after a rising edge to just after
  // the next: it covers one falling edge (swap, S-box write, CRC and counter
  // checks) and one rising edge (additions and their checks)
  task automatic inject(input fault_inject_t f);
    @(posedge clk); #1 fi = f;
    @(posedge clk); #1 fi = '0;
  endtask

  function automatic logic [15:0][7:0] rnd_key();
    logic [15:0][7:0] k;
    for (int a = 0; a < 16; a++) k[a] = byte_t'($urandom_range(0, 255));
    return k;
  endfunction

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [15:0][7:0] k;
    fault_inject_t    f;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;

    // 1. fault-free operation
    k = rnd_key();
    clean_run(k, 16, 3000);
    k = '0; for (int a = 0; a < 5; a++) k[a] = byte_t'(a + 1);
    clean_run(k, 5, 300);

    // 2a. S-box faults: data bit and CRC bit, injected during PRGA
    for (int b = 0; b < 12; b++) begin
      k = rnd_key();
      clean_run(k, 16, 20);
      f = '0; f.s_en = 1'b1; f.s_addr = byte_t'($urandom_range(0, 255)); f.s_flip = selem_t'(12'(1) << b);
      inject(f);
      expect_halt("S-box flip", 300, 0);
    end
    // and during KSA
    do_start(rnd_key(), 16);
    repeat (50) @(negedge clk);
    f = '0; f.s_en = 1'b1; f.s_addr = 8'd200; f.s_flip = selem_t'(12'h100);
    inject(f);
    expect_halt("S-box flip in KSA", 300, 0);

    // 2b. adder faults: one clock, single bit, KSA and PRGA
    for (int b = 0; b < 8; b++) begin
      do_start(rnd_key(), 7 + b);
      repeat (30 + 10 * b) @(negedge clk);
      f = '0; f.sum_a_flip = byte_t'(1 << b);
      inject(f);
      expect_halt("adder A in KSA", 3, 1);
      do_start(rnd_key(), 16);
      repeat (30) @(negedge clk);
      f = '0; f.sum_b_flip = byte_t'(1 << b);
      inject(f);
      expect_halt("adder B in KSA", 3, 2);
      clean_run(rnd_key(), 16, 10 + b);
      f = '0; f.sum_a_flip = byte_t'(1 << b);
      inject(f);
      expect_halt("adder A in PRGA", 3, 1);
      clean_run(rnd_key(), 16, 10 + b);
      f = '0; f.sum_b_flip = byte_t'(8'h80 >> b);
      inject(f);
      expect_halt("adder B in PRGA", 3, 2);
    end

    // 2c. i counter faults: detected at the end of the eight-count window
    for (int b = 0; b < 8; b++) begin
      clean_run(rnd_key(), 16, 5 + 3 * b);
      f = '0; f.i_flip = byte_t'(1 << b);
      inject(f);
      expect_halt("i counter in PRGA", 10, 3);
      do_start(rnd_key(), 16);
      repeat (13 * b + 3) @(negedge clk);
      f = '0; f.i_flip = byte_t'(1 << b);
      inject(f);
      expect_halt("i counter in KSA", 10, 3);
    end

    // 3. a fault the nibble parity cannot see goes unreported
    clean_run(rnd_key(), 16, 10);
    f = '0; f.sum_a_flip = 8'h30;
    inject(f);
    repeat (40) begin
      @(posedge clk); #1;
      checks++; if (halted || !no_fault) failures++;
    end
    n_undetected++;

    // the design is still usable after all of this
    clean_run(rnd_key(), 16, 600);

    $display("mechanisms: ksa=%0d prga_bytes=%0d halts=%0d restarts=%0d crc=%0d add_a=%0d add_b=%0d counter=%0d undetected=%0d",
             n_ksa, n_prga_bytes, n_halt, n_restart, n_crc, n_add_a, n_add_b, n_cnt, n_undetected);
    if (n_ksa == 0)        failures++;
    if (n_prga_bytes == 0) failures++;
    if (n_halt == 0)       failures++;
    if (n_restart == 0)    failures++;
    if (n_crc == 0)        failures++;
    if (n_add_a == 0)      failures++;
    if (n_add_b == 0)      failures++;
    if (n_cnt == 0)        failures++;
    if (n_undetected == 0) failures++;
    checks += 9;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
