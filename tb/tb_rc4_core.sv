// tb_rc4_core: self-checking test of the RC4 algorithm core, with the fault
// input driven by the bench.
// The keystream is compared with published RC4 test vectors and with a
// reference model written here, for keys of every length from 1 to 16 bytes.
// Also checked: the latency from the rising edge that takes start to the first
// keystream byte (falling edge 258: initialisation round, 256 KSA rounds, PRGA
// initialisation round, first PRGA round) and one byte per clock after it;
// that the i value taken on falling edges counts 0,1,2,... without a gap; that
// S[i] and S[j] carry valid CRCs when swapped; that the adder taps add up on
// rising edges; that a low no_fault in KSA or PRGA cancels the swap and halts
// the core, and that start restarts it; and that the fault-injection masks
// reach the taps.
module tb_rc4_core;
  import rc4_pkg::*;

  logic                 clk = 1'b0, rst_n = 1'b0, start = 1'b0, no_fault = 1'b1;
  logic [15:0][7:0]     key = '0;
  logic [4:0]           key_len = 5'd5;
  fault_inject_t        fi = '0;
  core_state_t          state;
  logic                 halted, z_valid, init_round, i_valid, s_valid;
  byte_t                z, i_val;
  selem_t               s_i, s_j;
  add_tap_t             tap_a, tap_b;
  int                   checks = 0, failures = 0;
  int                   exp_i = 0;
  logic                 track_i = 1'b0;
  // published RC4 test vectors: RFC 6229 key 0x0102030405, keys "Key", "Wiki", "Secret"
  byte_t v_rfc [16] = '{8'hb2, 8'h39, 8'h63, 8'h05, 8'hf0, 8'h3d, 8'hc0, 8'h27,
                        8'hcc, 8'hc3, 8'h52, 8'h4a, 8'h0a, 8'h11, 8'h18, 8'ha8};
  byte_t v_key [10] = '{8'hEB, 8'h9F, 8'h77, 8'h81, 8'hB7, 8'h34, 8'hCA, 8'h72, 8'hA7, 8'h19};
  byte_t v_wiki [6] = '{8'h60, 8'h44, 8'hDB, 8'h6D, 8'h41, 8'hB7};
  byte_t v_sec [8]  = '{8'h04, 8'hD4, 8'h6B, 8'h05, 8'h3C, 8'hA8, 8'h7B, 8'h59};

  always #5 clk = ~clk;

  rc4_core dut (
    .clk, .rst_n, .start, .key, .key_len, .no_fault, .fi, .state, .halted, .z, .z_valid,
    .init_round, .i_valid, .i_val, .s_valid, .s_i, .s_j, .tap_a, .tap_b
  );

  function automatic logic [3:0] ref_crc(input logic [7:0] d);
    logic [11:0] r;
    r = {d, 4'b0000};
    for (int b = 11; b >= 4; b--) if (r[b]) r = r ^ (12'b1_1001 << (b - 4));
    return r[3:0];
  endfunction

  // reference RC4 keystream
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

  // tap checks: adders on rising edges, S-box and i on falling edges
  always @(posedge clk) if (rst_n) begin
    if (tap_a.valid && fi == '0) begin
      checks++;
      if (byte_t'(tap_a.aug + tap_a.add) !== tap_a.sum ||
          byte_t'(tap_b.aug + tap_b.add) !== tap_b.sum || !tap_b.valid) failures++;
    end
  end

  always @(negedge clk) if (rst_n) begin
    if (s_valid) begin
      checks++;
      if (s_i.crc !== ref_crc(s_i.data) || s_j.crc !== ref_crc(s_j.data)) failures++;
    end
    if (track_i && i_valid) begin
      checks++;
      if (i_val !== byte_t'(exp_i)) begin
        failures++;
        if (failures < 10) $display("i = %h, expected %h", i_val, exp_i[7:0]);
      end
      exp_i++;
    end
  end

  task automatic do_start(input logic [15:0][7:0] k, input int klen);
    @(negedge clk);
    key = k; key_len = 5'(klen); start = 1'b1;
    @(negedge clk);
    start = 1'b0;
  endtask

  // start, check the latency, then compare n keystream bytes with `ks`
  task automatic run_key(input logic [15:0][7:0] k, input int klen, input int n,
                         input byte_t ks []);
    int lat;
    do_start(k, klen);
    #1;
    exp_i = 0; track_i = 1'b1;
    lat = 0;  // falling edges after the rising edge that took start
    while (!z_valid) begin @(negedge clk); #1; lat++; end
    checks++;
    if (lat != 258) begin failures++; $display("latency %0d, expected 258", lat); end
    for (int c = 0; c < n; c++) begin
      checks++;
      if (!z_valid || z !== ks[c]) begin
        failures++;
        if (failures < 20) $display("key len %0d byte %0d: %h valid %b, expected %h", klen, c, z, z_valid, ks[c]);
      end
      @(negedge clk); #1;
    end
    track_i = 1'b0;
  endtask

  function automatic logic [15:0][7:0] str_key(input string s);
    logic [15:0][7:0] k;
    k = '0;
    for (int a = 0; a < s.len(); a++) k[a] = s[a];
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
    byte_t ks [];
    logic [15:0][7:0] k;
    byte_t            ival;

    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    checks++; if (state !== ST_IDLE || z_valid !== 1'b0) failures++;

    // published vectors: RFC 6229 key 0x0102030405, and three text keys
    k = '0; for (int a = 0; a < 5; a++) k[a] = byte_t'(a + 1);
    rc4_ref(k, 5, 700, ks);
    for (int c = 0; c < 16; c++) begin checks++; if (ks[c] !== v_rfc[c]) failures++; end
    run_key(k, 5, 700, ks);
    k = str_key("Key");    rc4_ref(k, 3, 10, ks);
    for (int c = 0; c < 10; c++) begin checks++; if (ks[c] !== v_key[c]) failures++; end
    run_key(k, 3, 10, ks);
    k = str_key("Wiki");   rc4_ref(k, 4, 6, ks);
    for (int c = 0; c < 6; c++) begin checks++; if (ks[c] !== v_wiki[c]) failures++; end
    run_key(k, 4, 6, ks);
    k = str_key("Secret"); rc4_ref(k, 6, 8, ks);
    for (int c = 0; c < 8; c++) begin checks++; if (ks[c] !== v_sec[c]) failures++; end
    run_key(k, 6, 8, ks);

    // random keys of every length
    for (int len = 1; len <= 16; len++) begin
      for (int a = 0; a < 16; a++) k[a] = byte_t'($urandom_range(0, 255));
      rc4_ref(k, len, 40, ks);
      run_key(k, len, 40, ks);
    end

    // a low no_fault during PRGA cancels the swap and halts the core
    k = str_key("halt-test-key"); rc4_ref(k, 13, 40, ks);
    run_key(k, 13, 10, ks);
    @(posedge clk); #1 no_fault = 1'b0;
    @(negedge clk); #1;
    checks++; if (z_valid !== 1'b0) failures++;       // no byte from the cancelled swap
    @(posedge clk); #1 no_fault = 1'b1;
    checks++; if (state !== ST_HALT || halted !== 1'b1) failures++;
    repeat (20) begin
      @(posedge clk); #1;
      checks++; if (z_valid !== 1'b0 || halted !== 1'b1) failures++;
    end
    // and during KSA
    do_start(k, 13);
    repeat (100) @(negedge clk);
    checks++; if (state !== ST_KSA) failures++;
    @(posedge clk); #1 no_fault = 1'b0;
    @(posedge clk); #1 no_fault = 1'b1;
    checks++; if (state !== ST_HALT) failures++;
    repeat (300) begin
      @(posedge clk); #1;
      checks++; if (z_valid !== 1'b0 || state !== ST_HALT) failures++;
    end
    // start restarts from a halt and the keystream is again correct
    run_key(k, 13, 40, ks);

    // fault masks reach the taps
    @(posedge clk); #1;
    ival = i_val;
    fi.i_flip = 8'h10; fi.sum_a_flip = 8'h01; fi.sum_b_flip = 8'h80;
    #1;
    checks++;
    if (i_val !== (ival ^ 8'h10)) failures++;
    checks++;
    if (tap_a.sum !== (byte_t'(tap_a.aug + tap_a.add) ^ 8'h01)) failures++;
    checks++;
    if (tap_b.sum !== (byte_t'(tap_b.aug + tap_b.add) ^ 8'h80)) failures++;
    fi = '0;

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
