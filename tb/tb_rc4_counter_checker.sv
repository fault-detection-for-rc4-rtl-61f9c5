// tb_rc4_counter_checker: self-checking test of the i-counter checker.
// A correct count running through several wraps of 0..255 must never be
// flagged. Then, in each of the eight slots of a window, the count is replaced
// by the correct value XOR each of the 255 error patterns; a count that skips
// or repeats a value is also tried. The expected verdict comes from a direct
// evaluation of the three counting rules on the window contents. Values are
// taken on falling edges; the verdict must appear on the falling edge that
// takes the eighth value of a window and at no other time. Detected counts per flipped-bit count are printed next to the paper's.
module tb_rc4_counter_checker;
  import rc4_pkg::*;

  logic  clk = 1'b0, rst_n = 1'b0, restart = 1'b0, i_valid = 1'b0;
  byte_t i_val = '0;
  logic  no_fault;
  int    checks = 0, failures = 0;
  int    det_by_w [9];
  int    paper_det [9] = '{0, 8, 20, 56, 55, 56, 20, 8, 1};
  int    base = 0;

  always #5 clk = ~clk;

  rc4_counter_checker dut (.clk, .rst_n, .restart, .i_valid, .i_val, .no_fault);

  // rules evaluated with $countones, independently of the design's functions
  function automatic logic window_good(input byte_t w [8]);
    for (int m = 0; m < 4; m++) begin
      if (($countones(w[m] & 8'h55) % 2) == ($countones(w[m+4] & 8'h55) % 2)) return 1'b0;
      if (($countones(w[m] & 8'hAA) % 2) != ($countones(w[m+4] & 8'hAA) % 2)) return 1'b0;
    end
    for (int m = 1; m < 8; m++)
      if ((w[m][7] ^ w[m][3]) != (w[0][7] ^ w[0][3])) return 1'b0;
    return 1'b1;
  endfunction

  // feed one window of eight values on consecutive clocks and check the
  // verdict after each value
  task automatic feed(input byte_t w [8]);
    logic exp_ok;
    exp_ok = window_good(w);
    for (int m = 0; m < 8; m++) begin
      i_valid = 1'b1; i_val = w[m];
      @(negedge clk); #1;
      checks++;
      if (no_fault !== ((m == 7) ? exp_ok : 1'b1)) begin
        failures++;
        if (failures < 10) $display("slot %0d value %h: no_fault=%b", m, w[m], no_fault);
      end
    end
    i_valid = 1'b0;
  endtask

  initial begin
    #8000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    byte_t w [8];
    for (int k = 0; k < 9; k++) det_by_w[k] = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    @(posedge clk) restart = 1'b1;
    @(posedge clk) restart = 1'b0;
    #1;
    // correct count over four wraps; idle clocks in between must not matter
    for (int n = 0; n < 1024; n += 8) begin
      for (int m = 0; m < 8; m++) w[m] = byte_t'(n + m);
      feed(w);
      checks++; if (window_good(w) !== 1'b1) failures++;
      if (n % 64 == 0) begin @(posedge clk); #1; checks++; if (no_fault !== 1'b1) failures++; end
    end
    // one corrupted value per window, every slot, every error pattern
    for (int slot = 0; slot < 8; slot++)
      for (int e = 1; e < 256; e++) begin
        base = (base + 8) % 256;
        for (int m = 0; m < 8; m++) w[m] = byte_t'(base + m);
        w[slot] = w[slot] ^ byte_t'(e);
        if (slot == 0 && !window_good(w)) det_by_w[$countones(e)]++;
        feed(w);
      end
    // skipped and repeated counts
    for (int m = 0; m < 8; m++) w[m] = byte_t'(16 + m + (m >= 4 ? 1 : 0));
    feed(w);
    checks++; if (no_fault !== 1'b0) failures++;
    for (int m = 0; m < 8; m++) w[m] = byte_t'(32 + (m == 5 ? 4 : m));
    feed(w);
    checks++; if (no_fault !== 1'b0) failures++;
    // restart realigns the window
    i_valid = 1'b1; i_val = 8'h00; @(negedge clk); #1; i_valid = 1'b0;
    @(posedge clk) restart = 1'b1;
    @(posedge clk) restart = 1'b0;
    for (int m = 0; m < 8; m++) w[m] = byte_t'(40 + m);
    feed(w);
    $display("single-value errors detected by flipped-bit count (this design / published):");
    for (int k = 1; k < 9; k++)
      $display("  %0d bits: %0d  /  published %0d", k, det_by_w[k], paper_det[k]);
    checks++;
    if (det_by_w[1] + det_by_w[2] + det_by_w[3] + det_by_w[4] + det_by_w[5] +
        det_by_w[6] + det_by_w[7] + det_by_w[8] != 224) failures++;  // paper total
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
