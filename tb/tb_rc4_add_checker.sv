// tb_rc4_add_checker: self-checking test of the nibble parity-prediction
// addition checker.
// Random and corner-case operand pairs are presented with the correct sum
// (no fault expected) and with each of the 255 error patterns on the sum. An
// error is expected to be detected exactly when it flips an odd number of bits
// in at least one nibble. Detected counts per flipped-bit count are compared
// with the paper's table for the addition checker, which this scheme matches.
// The verdict must appear one clock after the inputs.
module tb_rc4_add_checker;
  import rc4_pkg::*;

  logic     clk = 1'b0, rst_n = 1'b0;
  add_tap_t tap = '0;
  logic     no_fault;
  int       checks = 0, failures = 0;
  int       det_by_w [9];
  int       paper_det [9] = '{0, 8, 16, 56, 32, 56, 16, 8, 0};

  always #5 clk = ~clk;

  rc4_add_checker dut (.clk, .rst_n, .tap, .no_fault);

  task automatic apply(input logic v, input byte_t a, input byte_t b, input byte_t s, input logic exp_ok);
    tap = '{valid: v, aug: a, add: b, sum: s};
    @(posedge clk); #1;
    tap.valid = 1'b0;
    checks++;
    if (no_fault !== exp_ok) begin
      failures++;
      if (failures < 10) $display("%h + %h = %h (v=%b): no_fault=%b expected %b", a, b, s, v, no_fault, exp_ok);
    end
  endtask

  initial begin
    #3000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    byte_t a, b, s;
    for (int w = 0; w < 9; w++) det_by_w[w] = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    checks++; if (no_fault !== 1'b1) failures++;
    // all operand pairs, correct sums
    for (int x = 0; x < 256; x++)
      for (int y = 0; y < 256; y += 3)
        apply(1'b1, byte_t'(x), byte_t'(y), byte_t'(x + y), 1'b1);
    apply(1'b1, 8'hFF, 8'hFF, 8'hFE, 1'b1);
    apply(1'b1, 8'h0F, 8'h01, 8'h10, 1'b1);
    // every error pattern on the sum, for several operand pairs
    for (int k = 0; k < 40; k++) begin
      a = (k == 0) ? 8'hFF : byte_t'($urandom_range(0, 255));
      b = (k == 0) ? 8'h01 : byte_t'($urandom_range(0, 255));
      s = a + b;
      for (int e = 1; e < 256; e++) begin
        logic odd_lo, odd_hi;
        odd_lo = ($countones(e[3:0]) % 2) == 1;
        odd_hi = ($countones(e[7:4]) % 2) == 1;
        apply(1'b1, a, b, s ^ byte_t'(e), !(odd_lo || odd_hi));
        if (k == 0 && (odd_lo || odd_hi)) det_by_w[$countones(e)]++;
      end
      apply(1'b0, a, b, s ^ 8'h01, 1'b1);
    end
    $display("sum errors detected by flipped-bit count (this design / published):");
    for (int w = 1; w < 9; w++) begin
      $display("  %0d bits: %0d  /  published %0d", w, det_by_w[w], paper_det[w]);
      checks++;
      if (det_by_w[w] != paper_det[w]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
