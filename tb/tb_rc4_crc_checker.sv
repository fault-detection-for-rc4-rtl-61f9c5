// tb_rc4_crc_checker: self-checking test of the CRC checker.
// Every byte value is presented with its correct CRC (no fault expected), then
// with every one of the 255 error patterns on its 8 data bits, on S[i] and on
// S[j] in turn, and with every error pattern on its CRC bits. The expected
// verdict comes from a CRC computed here by polynomial long division. The
// verdict must appear on the falling edge that takes the inputs. The number of
// detected data-bit patterns, by the number of flipped bits, is printed next
// to the counts the paper reports.
module tb_rc4_crc_checker;
  import rc4_pkg::*;

  logic   clk = 1'b0, rst_n = 1'b0, valid = 1'b0;
  selem_t s_i = '0, s_j = '0;
  logic   no_fault;
  int     checks = 0, failures = 0;
  int     det_by_w [9];
  int     tot_by_w [9];
  int     paper_det [9] = '{0, 8, 21, 56, 70, 56, 0, 8, 0};

  always #5 clk = ~clk;

  rc4_crc_checker dut (.clk, .rst_n, .valid, .s_i, .s_j, .no_fault);

  function automatic logic [3:0] ref_crc(input logic [7:0] d);
    logic [11:0] r;
    r = {d, 4'b0000};
    for (int b = 11; b >= 4; b--) if (r[b]) r = r ^ (12'b1_1001 << (b - 4));
    return r[3:0];
  endfunction

  // apply one pair, then check the registered verdict one clock later
  task automatic apply(input logic v, input logic [11:0] a, input logic [11:0] b, input logic exp_ok);
    valid = v; s_i = selem_t'(a); s_j = selem_t'(b);
    @(negedge clk); #1;
    valid = 1'b0;
    checks++;
    if (no_fault !== exp_ok) begin
      failures++;
      if (failures < 10) $display("a=%h b=%h v=%b: no_fault=%b expected %b", a, b, v, no_fault, exp_ok);
    end
  endtask

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int w = 0; w < 9; w++) begin det_by_w[w] = 0; tot_by_w[w] = 0; end
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    checks++; if (no_fault !== 1'b1) failures++;
    for (int d = 0; d < 256; d++) begin
      logic [11:0] good;
      good = {d[7:0], ref_crc(d[7:0])};
      apply(1'b1, good, {8'(255 - d), ref_crc(8'(255 - d))}, 1'b1);
      for (int e = 1; e < 256; e++) begin
        logic exp_ok;
        exp_ok = (ref_crc(d[7:0] ^ e[7:0]) == ref_crc(d[7:0]));
        if (d[1:0] == 2'b00) apply(1'b1, good ^ {e[7:0], 4'b0}, good, exp_ok);
        else                 apply(1'b1, good, good ^ {e[7:0], 4'b0}, exp_ok);
        if (d == 0) begin
          tot_by_w[$countones(e)]++;
          if (!exp_ok) det_by_w[$countones(e)]++;
        end
      end
      for (int e = 1; e < 16; e++) apply(1'b1, good ^ 12'(e), good, 1'b0);
      // invalid cycles are never flagged
      apply(1'b0, good ^ 12'h010, good ^ 12'h001, 1'b1);
    end
    $display("data-bit errors detected by flipped-bit count (this design / published):");
    for (int w = 1; w < 9; w++)
      $display("  %0d bits: %0d of %0d  /  published %0d", w, det_by_w[w], tot_by_w[w], paper_det[w]);
    // linear code: exactly the 15 nonzero multiples of x^4+x^3+1 below degree 8 go undetected
    checks++;
    if (det_by_w[1] + det_by_w[2] + det_by_w[3] + det_by_w[4] + det_by_w[5] +
        det_by_w[6] + det_by_w[7] + det_by_w[8] != 255 - 15) failures++;
    checks++; if (det_by_w[1] != 8) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
