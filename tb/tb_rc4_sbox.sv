// tb_rc4_sbox: self-checking test of the CRC-encoded S-box.
// Checks the identity initialisation (data and CRC of every element, the CRC
// computed here by polynomial long division), random swaps, swaps with equal
// addresses, and the bit-flip port, against a model array kept by the bench.
// The S-box writes on the falling edge, so the bench drives on the rising edge.
module tb_rc4_sbox;
  import rc4_pkg::*;

  logic   clk = 1'b0;
  logic   init = 1'b0, swap_en = 1'b0, flip_en = 1'b0;
  byte_t  ra = '0, rb = '0, rc = '0, rd = '0, sa = '0, sb = '0, fa = '0;
  selem_t qa, qb, qc, qd, fm = '0;

  int     checks = 0, failures = 0;
  logic [11:0] model [256];

  always #5 clk = ~clk;

  rc4_sbox dut (
    .clk(clk), .init(init), .rd_a_addr(ra), .rd_a(qa), .rd_b_addr(rb), .rd_b(qb),
    .rd_c_addr(rc), .rd_c(qc), .rd_d_addr(rd), .rd_d(qd),
    .swap_en(swap_en), .swap_a(sa), .swap_b(sb),
    .flip_en(flip_en), .flip_addr(fa), .flip_mask(fm)
  );

  function automatic logic [3:0] ref_crc(input logic [7:0] d);
    logic [11:0] r;
    r = {d, 4'b0000};
    for (int b = 11; b >= 4; b--) if (r[b]) r = r ^ (12'b1_1001 << (b - 4));
    return r[3:0];
  endfunction

  task automatic check_all();
    for (int n = 0; n < 256; n++) begin
      ra = byte_t'(n); rb = byte_t'(255 - n); rc = byte_t'((n * 7) & 255); rd = byte_t'(n) ^ 8'h5A;
      #1;
      checks++;
      if (qa !== model[n] || qb !== model[255 - n] || qc !== model[(n * 7) & 255] ||
          qd !== model[byte_t'(n) ^ 8'h5A]) begin
        failures++;
        if (failures < 10) $display("mismatch at %0d: %h (model %h)", n, qa, model[n]);
      end
    end
    @(posedge clk);
  endtask

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    @(posedge clk);
    init = 1'b1;
    @(posedge clk);
    init = 1'b0;
    for (int n = 0; n < 256; n++) model[n] = {n[7:0], ref_crc(n[7:0])};
    check_all();
    // a few known residues of x^4 + x^3 + 1
    ra = 8'h01; #1; checks++; if (qa.crc !== 4'b1001) failures++;
    ra = 8'h80; #1; checks++; if (qa.crc !== ref_crc(8'h80)) failures++;
    // random swaps, including equal addresses
    for (int k = 0; k < 600; k++) begin
      logic [11:0] tmp;
      sa = byte_t'($urandom_range(0, 255));
      sb = (k % 17 == 0) ? sa : byte_t'($urandom_range(0, 255));
      swap_en = 1'b1;
      flip_en = (k % 5 == 0);
      fa = (k % 15 == 0) ? sb : byte_t'($urandom_range(0, 255));
      fm = selem_t'(12'($urandom_range(1, 4095)));
      @(posedge clk);
      tmp = model[sa]; model[sa] = model[sb]; model[sb] = tmp;
      if (flip_en) model[fa] = model[fa] ^ fm;
      swap_en = 1'b0; flip_en = 1'b0;
      if (k % 100 == 99) check_all();
    end
    check_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
