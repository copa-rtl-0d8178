// tb_secded_enc: self-checking test of the SEC-DED encoder (72,64).
//
// Checks, for fixed and random data words, properties worked out without the
// encoder's own loops:
//   - the data bits sit, in order, on the positions that are not powers of two;
//   - every one of the 7 check groups (positions with bit k set) has even
//     parity, and so does the whole 72-bit word;
//   - two data words that differ in one or two bits give codewords at least
//     4 bits apart (the minimum distance of a SEC-DED code).
// Two known words are compared with hand-worked codewords.
module tb_secded_enc;

  localparam int unsigned DW = 64, CW = 72;

  logic [DW-1:0] d_a, d_b;
  logic [CW-1:0] c_a, c_b;

  secded_enc #(.DATA_W(DW)) dut_a (.data_i(d_a), .code_o(c_a));
  secded_enc #(.DATA_W(DW)) dut_b (.data_i(d_b), .code_o(c_b));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s (data %h code %h)", what, d_a, c_a);
    end
  endtask

  // data positions listed explicitly: 3,5,6,7,9..15,17..31,33..63,65..71
  function automatic int data_pos(input int j);
    int n, pos;
    n = 0;
    for (pos = 3; pos < CW; pos++) begin
      if (pos != 4 && pos != 8 && pos != 16 && pos != 32 && pos != 64) begin
        if (n == j) return pos;
        n++;
      end
    end
    return -1;
  endfunction

  task automatic check_word();
    bit ok;
    #1;
    ok = 1'b1;
    for (int j = 0; j < DW; j++) if (c_a[data_pos(j)] != d_a[j]) ok = 1'b0;
    check(ok, "data bits in place");
    for (int k = 0; k < 7; k++) begin
      bit p;
      p = 1'b0;
      for (int pos = 1; pos < CW; pos++) if (pos[k]) p ^= c_a[pos];
      check(p == 1'b0, "check group parity even");
    end
    check((^c_a) == 1'b0, "overall parity even");
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    d_b = '0;
    // all zeros encodes to all zeros
    d_a = '0; check_word();
    check(c_a == '0, "zero word");
    // data bit 0 alone sits at position 3 = 1+2: check bits 1 and 2 set,
    // overall parity of three ones is odd, so bit 0 is set too
    d_a = 64'h1; check_word();
    check(c_a == 72'h00_0000_0000_0000_000F, "data bit 0");
    // data bit 63 sits at position 71 = 64+4+2+1: check bits 1,2,4,64 and
    // the overall parity bit (five ones so far, odd) set: positions 71,64,4,2,1,0
    d_a = 64'h8000_0000_0000_0000; check_word();
    check(c_a == 72'h81_0000_0000_0000_0017, "data bit 63");
    d_a = '1; check_word();
    for (int n = 0; n < 2000; n++) begin
      d_a = {$urandom, $urandom};
      check_word();
      d_b = d_a ^ (64'h1 << $urandom_range(0, 63));
      if (n % 2 == 1) d_b ^= 64'h1 << $urandom_range(0, 63);
      #1;
      if (d_b != d_a) check($countones(c_a ^ c_b) >= 4, "minimum distance 4");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
