// tb_secded_dec: self-checking test of the SEC-DED decoder (72,64).
//
// Codewords are built by the test's own encoder, written from the parity-check
// rule (check bit 2^k covers every position with bit k set; bit 0 is the
// overall parity), not taken from the design. Each random word is presented
// clean, with one flipped bit (every position, including the check and parity
// bits, is exercised) and with two flipped bits. Expected: clean words pass
// unflagged, single errors are corrected and flagged as corrected, double
// errors are flagged as uncorrectable.
module tb_secded_dec;

  localparam int unsigned DW = 64, CW = 72;

  logic [CW-1:0] code;
  logic [DW-1:0] data;
  logic ce, ue;

  secded_dec #(.DATA_W(DW)) dut (.code_i(code), .data_o(data), .ce_o(ce), .ue_o(ue));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s (code %h data %h ce %b ue %b)", what, code, data, ce, ue);
    end
  endtask

  function automatic logic [CW-1:0] ref_encode(input logic [DW-1:0] d);
    logic [CW-1:0] c;
    int j;
    c = '0;
    j = 0;
    for (int pos = 1; pos < CW; pos++)
      if (!$onehot(pos)) begin c[pos] = d[j]; j++; end
    for (int k = 0; k < 7; k++) begin
      bit p;
      p = 1'b0;
      for (int pos = 1; pos < CW; pos++) if (pos[k] && !$onehot(pos)) p ^= c[pos];
      c[1 << k] = p;
    end
    c[0] = ^c;
    return c;
  endfunction

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [DW-1:0] d;
    logic [CW-1:0] good;
    int a, b;
    for (int n = 0; n < 1500; n++) begin
      d = (n == 0) ? '0 : (n == 1) ? '1 : {$urandom, $urandom};
      good = ref_encode(d);
      code = good; #1;
      check(data == d && !ce && !ue, "clean word");
      a = n % CW;
      code = good ^ (CW'(1) << a); #1;
      check(data == d && ce && !ue, "single error corrected");
      b = $urandom_range(0, CW - 2);
      if (b >= a) b++;
      code = good ^ (CW'(1) << a) ^ (CW'(1) << b); #1;
      check(ue && !ce, "double error detected");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
