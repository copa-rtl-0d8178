// secded_enc: SEC-DED encoder for one PJA data word (72,64 at the default).
//
// Every 64-bit word of a PJA page is stored with a single-error-correcting,
// double-error-detecting code of 72 bits, the code the paper names for the
// STT-MRAM journal. The paper gives only the code's name; this design uses an
// extended Hamming code. Bit 0 of the codeword is the overall parity bit;
// bits 1 .. CODE_W-1 are Hamming positions: positions that are a power of two
// (1, 2, 4, ..., 64) hold check bits and the others hold the data bits in
// ascending order (data bit 0 at position 3, bit 1 at 5, bit 2 at 6, ...).
// Check bit 2^k makes the parity of all positions with bit k set even, so
// the XOR of the positions of all set bits (the syndrome) of a valid codeword
// is zero; the overall parity bit then makes the parity of all CODE_W bits
// even. The code is systematic: 64 of the 72 code bits are the data bits
// themselves, wired straight through. The matching decoder is secded_dec.
//
// Interface and timing: purely combinational, data_i -> code_o.
module secded_enc
#(
  parameter  int unsigned DATA_W = copa_pkg::CFG_WORD_W,
  localparam int unsigned CHK_W  = copa_pkg::secded_checks(DATA_W),
  localparam int unsigned CODE_W = DATA_W + CHK_W + 1
) (
  input  logic [DATA_W-1:0] data_i,
  output logic [CODE_W-1:0] code_o
);

  always_comb begin
    logic [CODE_W-1:0] c;
    int unsigned       j;
    logic              x;
    c = '0;
    j = 0;
    // place the data bits on the positions that are not powers of two
    for (int unsigned i = 1; i < CODE_W; i++) begin
      if ((i & (i - 1)) != 0) begin
        c[i] = data_i[j];
        j++;
      end
    end
    // check bit 2^k: parity of the data positions with bit k set
    for (int unsigned k = 0; k < CHK_W; k++) begin
      x = 1'b0;
      for (int unsigned i = 1; i < CODE_W; i++)
        if (((i >> k) & 1) != 0 && (i & (i - 1)) != 0) x ^= c[i];
      c[1 << k] = x;
    end
    // overall parity over the Hamming part
    c[0] = ^c[CODE_W-1:1];
    code_o = c;
  end

endmodule
