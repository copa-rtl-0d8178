// secded_dec: SEC-DED decoder for one PJA codeword (72,64 at the default).
//
// Checks and corrects a codeword written by secded_enc (extended Hamming code;
// see there for the bit layout). The syndrome is the XOR of the positions
// 1 .. CODE_W-1 of all set bits and is zero for a valid word; the parity of
// all CODE_W bits is even for a valid word. Then:
//   syndrome 0, parity even   no error;
//   syndrome s, parity odd    one bit flipped: the bit at position s (or, for
//                             s = 0, the overall parity bit) is corrected;
//   syndrome s, parity even   two bits flipped: detected, not correctable;
//   s beyond the last position with odd parity: three or more bits flipped,
//                             reported as uncorrectable.
// In the design this is the read path used when the journal is read back for
// recovery after a power failure, which the paper gives as the only time PJA
// pages are read. The paper names the code only; the layout is this design's.
//
// Interface and timing: purely combinational. data_o is the corrected data,
// ce_o flags a corrected single error and ue_o an uncorrectable one (data_o is
// then the received data bits unchanged).
module secded_dec
#(
  parameter  int unsigned DATA_W = copa_pkg::CFG_WORD_W,
  localparam int unsigned CHK_W  = copa_pkg::secded_checks(DATA_W),
  localparam int unsigned CODE_W = DATA_W + CHK_W + 1
) (
  input  logic [CODE_W-1:0] code_i,
  output logic [DATA_W-1:0] data_o,
  output logic              ce_o,
  output logic              ue_o
);

  logic [CHK_W-1:0] syndrome;
  logic             parity_odd;

  always_comb begin
    syndrome = '0;
    for (int unsigned i = 1; i < CODE_W; i++)
      if (code_i[i]) syndrome ^= CHK_W'(i);
    parity_odd = ^code_i;
  end

  always_comb begin
    logic [CODE_W-1:0] c;
    int unsigned       j;
    c    = code_i;
    ce_o = 1'b0;
    ue_o = 1'b0;
    if (parity_odd) begin
      if (int'(syndrome) < CODE_W) begin
        ce_o = 1'b1;
        for (int unsigned i = 1; i < CODE_W; i++)
          if (i == int'(syndrome)) c[i] = ~c[i];
      end else begin
        ue_o = 1'b1;
      end
    end else if (syndrome != '0) begin
      ue_o = 1'b1;
    end
    j = 0;
    data_o = '0;
    for (int unsigned i = 1; i < CODE_W; i++) begin
      if ((i & (i - 1)) != 0) begin
        data_o[j] = c[i];
        j++;
      end
    end
  end

  // at most one of the two flags
  always_comb assert (!(ce_o && ue_o));

endmodule
