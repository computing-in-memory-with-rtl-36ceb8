// ecc_encoder: 3EC4ED encoder for one 32-bit word.
//
// The paper protects STT-CiM with a code that corrects three and detects four
// errors per word, and relies on the code being linear: the bitwise XOR of two
// stored codewords, which every CiM access can produce, is again the codeword
// of the XOR of the data.  This design uses a binary BCH code of length 63 and
// designed distance 7 (generator g(x) = m1(x) m3(x) m5(x) over GF(2^6)),
// shortened to 32 data bits, plus an overall parity bit, giving a 51-bit
// codeword with distance 8.  The choice of BCH is this design's; the paper
// gives only the correction strength.
//
// Systematic encoding: check = (d(x) * x^18) mod g(x); codeword bits 0..17 are
// the check bits, 18..49 the data, bit 50 makes the total parity even.
// Combinational.
//
// Interface: data[31:0] in; cw[50:0] out.
module ecc_encoder
  import cim_pkg::*;
(
  input  logic [WORD_W-1:0] data,
  output logic [CW_W-1:0]   cw
);

  logic [BCH_R-1:0] rem;

  always_comb begin
    // long division of d(x) x^18 by g(x), most significant data bit first
    rem = '0;
    for (int i = WORD_W - 1; i >= 0; i--) begin
      logic fb;
      fb  = data[i] ^ rem[BCH_R-1];
      rem = {rem[BCH_R-2:0], 1'b0};
      if (fb) rem ^= BCH_G[BCH_R-1:0];
    end
    cw[BCH_R-1:0]          = rem;
    cw[BCH_R +: WORD_W]    = data;
    cw[CW_W-1]             = ^{rem, data};
  end

endmodule
