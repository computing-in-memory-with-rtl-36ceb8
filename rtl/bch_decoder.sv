// bch_decoder: 3EC4ED decoder for one 51-bit codeword (helper of edc_unit).
//
// Decodes the shortened BCH(63,45) + overall-parity code of ecc_encoder.
//   1. Syndromes S1, S3, S5 of bits 0..49 in GF(2^6): S_k = sum r_i alpha^(k i),
//      and the overall parity of all 51 bits.
//   2. Error locator by Peterson's direct solution for t = 3:
//        D = S1^3 + S3;  D = 0 -> one error at X = S1 (valid only if S5 = S1^5);
//        otherwise sigma1 = S1, sigma2 = (S1^2 S3 + S5) / D,
//                  sigma3 = D + S1 sigma2  (sigma3 = 0 means two errors).
//   3. Search over the 50 bit positions: position i is in error when
//        X^3 + sigma1 X^2 + sigma2 X + sigma3 = 0 for X = alpha^i.
//   4. The number of roots must equal the number of errors, and its parity
//      must agree with the overall parity check; one more error than the BCH
//      part found is allowed in the parity bit itself.  Otherwise the word
//      has four (or more) errors: uncorrectable.
// Up to three errors anywhere are corrected, four are detected.  The decoding
// method is this design's; the paper only asks for 3EC4ED.  Combinational.
//
// Interface: cw[50:0] in; data[31:0] (corrected), err (any error seen),
// uncorr (errors beyond correction) out.
module bch_decoder
  import cim_pkg::*;
(
  input  logic [CW_W-1:0]   cw,
  output logic [WORD_W-1:0] data,
  output logic              err,
  output logic              uncorr
);

  localparam int NB = CW_W - 1;   // BCH bits, 50

  gf_t s1, s3, s5, d, sg1, sg2, sg3;
  logic par;
  logic [NB-1:0] roots;
  logic [CW_W-1:0] fixed;
  int nerr, nroots;

  always_comb begin
    s1 = '0; s3 = '0; s5 = '0;
    for (int i = 0; i < NB; i++) begin
      if (cw[i]) begin
        s1 ^= gf_alpha_pow(i);
        s3 ^= gf_alpha_pow(3 * i);
        s5 ^= gf_alpha_pow(5 * i);
      end
    end
    par = ^cw;

    d = gf_mul(gf_mul(s1, s1), s1) ^ s3;
    if (d == '0) begin
      sg1 = s1; sg2 = '0; sg3 = '0;
      nerr = (s1 == '0) ? 0 : 1;
    end else begin
      sg1 = s1;
      sg2 = gf_mul(gf_mul(gf_mul(s1, s1), s3) ^ s5, gf_inv(d));
      sg3 = d ^ gf_mul(s1, sg2);
      nerr = (sg3 == '0) ? 2 : 3;
    end

    nroots = 0;
    for (int i = 0; i < NB; i++) begin
      gf_t x, x2;
      x  = gf_alpha_pow(i);
      x2 = gf_mul(x, x);
      roots[i] = ((gf_mul(x2, x) ^ gf_mul(sg1, x2) ^ gf_mul(sg2, x) ^ sg3) == '0);
      nroots += int'(roots[i]);
    end

    fixed  = cw;
    err    = (s1 != '0) || (s3 != '0) || (s5 != '0) || par;
    uncorr = 1'b0;
    if (s1 == '0 && s3 == '0 && s5 == '0) begin
      // BCH part clean: a parity mismatch is a single error in bit 50
      if (par) fixed[CW_W-1] = ~cw[CW_W-1];
    end else if (nroots != nerr || nerr == 0 ||
                 (nerr == 1 && s5 != gf_mul(gf_mul(s1, s1), gf_mul(gf_mul(s1, s1), s1)))) begin
      uncorr = 1'b1;
    end else if ((nerr % 2 == 1) == par) begin
      fixed[NB-1:0] = cw[NB-1:0] ^ roots;
    end else if (nerr <= 2) begin
      fixed[NB-1:0]  = cw[NB-1:0] ^ roots;
      fixed[CW_W-1]  = ~cw[CW_W-1];
    end else begin
      uncorr = 1'b1;
    end
    data = fixed[DATA_LSB +: WORD_W];
  end

endmodule
