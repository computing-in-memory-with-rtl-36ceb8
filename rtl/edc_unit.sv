// edc_unit: Error Detection and Correction unit of the STT-CiM memory.
//
// Sits between the sensing circuits and the Reduce Unit / column multiplexer
// and decodes all N_WORDS 51-bit codewords of a sensed row in parallel, one
// 3EC4ED decoder (bch_decoder) per word.  For a CiM access the controller
// feeds it the XOR tap of the columns: the XOR of two codewords is a codeword,
// so errors in the operation are visible there.  For a normal read it gets the
// read data, for NOT the inverted output.  It reports, per word, whether an
// error was seen and whether it was beyond correction, and delivers the
// corrected data bits.  That the EDC checks the CiM XOR output and signals the
// controller follows the paper; one decoder per word is this design's choice.
// Combinational.
//
// Interface: cw[N_WORDS*51] in; data[N_WORDS][32], err[N_WORDS],
// uncorr[N_WORDS] out.
module edc_unit
  import cim_pkg::*;
#(
  parameter int N_WORDS = 8
) (
  input  logic [N_WORDS*CW_W-1:0] cw,
  output logic [WORD_W-1:0]       data   [N_WORDS],
  output logic [N_WORDS-1:0]      err,
  output logic [N_WORDS-1:0]      uncorr
);

  for (genvar w = 0; w < N_WORDS; w++) begin : g_word
    bch_decoder u_dec (
      .cw(cw[w*CW_W +: CW_W]), .data(data[w]), .err(err[w]), .uncorr(uncorr[w])
    );
  end

endmodule
