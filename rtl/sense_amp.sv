// sense_amp: behavioural model of one current sense amplifier.
//
// Analog block.  The source-line current I_SL enters the positive input and a
// reference current the negative input; the positive output is 1 when I_SL is
// larger than the reference and the negative output is its complement.  With
// the OR reference the outputs are OR/NOR of the two enabled cells, with the
// AND reference AND/NAND, with the read reference the stored bit and its
// inverse.  The latch-type circuit of the paper is reduced to this ideal
// comparison; its enable and precharge timing are not modelled.
// Combinational.
//
// Interface: i_sl, i_ref (cur_t, nA) in; vout_p, vout_n out.
module sense_amp
  import cim_pkg::*;
(
  input  cur_t i_sl,
  input  cur_t i_ref,
  output logic vout_p,
  output logic vout_n
);

  assign vout_p = (i_sl > i_ref);
  assign vout_n = ~vout_p;

endmodule
