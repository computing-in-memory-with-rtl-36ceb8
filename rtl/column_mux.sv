// column_mux: the (N_WORDS+1)-to-1 column multiplexer of the STT-CiM memory.
//
// Chooses what leaves the memory on the 32-bit data output: one of the
// N_WORDS words of the sensed (and corrected) row, selected by the word
// address, or - select value N_WORDS - the Reduce Unit's output.  The N+1
// inputs follow the paper; the select encoding is this design's.
// Combinational.
//
// Interface: words[N_WORDS][32], ru_out, sel in; dout out.
module column_mux
  import cim_pkg::*;
#(
  parameter int N_WORDS = 8,
  parameter int SEL_W   = $clog2(N_WORDS + 1)
) (
  input  logic [WORD_W-1:0] words [N_WORDS],
  input  logic [WORD_W-1:0] ru_out,
  input  logic [SEL_W-1:0]  sel,
  output logic [WORD_W-1:0] dout
);

  always_comb begin
    dout = ru_out;
    for (int k = 0; k < N_WORDS; k++) begin
      if (int'(sel) == k) dout = words[k];
    end
  end

endmodule
