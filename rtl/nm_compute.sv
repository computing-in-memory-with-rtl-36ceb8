// nm_compute: near-memory recomputation of a CiM operation.
//
// When the EDC finds an error in a CiM operation other than XOR, or when the
// operands cannot be combined inside the array, the controller reads both
// operand rows conventionally (each read corrected by the EDC) and this block
// computes the operation on the corrected words, word by word for all N_WORDS
// words of the rows.  The fallback by two conventional reads is the paper's;
// computing it on whole rows at once (so vector operations are recomputed in
// one step) is this design's choice.  Combinational.
//
// Interface: op (cim_type_e), a[N_WORDS][32], b[N_WORDS][32] in; y[N_WORDS][32] out.
module nm_compute
  import cim_pkg::*;
#(
  parameter int N_WORDS = 8
) (
  input  cim_type_e         op,
  input  logic [WORD_W-1:0] a [N_WORDS],
  input  logic [WORD_W-1:0] b [N_WORDS],
  output logic [WORD_W-1:0] y [N_WORDS]
);

  always_comb begin
    for (int k = 0; k < N_WORDS; k++) begin
      unique case (op)
        CIM_READ: y[k] = a[k];
        CIM_NOT : y[k] = ~a[k];
        CIM_AND : y[k] = a[k] & b[k];
        CIM_OR  : y[k] = a[k] | b[k];
        CIM_NAND: y[k] = ~(a[k] & b[k]);
        CIM_NOR : y[k] = ~(a[k] | b[k]);
        CIM_XOR : y[k] = a[k] ^ b[k];
        CIM_ADD : y[k] = a[k] + b[k];
        default : y[k] = a[k];
      endcase
    end
  end

endmodule
