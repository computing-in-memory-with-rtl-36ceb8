// reduce_unit: Reduce Unit (RU) of the STT-CiM memory.
//
// A vector CiM access produces N_WORDS results in one array access; the RU,
// placed before the column multiplexer, folds them into one 32-bit word so the
// narrow I/O path carries a single value.  The two reductions the paper
// lists are built:
//   RU_SUM  : RuOut = IN_1 + IN_2 + ... (modulo 2^32)
//   RU_ZCMP : RuOut[k] = (IN_k == 0) ? 0 : 1, other bits 0
// Only words whose valid bit is set take part (vector length 4 or 8 within a
// row of 8); they are numbered IN_1, IN_2, ... in order of increasing index,
// so zero-compare bit 0 belongs to the first valid word.  Combinational.
//
// Interface: in[N_WORDS][32], valid[N_WORDS], op (ru_op_e) in; out[31:0] out.
module reduce_unit
  import cim_pkg::*;
#(
  parameter int N_WORDS = 8
) (
  input  logic [WORD_W-1:0]  in    [N_WORDS],
  input  logic [N_WORDS-1:0] valid,
  input  ru_op_e             op,
  output logic [WORD_W-1:0]  out
);

  always_comb begin
    logic [WORD_W-1:0] sum, zc;
    int j;
    sum = '0;
    zc  = '0;
    j   = 0;
    for (int k = 0; k < N_WORDS; k++) begin
      if (valid[k]) begin
        sum = sum + in[k];
        if (j < WORD_W) zc[j] = (in[k] != '0);
        j++;
      end
    end
    case (op)
      RU_SUM : out = sum;
      RU_ZCMP: out = zc;
      default: out = '0;
    endcase
  end

endmodule
