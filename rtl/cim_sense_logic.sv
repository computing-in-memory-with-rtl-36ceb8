// cim_sense_logic: digital part of the modified sensing circuit of one column.
//
// Each column has two sense amplifiers, left (reference I_refl) and right
// (reference I_refr).  This block holds the gates behind them:
//   * XOR  = O_AND NOR O_NOR.  In the XOR/ADD configuration the left
//     amplifier uses the OR reference (its negative output is O_NOR) and the
//     right one the AND reference (its positive output is O_AND), so the NOR
//     gate takes left.vout_n and right.vout_p.
//   * mux sel0: 1 -> left positive output (READ, AND, OR),
//               0 -> right negative output (NOT, NAND, NOR).
//   * mux sel2: 1 -> XOR, 0 -> full-adder sum.
//   * mux sel1: 1 -> sel0 mux, 0 -> sel2 mux.
//   * full adder: S_n = O_XOR xor C_(n-1),
//                 C_n = (O_XOR and C_(n-1)) or O_AND.
// The gate equations and the sel values per operation are the paper's; which
// amplifier output each mux input takes is read from its control table
// (e.g. NOT enables only the right stack and sets sel0 = 0).  Combinational;
// the carry ripples from column to column through cin/cout.
//
// Interface: lp/ln, rp/rn (amplifier outputs), sel, cin in; out, o_xor, cout out.
module cim_sense_logic (
  input  logic       lp,     // left amplifier, positive output
  input  logic       ln,     // left amplifier, negative output
  input  logic       rp,     // right amplifier, positive output
  input  logic       rn,     // right amplifier, negative output
  input  logic [2:0] sel,    // sel0..sel2
  input  logic       cin,    // carry from the next less significant column
  output logic       out,    // column output
  output logic       o_xor,  // XOR tap, checked by the EDC unit
  output logic       cout    // carry to the next more significant column
);

  logic m0, m2, sum;

  assign o_xor = ~(rp | ln);
  assign sum   = o_xor ^ cin;
  assign cout  = (o_xor & cin) | rp;
  assign m0    = sel[0] ? lp : rn;
  assign m2    = sel[2] ? o_xor : sum;
  assign out   = sel[1] ? m0 : m2;

endmodule
