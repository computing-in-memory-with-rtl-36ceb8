// ref_gen: behavioural model of the modified global reference generation.
//
// Analog block: two reference stacks, each of three reference bit-cells
// programmed to R_REF, R_AP and R_P, whose access transistors are gated by
// rwl0..2 (left stack) and rwr0..2 (right stack).  The current a stack sinks
// is the sum of the currents of its enabled cells, so the CiM decoder can set
//   I_REF          (read reference, R_REF alone),
//   I_REF + I_AP   (OR reference, between I_AP-AP and I_AP-P),
//   I_REF + I_P    (AND reference, between I_AP-P and I_P-P).
// That stacks of R_P, R_AP and R_REF cells are selected by rwl/rwr follows the
// paper; that enabled cells add their currents in parallel is this model's
// reading of it.  Currents are unsigned integers in nA (cim_pkg).  Not
// synthesizable in the sense of a real circuit: it stands for the analog
// reference stacks; combinational.
//
// Interface: ctrl (only rwl, rwr used) in; i_refl, i_refr out.
module ref_gen
  import cim_pkg::*;
(
  input  logic [2:0] rwl,
  input  logic [2:0] rwr,
  output cur_t       i_refl,
  output cur_t       i_refr
);

  function automatic cur_t stack_current(logic [2:0] en);
    int s;
    s = 0;
    if (en[0]) s += I_REF_NA;
    if (en[1]) s += I_AP_NA;
    if (en[2]) s += I_P_NA;
    return cur_t'(s);
  endfunction

  assign i_refl = stack_current(rwl);
  assign i_refr = stack_current(rwr);

endmodule
