// cim_decoder: the CiM decoder of the STT-CiM array.
//
// Translates the 3-bit CIMType of an access into the nine control signals of
// the enhanced peripherals.  rwl0..2 and rwr0..2 switch on reference cells of
// the left and right reference stacks (R_REF, R_AP, R_P in that order), which
// sets the two reference currents I_refl and I_refr; sel0..2 steer the
// multiplexers of every column's sensing circuit.  The values are exactly the
// rows of the paper's control-signal table; where that table prints "x" for
// sel2 this design drives 0.  Purely combinational, no clock.
//
// Interface: cim_type (cim_type_e) in, ctrl (cim_ctrl_t) out.
module cim_decoder
  import cim_pkg::*;
(
  input  cim_type_e cim_type,
  output cim_ctrl_t ctrl
);

  always_comb begin
    ctrl = '0;
    unique case (cim_type)
      //                rwl2..0  rwr2..0  sel2..0
      CIM_READ: ctrl = '{3'b001, 3'b000, 3'b011};
      CIM_NOT : ctrl = '{3'b000, 3'b001, 3'b010};
      CIM_AND : ctrl = '{3'b101, 3'b000, 3'b011};
      CIM_OR  : ctrl = '{3'b011, 3'b000, 3'b011};
      CIM_NAND: ctrl = '{3'b000, 3'b101, 3'b010};
      CIM_NOR : ctrl = '{3'b000, 3'b011, 3'b010};
      CIM_XOR : ctrl = '{3'b011, 3'b101, 3'b100};
      CIM_ADD : ctrl = '{3'b011, 3'b101, 3'b000};
      default : ctrl = '0;
    endcase
  end

endmodule
