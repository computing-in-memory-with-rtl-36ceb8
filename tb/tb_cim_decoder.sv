// tb_cim_decoder: checks every CIMType against the control-signal table
// (rwl0-2, rwr0-2, sel0-2 per operation; sel2 "x" entries are not compared).
module tb_cim_decoder;
  import cim_pkg::*;
  int checks = 0, failures = 0;
  cim_type_e t;
  cim_ctrl_t c;
  cim_decoder dut (.cim_type(t), .ctrl(c));

  // columns: rwl0 rwl1 rwl2 rwr0 rwr1 rwr2 sel0 sel1 sel2 (2 = don't care)
  int tbl [8][9] = '{
    '{1,0,0, 0,0,0, 1,1,2},   // READ
    '{0,0,0, 1,0,0, 0,1,2},   // NOT
    '{1,0,1, 0,0,0, 1,1,2},   // AND
    '{1,1,0, 0,0,0, 1,1,2},   // OR
    '{0,0,0, 1,0,1, 0,1,2},   // NAND
    '{0,0,0, 1,1,0, 0,1,2},   // NOR
    '{1,1,0, 1,0,1, 0,0,1},   // XOR
    '{1,1,0, 1,0,1, 0,0,0}    // ADD
  };
  cim_type_e order [8] = '{CIM_READ, CIM_NOT, CIM_AND, CIM_OR, CIM_NAND, CIM_NOR, CIM_XOR, CIM_ADD};

  initial begin
    #1000 $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish;
  end

  initial begin
    for (int i = 0; i < 8; i++) begin
      logic [8:0] got;
      t = order[i];
      #1;
      got = {c.sel[2], c.sel[1], c.sel[0], c.rwr[2], c.rwr[1], c.rwr[0], c.rwl[2], c.rwl[1], c.rwl[0]};
      for (int j = 0; j < 9; j++) begin
        if (tbl[i][j] != 2) begin
          checks++;
          if (int'(got[j]) != tbl[i][j]) begin
            failures++;
            $display("FAIL op %s signal %0d: got %0d want %0d", t.name(), j, got[j], tbl[i][j]);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
