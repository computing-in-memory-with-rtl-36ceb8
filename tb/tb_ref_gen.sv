// tb_ref_gen: reference currents for every stack setting, computed here from
// the resistances (real arithmetic), and the ordering the sensing schemes
// need: I_AP-AP < I_ref-or < I_AP-P < I_ref-and < I_P-P, I_AP < I_REF < I_P.
module tb_ref_gen;
  import cim_pkg::*;
  int checks = 0, failures = 0;
  logic [2:0] rwl, rwr;
  cur_t il, ir;
  ref_gen dut (.rwl(rwl), .rwr(rwr), .i_refl(il), .i_refr(ir));

  function automatic real cell_i(real r);
    return 0.1 / (2000.0 + r) * 1.0e9;   // nA at V_read = 100 mV
  endfunction

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    #1000 $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish;
  end

  initial begin
    real ip, iap, iref, e;
    ip   = cell_i(11250.0);
    iap  = cell_i(25200.0);
    iref = cell_i(18225.0);
    for (int s = 0; s < 8; s++) begin
      rwl = 3'(s); rwr = 3'(7 - s);
      #1;
      e = (s[0] ? iref : 0.0) + (s[1] ? iap : 0.0) + (s[2] ? ip : 0.0);
      chk((real'(il) - e) < 3.0 && (e - real'(il)) < 3.0, $sformatf("left stack %b: %0d vs %f", s, il, e));
      e = ((7-s) & 1 ? iref : 0.0) + ((7-s) & 2 ? iap : 0.0) + ((7-s) & 4 ? ip : 0.0);
      chk((real'(ir) - e) < 3.0 && (e - real'(ir)) < 3.0, $sformatf("right stack %b: %0d vs %f", 7-s, ir, e));
    end
    // OR reference (R_REF + R_AP) and AND reference (R_REF + R_P)
    rwl = 3'b011; rwr = 3'b101; #1;
    chk(real'(il) > 2.0 * iap && real'(il) < iap + ip, "OR reference between AP-AP and AP-P");
    chk(real'(ir) > iap + ip && real'(ir) < 2.0 * ip, "AND reference between AP-P and P-P");
    rwl = 3'b001; #1;
    chk(real'(il) > iap && real'(il) < ip, "read reference between AP and P");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
